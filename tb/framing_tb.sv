// framing_tb: random I/Q on 14 channels change every clock. Each frame must
// be 28 slots, start with first=1 at slot 0, carry the mode, and contain
// I1..I14, Q1..Q14 of the inputs present at the clock edge that started it.
module framing_tb;
  import llrf_pkg::*;
  localparam int NCH = 14;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  iq_t ii [NCH], qq [NCH], fi [NCH], fq [NCH];
  logic [MODE_W-1:0] mode;
  iq_stream_t s;
  framing #(.NCH(NCH)) dut (.clk, .rst, .i_in(ii), .q_in(qq), .mode, .strm(s));

  int checks = 0, failures = 0, nframes = 0, since_first = -1;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = 4'd5;
    for (int c = 0; c < NCH; c++) begin ii[c] = 0; qq[c] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 1000; t++) begin
      if (s.valid) begin
        if (s.first) begin
          if (since_first >= 0) begin
            checks++;
            if (since_first != 2 * NCH) begin failures++; $display("frame length %0d", since_first); end
          end
          since_first = 0;
          nframes++;
          fi = ii; fq = qq;
        end
        if (since_first >= 0) begin
          automatic iq_t e = (since_first < NCH) ? fi[since_first] : fq[since_first - NCH];
          checks++;
          if (s.data != e || 32'(s.slot) != since_first || s.mode != mode) begin
            failures++;
            $display("slot %0d: got %0d (slot %0d) exp %0d", since_first, s.data, s.slot, e);
          end
          since_first++;
        end
      end
      for (int c = 0; c < NCH; c++) begin
        ii[c] = iq_t'($urandom);
        qq[c] = iq_t'($urandom);
      end
      @(negedge clk);
    end
    checks++;
    if (nframes < 30) begin failures++; $display("only %0d frames", nframes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
