// cic_conveyor_tb: a 6-slot conveyor (as in the paper's CIC drawing) with
// random data per slot. Every output word is compared with the direct-form
// second-order CIC: the sum of the slot's inputs weighted by the triangle
// h = ones(R) * ones(R) over the last 2R-1 frames, shifted right. Run
// twice: R = 4, shift 0 and R = 2, shift 1, with a reset in between.
module cic_conveyor_tb;
  import llrf_pkg::*;
  localparam int NS = 6, RB = 4, NF = 200;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  iq_stream_t si, so;
  logic [RB-1:0] dec;
  logic [4:0] shift;
  cic_conveyor #(.NSLOT(NS), .ORDER(2), .RBITS(RB)) dut (
    .clk, .rst, .in(si), .dec, .shift, .out(so));

  int checks = 0, failures = 0, nout;
  int x [NF][NS];
  int dumps [$];
  int exp_q [$];

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_out(int f, int s, int r, int sh);
    longint acc = 0;
    for (int j = 0; j <= 2 * r - 2; j++) begin
      automatic int h = (j < r) ? j + 1 : 2 * r - 1 - j;
      if (f - j >= 0) acc += longint'(h) * x[f - j][s];
    end
    return int'(acc >>> sh);
  endfunction

  task automatic run(input int r, input int sh);
    rst = 1; si = '0; dec = RB'(r - 1); shift = 5'(sh); nout = 0;
    exp_q.delete();
    repeat (3) @(negedge clk);
    rst = 0;
    for (int f = 0; f < NF; f++)
      for (int s = 0; s < NS; s++) x[f][s] = int'($urandom_range(0, 400)) - 200;
    for (int f = 0; f < NF; f++) begin
      if (f % r == r - 1)
        for (int s = 0; s < NS; s++) exp_q.push_back(ref_out(f, s, r, sh));
      for (int s = 0; s < NS; s++) begin
        si.valid = 1; si.first = (s == 0); si.slot = SLOT_W'(s); si.mode = 4'd1;
        si.data = iq_t'(x[f][s]);
        @(negedge clk);
        if (so.valid) begin
          automatic int e = exp_q.pop_front();
          checks++; nout++;
          if (int'(so.data) != e) begin failures++; $display("R=%0d out %0d got %0d exp %0d", r, nout, so.data, e); end
        end
      end
    end
    si = '0;
    repeat (4) begin
      @(negedge clk);
      if (so.valid) begin
        automatic int e = exp_q.pop_front();
        checks++; nout++;
        if (int'(so.data) != e) begin failures++; $display("R=%0d tail got %0d exp %0d", r, so.data, e); end
      end
    end
    checks++;
    if (nout != (NF / r) * NS) begin failures++; $display("R=%0d: %0d outputs, exp %0d", r, nout, (NF / r) * NS); end
  endtask

  initial begin
    run(4, 0);
    run(2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
