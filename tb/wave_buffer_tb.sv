// wave_buffer_tb: 64-word buffer (two banks of 32), 8 post-trigger words.
// Word n carries data n. An RF permit drop at word T must freeze bank 0
// with the last word T+8, fault=1, trig_ptr = T mod 32, and every address a
// holding the newest word n <= T+8 with n mod 32 = a. Writing moves to
// bank 1; a host trigger freezes it too; writing then pauses until the
// host releases bank 0, after which bank 1 is presented (fault=0) and its
// contents checked the same way. Finally, with channel selection skipping
// slots 1, 3 and 5, a new capture in bank 0 must hold only the words of
// slots 0, 2 and 4, in order.
module wave_buffer_tb;
  import llrf_pkg::*;
  localparam int DEPTH = 64, HALF = 32, POST = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  iq_stream_t si;
  logic permit;
  wave_ctl_t ctl;
  wave_sts_t sts;
  wave_buffer #(.DEPTH(DEPTH), .POST(POST)) dut (.clk, .rst, .in(si), .permit, .ctl, .sts);

  int checks = 0, failures = 0;
  int n = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input int k);
    repeat (k) begin
      si.valid = 1; si.first = 0; si.slot = SLOT_W'(n % 6); si.mode = 0; si.data = iq_t'(n);
      @(negedge clk);
      n++;
    end
    si.valid = 0;
  endtask

  task automatic check_bank(input int first_word, input int last_word, input bit fault, input int tptr);
    checks++;
    if (!sts.ready || sts.fault != fault || 32'(sts.trig_ptr) != tptr) begin
      failures++;
      $display("status: ready %0d fault %0d ptr %0d exp fault %0d ptr %0d", sts.ready, sts.fault, sts.trig_ptr, fault, tptr);
    end
    for (int a = 0; a < HALF; a++) begin
      automatic int e = first_word + a;
      while (e + HALF <= last_word) e += HALF;
      ctl.rd_addr = 15'(a);
      @(negedge clk);
      checks++;
      if (int'(sts.rd_data) != e || 32'(sts.rd_slot) != e % 6) begin
        failures++;
        $display("addr %0d: got %0d exp %0d", a, sts.rd_data, e);
      end
    end
  endtask

  initial begin
    int t1, t2, b1_first;
    si = '0; permit = 1; ctl = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    send(45);
    checks++;
    if (sts.ready) begin failures++; $display("ready before trigger"); end
    // fault trigger at word t1
    t1 = n;
    permit = 0;
    send(1);
    permit = 1;
    send(POST + 3);            // three words past the freeze go to bank 1
    check_bank(0, t1 + POST, 1'b1, t1 % HALF);
    checks++;
    if (sts.t_stamp == 0) begin failures++; $display("no timestamp"); end
    // host trigger at word t2 freezes bank 1
    b1_first = t1 + POST + 1;
    send(40);
    t2 = n;
    ctl.trig = 1;
    send(1);
    ctl.trig = 0;
    send(POST + 20);           // bank 1 frozen, bank 0 not released: pause
    // bank 0 still presented
    checks++;
    if (!sts.fault) begin failures++; $display("bank 0 no longer presented"); end
    ctl.ack = 1;
    @(negedge clk);
    ctl.ack = 0;
    check_bank(b1_first, t2 + POST, 1'b0, (t2 - b1_first) % HALF);
    // channel selection
    ctl.ack = 1;
    @(negedge clk);
    ctl.ack = 0;
    ctl.skip = '0;
    ctl.skip[1] = 1'b1; ctl.skip[3] = 1'b1; ctl.skip[5] = 1'b1;
    begin
      automatic int n0 = n;
      automatic int k = 0;
      send(20);
      ctl.trig = 1;
      send(1);
      ctl.trig = 0;
      send(2 * POST + 6);
      checks++;
      if (!sts.ready || sts.fault) begin failures++; $display("selected capture not presented"); end
      for (int a = 0; a < 10 + POST; a++) begin
        while ((n0 + k) % 6 % 2 == 1) k++;
        ctl.rd_addr = 15'(a);
        @(negedge clk);
        checks++;
        if (int'(sts.rd_data) != n0 + k || 32'(sts.rd_slot) != (n0 + k) % 6) begin
          failures++;
          $display("selected addr %0d: got %0d slot %0d exp %0d", a, sts.rd_data, sts.rd_slot, n0 + k);
        end
        k++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
