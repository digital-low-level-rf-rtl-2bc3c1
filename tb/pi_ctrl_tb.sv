// pi_ctrl_tb: random set points, measurements, gains and limits; each
// update is compared with C(z) = Kp + Ki/(1 - z^-1) computed in 64-bit
// integers (kp in 2^-12, ki in 2^-16 units, feed-forward into the
// integrator, both integrator and output clipped to +-sat; the integrator
// keeps 16 fraction bits, and a small steady error must still integrate). One instance
// uses the wrapped (phase) error. Updates come every 4th clock, and the
// output must not move between updates.
module pi_ctrl_tb;
  localparam int W = 18;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic upd;
  logic signed [W-1:0] meas, sp, kp, ki, ff, sat, u0, u1;
  logic r0, r1;
  pi_ctrl #(.W(W), .WRAP(1'b0)) dut0 (.clk, .rst, .upd, .meas, .sp, .kp, .ki, .ff, .sat, .u(u0), .railed(r0));
  pi_ctrl #(.W(W), .WRAP(1'b1)) dut1 (.clk, .rst, .upd, .meas, .sp, .kp, .ki, .ff, .sat, .u(u1), .railed(r1));

  int checks = 0, failures = 0, nrail = 0;
  longint integ0 = 0, integ1 = 0;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint clip(longint v, longint l);
    if (v > l) return l;
    if (v < -l) return -l;
    return v;
  endfunction

  function automatic longint model(input longint e, inout longint integ);
    longint p, inew;
    p = (longint'(kp) * e) >>> 12;
    inew = clip(integ + longint'(ki) * e + (longint'(ff) <<< 16), longint'(sat) <<< 16);
    integ = inew;
    return clip(p + (inew >>> 16), longint'(sat));
  endfunction

  initial begin
    logic signed [W-1:0] uprev0;
    upd = 0; meas = 0; sp = 0; kp = 0; ki = 0; ff = 0; sat = 1000;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 2000; t++) begin
      if (t % 200 == 0) begin
        kp = W'($urandom_range(0, 8000));
        ki = W'($urandom_range(0, 4000));
        ff = W'(int'($urandom_range(0, 20)) - 10);
        sat = W'($urandom_range(1000, 100000));
      end
      sp = W'($urandom);
      meas = W'($urandom);
      upd = (t % 4 == 3);
      uprev0 = u0;
      @(negedge clk);
      if (upd) begin
        automatic longint e0 = longint'(sp) - longint'(meas);
        automatic logic signed [W-1:0] ew = sp - meas;
        automatic longint e1 = longint'(ew);
        automatic longint m0 = model(e0, integ0);
        automatic longint m1 = model(e1, integ1);
        checks += 2;
        if (longint'(u0) != m0) begin failures++; $display("t=%0d amp got %0d exp %0d", t, u0, m0); end
        if (longint'(u1) != m1) begin failures++; $display("t=%0d ph got %0d exp %0d", t, u1, m1); end
        if (r0) nrail++;
      end else begin
        checks++;
        if (u0 != uprev0) begin failures++; $display("t=%0d output moved without update", t); end
      end
    end
    checks++;
    if (nrail == 0) begin failures++; $display("saturation never reached"); end
    // a small steady error (ki*e far below 2^16) must still be integrated
    kp = 0; ki = 1; ff = 0; sat = 1000; sp = 1000; meas = 0;
    rst = 1;
    repeat (3) @(negedge clk);
    rst = 0;
    upd = 1;
    repeat (400) @(negedge clk);
    upd = 0;
    @(negedge clk);
    checks++;
    if (!(u0 inside {[5:7]})) begin failures++; $display("small error not integrated: u %0d", u0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
