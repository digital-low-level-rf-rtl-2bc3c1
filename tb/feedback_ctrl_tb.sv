// feedback_ctrl_tb: open-loop checks of one klystron controller.
//  - The two cavity probes are streamed in their slots of a 14-channel
//    frame; amp_meas/ph_meas must be K*|IQ| and atan2(Q,I) of cavity 1,
//    of cavity 2, or the 50/50 average, per the selected source.
//  - The PI loops update exactly every 4 clocks (T = 4/f_clk).
//  - With kp = ki = 0 and a constant feed-forward the amplitude loop
//    integrates to its saturation; the DAC must then carry
//    K*X*cos(LO - ph_meas - offset)/8 with X the (clipped) loop output,
//    STAGES+3 clocks after the LO phase is presented.
//  - With RF permit low the DAC word is 0 and the loops are cleared; they
//    restart from zero when permit returns.
module feedback_ctrl_tb;
  import llrf_pkg::*;
  localparam int NCH = 14, ST = 16;
  localparam real K = 1.646760258, TWO_PI = 6.283185307179586;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  iq_stream_t s;
  fb_cfg_t cfg;
  phase_t lo;
  logic permit;
  logic signed [DAC_W-1:0] dac;
  iq_t amp, ua, up;
  phase_t ph;
  logic upd, railed;

  feedback_ctrl #(.NCH(NCH), .STAGES(ST)) dut (.clk, .rst, .strm(s), .cfg, .dlo_phi(lo), .permit,
    .dac, .amp_meas(amp), .ph_meas(ph), .u_amp(ua), .u_ph(up), .loop_upd(upd), .railed);

  int checks = 0, failures = 0;
  int i1 = 30000, q1 = 10000, i2 = -8000, q2 = 20000;
  int slot = 0, t = 0, nupd = 0, last_upd = -1;
  phase_t lo_hist [64];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // free-running stream and LO
  always @(negedge clk) begin
    if (!rst) begin
      s.valid <= 1; s.first <= (slot == 0); s.slot <= SLOT_W'(slot); s.mode <= 0;
      s.data <= (slot == 0) ? iq_t'(i1) : (slot == 1) ? iq_t'(i2) :
                (slot == NCH) ? iq_t'(q1) : (slot == NCH + 1) ? iq_t'(q2) : iq_t'(0);
      slot <= (slot == 2 * NCH - 1) ? 0 : slot + 1;
      lo <= phase_t'(((t * 2) % 11) * 262144 / 11);
      lo_hist[t % 64] <= phase_t'(((t * 2) % 11) * 262144 / 11);
      t <= t + 1;
      if (upd) begin
        if (last_upd >= 0) begin
          checks++;
          if (t - last_upd != 4) begin failures++; $display("update period %0d", t - last_upd); end
        end
        last_upd <= t;
        nupd <= nupd + 1;
      end
    end
  end

  task automatic check_meas(input real ei, input real eq, input string nm);
    automatic real em = K * $sqrt(ei * ei + eq * eq);
    automatic real ea = $atan2(eq, ei) / TWO_PI * 262144.0;
    automatic real da;
    if (ea < 0) ea += 262144.0;
    da = real'(ph) - ea;
    if (da > 131072.0) da -= 262144.0;
    if (da < -131072.0) da += 262144.0;
    checks++;
    if ((real'(amp) - em) > 6.0 || (real'(amp) - em) < -6.0 || da > 6.0 || da < -6.0) begin
      failures++;
      $display("%s: amp %0d ph %0d exp %f %f", nm, amp, ph, em, ea);
    end
  endtask

  task automatic check_dac(input int x, input string nm);
    // DAC at this negedge corresponds to the LO presented ST+3 clocks earlier
    int bad = 0;
    for (int k = 0; k < 22; k++) begin
      automatic real th = (real'(lo_hist[(t - ST - 3 + 64) % 64]) - real'(ph) - real'(cfg.ph_offset)) / 262144.0 * TWO_PI;
      automatic real e = K * real'(x) * $cos(th) / 8.0;
      checks++;
      if ((real'(dac) - e) > 4.0 || (real'(dac) - e) < -4.0) begin
        bad++; failures++;
        if (bad < 4) $display("%s: dac %0d exp %f", nm, dac, e);
      end
      @(negedge clk);
    end
  endtask

  initial begin
    cfg = '0;
    cfg.amp_src = SRC_CAV1; cfg.ph_cav = 0; cfg.w1 = 16'd32768; cfg.w2 = 16'd32768;
    cfg.ff_amp = 18'sd50; cfg.sat_amp = 18'sd20000; cfg.sat_ph = 18'sd1000;
    cfg.clip = 18'sd100000; cfg.ph_offset = phase_t'(30000);
    permit = 1; s = '0; lo = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (200) @(negedge clk);
    check_meas(30000.0, 10000.0, "cav1");
    cfg.amp_src = SRC_CAV2; cfg.ph_cav = 1;
    repeat (3) @(negedge clk);
    check_meas(-8000.0, 20000.0, "cav2");
    cfg.amp_src = SRC_AVG; cfg.ph_cav = 0;
    repeat (3) @(negedge clk);
    checks++;
    begin
      automatic real ea = K * ($sqrt(30000.0 * 30000.0 + 10000.0 * 10000.0) + $sqrt(8000.0 * 8000.0 + 20000.0 * 20000.0)) / 2.0;
      if ((real'(amp) - ea) > 6.0 || (real'(amp) - ea) < -6.0) begin failures++; $display("avg amp %0d exp %f", amp, ea); end
    end
    // amplitude integrator has run to saturation by now (50 per update)
    repeat (2000) @(negedge clk);
    checks += 2;
    if (ua != 18'sd20000) begin failures++; $display("u_amp %0d exp 20000", ua); end
    if (up != 0) begin failures++; $display("u_ph %0d exp 0", up); end
    if (!railed) begin failures++; $display("railed not reported"); end
    check_dac(20000, "sat");
    cfg.clip = 18'sd9000;
    repeat (30) @(negedge clk);
    check_dac(9000, "clip");
    permit = 0;
    repeat (3) @(negedge clk);
    for (int k = 0; k < 20; k++) begin
      checks++;
      if (dac != 0) begin failures++; $display("dac %0d with permit low", dac); end
      @(negedge clk);
    end
    checks++;
    if (ua != 0 || railed) begin failures++; $display("loop not cleared with permit low: u_amp %0d", ua); end
    permit = 1;
    repeat (8) @(negedge clk);
    checks++;
    if (ua <= 0 || ua > 18'sd200) begin failures++; $display("loop did not restart from zero: u_amp %0d", ua); end
    checks++;
    if (nupd < 500) begin failures++; $display("only %0d updates", nupd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
