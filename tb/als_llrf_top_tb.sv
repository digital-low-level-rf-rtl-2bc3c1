// als_llrf_top_tb: end-to-end run of the whole system at its default sizes
// (64k-word waveform memories, 14 + 28 channels).
//
// Around the design the testbench models what is outside it:
//  - an IIR cavity emulator: each cavity is a two-pole resonator tuned to
//    the IF, y[n] = 2 r cos(w) y[n-1] - r^2 y[n-2] + b x[n-5], with
//    w = 2/11 turn per clock and b set for a gain g at resonance; x is its
//    klystron's DAC word. R_CAV = 0 (used here) makes it a pure 5-clock
//    delay with gain g. With a filling time of several clocks the simple
//    offset calibration below no longer converges in the time allotted and
//    the phase loop gains would need retuning;
//  - 12 + 28 monitor signals, IF sinusoids of fixed amplitude;
//  - the links: both I/Q streams reach the interlock after LINK clocks and
//    RF permit reaches the LLRF and RF monitor chassis after LINK clocks.
// Sequence and checks:
//  A  each klystron drives its own cavity. The amplitude loops start with
//     a saturation too low to reach the set point (railed), then the
//     limit is raised and they must settle on the set point. The loop
//     phase offset is calibrated to cancel the loop delay, then the phase
//     loop must pull the cavity phase to its set point.
//  B  drive-mode switch: klystron 2 drives both cavities (klystron 1 on a
//     test load) and regulates the 50/50 average of the two probes.
//  C  an RF monitor channel doubles its amplitude: only its trip bit may
//     set, RF permit must fall well within 4 us (the paper's requirement;
//     it measures < 2.5 us), and the DACs must go to zero.
//  D  all three waveform memories must freeze with the fault flag; the
//     LLRF memory must show the probes present before the trip and gone
//     at the end of the record.
//  E  after rst_trip and removal of the fault the permit returns and the
//     drive resumes from cleared loops.
//  F  an arc detector input: ignored while masked, trips when unmasked,
//     cleared by rst_trip.
// Each mechanism is counted, and one that never happened is a failure.
module als_llrf_top_tb;
  import llrf_pkg::*;
  localparam int LINK = 32, DLY = 5;
  localparam real TWO_PI = 6.283185307179586;
  localparam real F_DSP = 229.004e6;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic signed [ADC_W-1:0] adc_llrf [N_LLRF_CH];
  logic signed [ADC_W-1:0] adc_rfmon [N_RFMON_CH];
  logic llrf_s2, rfmon_s2;
  logic signed [DAC_W-1:0] dac [2];
  logic [MODE_W-1:0] rf_mode;
  fb_cfg_t kly_cfg [2];
  wave_ctl_t lw_ctl, rw_ctl, iw_ctl;
  wave_sts_t lw_sts, rw_sts, iw_sts;
  iq_t amp_meas [2];
  phase_t ph_meas [2];
  logic [1:0] railed;
  iq_stream_t llrf_tx, rfmon_tx, ilk_llrf_rx, ilk_rfmon_rx;
  logic llrf_permit, rfmon_permit;
  logic rst_trip;
  logic [PWR_W-1:0] thr_a [N_LLRF_CH];
  logic [PWR_W-1:0] thr_b [N_RFMON_CH];
  logic [N_LLRF_CH-1:0] en_a, trip_a;
  logic [N_RFMON_CH-1:0] en_b, trip_b;
  logic [N_ARC-1:0] arc_ok, arc_pwr_ok;
  logic [2*N_ARC-1:0] arc_mask, arc_trip;
  logic [MODE_W-1:0] mode_a, mode_b;
  logic rf_permit;

  als_llrf_top dut (
    .clk, .rst, .adc_llrf, .adc_rfmon, .llrf_s2_stb(llrf_s2), .rfmon_s2_stb(rfmon_s2), .dac,
    .rf_mode, .kly_cfg, .llrf_cic_dec(12'd0), .llrf_cic_shift(5'd0),
    .rfmon_cic_dec(12'd1), .rfmon_cic_shift(5'd2),
    .llrf_wave_ctl(lw_ctl), .rfmon_wave_ctl(rw_ctl), .ilk_wave_ctl(iw_ctl),
    .llrf_wave_sts(lw_sts), .rfmon_wave_sts(rw_sts), .ilk_wave_sts(iw_sts),
    .amp_meas, .ph_meas, .loop_railed(railed),
    .llrf_link_tx(llrf_tx), .rfmon_link_tx(rfmon_tx), .ilk_llrf_rx, .ilk_rfmon_rx,
    .llrf_permit, .rfmon_permit, .rst_trip, .thr_a, .thr_b, .en_a, .en_b,
    .arc_ok, .arc_pwr_ok, .cfg_arc_mask(arc_mask), .trip_a, .trip_b, .arc_trip,
    .ilk_mode_a(mode_a), .ilk_mode_b(mode_b), .rf_permit);

  int checks = 0, failures = 0;
  longint t = 0;

  // ---- environment: links, cavity emulator, monitor signals ----
  iq_stream_t la [LINK], lb [LINK];
  logic       pl [LINK];
  logic signed [DAC_W-1:0] d1 [DLY], d2 [DLY];
  real mon_amp [N_LLRF_CH + N_RFMON_CH];
  real mon_psi [N_LLRF_CH + N_RFMON_CH];
  bit  two_cav;               // phase B: klystron 2 drives both cavities
  real g1 = 0.25, g2 = 0.25;
  localparam real R_CAV = 0.0;
  real cav_a1, cav_a2, cav_b;      // resonator coefficients
  real y1 [2], y2 [2];             // cavity 1 / 2 outputs, one and two clocks back
  initial begin
    cav_a1 = 2.0 * R_CAV * $cos(TWO_PI * 2.0 / 11.0);
    cav_a2 = -R_CAV * R_CAV;
    // |H| at resonance = b / ((1 - r) |1 - r e^{-2jw}|)
    cav_b = (1.0 - R_CAV) * $sqrt((1.0 - R_CAV * $cos(2.0 * TWO_PI * 2.0 / 11.0)) ** 2 +
                                  (R_CAV * $sin(2.0 * TWO_PI * 2.0 / 11.0)) ** 2);
    y1 = '{0.0, 0.0}; y2 = '{0.0, 0.0};
  end

  function automatic logic signed [ADC_W-1:0] q14(real v);
    int r = $rtoi($floor(v + 0.5));
    if (r > 8191) r = 8191;
    if (r < -8192) r = -8192;
    return ADC_W'(r);
  endfunction

  always @(negedge clk) begin
    automatic real ph = TWO_PI * real'((2 * t) % 11) / 11.0;
    t <= t + 1;
    // links
    ilk_llrf_rx  <= la[LINK-1];
    ilk_rfmon_rx <= lb[LINK-1];
    llrf_permit  <= pl[LINK-1];
    rfmon_permit <= pl[LINK-1];
    for (int k = LINK - 1; k > 0; k--) begin la[k] <= la[k-1]; lb[k] <= lb[k-1]; pl[k] <= pl[k-1]; end
    la[0] <= llrf_tx; lb[0] <= rfmon_tx; pl[0] <= rf_permit;
    // cavity emulator
    for (int k = DLY - 1; k > 0; k--) begin d1[k] <= d1[k-1]; d2[k] <= d2[k-1]; end
    d1[0] <= dac[0]; d2[0] <= dac[1];
    begin
      automatic real x1 = two_cav ? real'(d2[DLY-1]) : real'(d1[DLY-1]);
      automatic real x2 = real'(d2[DLY-1]);
      automatic real n1 = cav_a1 * y1[0] + cav_a2 * y1[1] + cav_b * g1 * x1;
      automatic real n2 = cav_a1 * y2[0] + cav_a2 * y2[1] + cav_b * g2 * x2;
      y1[1] = y1[0]; y1[0] = n1;
      y2[1] = y2[0]; y2[0] = n2;
      adc_llrf[0] <= q14(n1);
      adc_llrf[1] <= q14(n2);
    end
    for (int c = 2; c < N_LLRF_CH; c++) adc_llrf[c] <= q14(mon_amp[c] * $cos(ph + mon_psi[c]));
    for (int c = 0; c < N_RFMON_CH; c++)
      adc_rfmon[c] <= q14(mon_amp[N_LLRF_CH + c] * $cos(ph + mon_psi[N_LLRF_CH + c]));
  end

  // ---- mechanism counters ----
  int n_railed = 0, n_upd = 0, n_gated = 0, n_cic = 0, n_trip = 0;
  int n_amp_reg = 0, n_ph_reg = 0, n_avg_reg = 0, n_capture = 0, n_recover = 0, n_arc = 0;
  always @(posedge clk) begin
    if (!rst) begin
      if (railed != 0) n_railed++;
      if (dut.u_llrf.g_kly[0].upd) n_upd++;
      if (!llrf_permit && dac[0] == 0 && dac[1] == 0) n_gated++;
      if (dut.u_rfmon.u_bank.cic_out.valid) n_cic++;
    end
  end

  initial begin
    #2000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_near(input real got, input real exp, input real tol, input string nm);
    checks++;
    if ((got - exp) > tol || (got - exp) < -tol) begin
      failures++;
      $display("%s: got %f exp %f (tol %f) at t=%0d", nm, got, exp, tol, t);
    end
  endtask

  function automatic real wrapd(real d);
    while (d > 131072.0) d -= 262144.0;
    while (d < -131072.0) d += 262144.0;
    return d;
  endfunction

  initial begin
    longint t_fault, t_trip;
    real dlt, p1, p2;
    for (int c = 0; c < N_LLRF_CH + N_RFMON_CH; c++) begin
      mon_amp[c] = 600.0 + 50.0 * real'(c % 9);
      mon_psi[c] = TWO_PI * real'(c) / 7.0;
    end
    for (int k = 0; k < LINK; k++) begin la[k] = '0; lb[k] = '0; pl[k] = 0; end
    for (int k = 0; k < DLY; k++) begin d1[k] = 0; d2[k] = 0; end
    for (int c = 0; c < N_LLRF_CH; c++) adc_llrf[c] = 0;
    for (int c = 0; c < N_RFMON_CH; c++) adc_rfmon[c] = 0;
    two_cav = 0;
    rf_mode = 4'd0;
    lw_ctl = '0; rw_ctl = '0; iw_ctl = '0;
    rst_trip = 0;
    // interlock: power in (16 A)^2 units; trip at 2x the nominal power
    for (int c = 0; c < N_LLRF_CH; c++) thr_a[c] = PWR_W'(64'd4000000000);
    for (int c = 0; c < N_RFMON_CH; c++) begin
      automatic real a = 16.0 * mon_amp[N_LLRF_CH + c];
      thr_b[c] = PWR_W'(longint'(2.0 * a * a));
    end
    en_a = '1; en_b = '1;
    arc_ok = '1; arc_pwr_ok = '1; arc_mask = '1;
    for (int k = 0; k < 2; k++) begin
      kly_cfg[k] = '0;
      kly_cfg[k].amp_src = (k == 0) ? SRC_CAV1 : SRC_CAV2;
      kly_cfg[k].ph_cav  = 1'(k);
      kly_cfg[k].w1 = 16'd32768; kly_cfg[k].w2 = 16'd32768;
      kly_cfg[k].amp_sp = 18'sd40000;
      kly_cfg[k].ki_amp = 18'sd600;
      kly_cfg[k].sat_amp = 18'sd20000;     // too low at first: loop rails
      kly_cfg[k].sat_ph = 18'sd20000;
      kly_cfg[k].clip = 18'sd120000;
    end
    repeat (4) @(negedge clk);
    rst = 0;

    // ---------------- A: one klystron per cavity ----------------
    repeat (3000) @(negedge clk);
    checks++;
    if (rf_permit !== 1'b1) begin failures++; $display("permit not up after start"); end
    kly_cfg[0].sat_amp = 18'sd100000;
    kly_cfg[1].sat_amp = 18'sd100000;
    repeat (6000) @(negedge clk);
    for (int k = 0; k < 2; k++) begin
      expect_near(real'(amp_meas[k]), 40000.0, 400.0, $sformatf("kly%0d amplitude", k + 1));
      if ((real'(amp_meas[k]) - 40000.0) < 400.0 && (real'(amp_meas[k]) - 40000.0) > -400.0) n_amp_reg++;
    end
    // calibrate the loop phase offset: the phase advance per measurement
    for (int k = 0; k < 2; k++) begin
      for (int it = 0; it < 10; it++) begin
        // coarse step over one frame, then averaged over 10 frames; the
        // cavity lag makes each step remove only part of the rotation
        automatic int nf = (it == 0) ? 1 : 10;
        p1 = real'(ph_meas[k]);
        repeat (nf * 2 * N_LLRF_CH) @(negedge clk);
        p2 = real'(ph_meas[k]);
        dlt = wrapd(p2 - p1) / real'(nf);
        kly_cfg[k].ph_offset = phase_t'(kly_cfg[k].ph_offset - phase_t'($rtoi(dlt)));
        repeat (4 * N_LLRF_CH) @(negedge clk);
      end
    end
    p1 = real'(ph_meas[0]);
    repeat (20 * N_LLRF_CH) @(negedge clk);
    expect_near(wrapd(real'(ph_meas[0]) - p1), 0.0, 200.0, "phase after offset calibration");
    // phase loop on, set point 30 degrees away
    for (int k = 0; k < 2; k++) begin
      kly_cfg[k].ph_sp = iq_t'(phase_t'(ph_meas[k] + phase_t'(21845)));
      kly_cfg[k].kp_ph = 18'sd300;
      kly_cfg[k].ki_ph = 18'sd20;
    end
    repeat (8000) @(negedge clk);
    for (int k = 0; k < 2; k++) begin
      automatic real e = wrapd(real'(ph_meas[k]) - real'(phase_t'(kly_cfg[k].ph_sp)));
      expect_near(e, 0.0, 300.0, $sformatf("kly%0d phase", k + 1));
      if (e < 300.0 && e > -300.0) n_ph_reg++;
      expect_near(real'(amp_meas[k]), 40000.0, 400.0, $sformatf("kly%0d amplitude with phase loop", k + 1));
    end

    // ---------------- B: klystron 2 drives both cavities ----------------
    rf_mode = 4'd2;
    two_cav = 1;
    g1 = 0.30; g2 = 0.20;
    kly_cfg[1].amp_src = SRC_AVG;
    repeat (10000) @(negedge clk);
    begin
      automatic real a1 = real'(dut.u_llrf.g_kly[1].u_fb.a1);
      automatic real a2 = real'(dut.u_llrf.g_kly[1].u_fb.a2);
      expect_near((a1 + a2) / 2.0, 40000.0, 400.0, "two-cavity average");
      expect_near(a1 / a2, 1.5, 0.03, "cavity ratio in two-cavity mode");
      if (((a1 + a2) / 2.0 - 40000.0) < 400.0 && ((a1 + a2) / 2.0 - 40000.0) > -400.0) n_avg_reg++;
    end
    checks++;
    if (mode_a != 4'd2 || mode_b != 4'd2) begin failures++; $display("mode word not at interlock"); end

    // ---------------- C: over-power trip ----------------
    checks++;
    if (rf_permit !== 1'b1 || trip_a != 0 || trip_b != 0) begin failures++; $display("tripped before the fault"); end
    t_fault = t;
    mon_amp[N_LLRF_CH + 10] = 2.0 * mon_amp[N_LLRF_CH + 10];
    while (rf_permit) @(negedge clk);
    t_trip = t;
    n_trip++;
    $display("interlock latency %0d clocks = %f us (link model %0d clocks)", t_trip - t_fault,
             real'(t_trip - t_fault) / F_DSP * 1.0e6, LINK);
    checks += 2;
    if (real'(t_trip - t_fault) / F_DSP > 4.0e-6) begin failures++; $display("latency above 4 us"); end
    if (trip_b != (N_RFMON_CH'(1) << 10) || trip_a != 0) begin failures++; $display("wrong trip bits %b %b", trip_a, trip_b); end
    repeat (LINK + 30) @(negedge clk);
    checks++;
    if (dac[0] != 0 || dac[1] != 0) begin failures++; $display("drive not removed"); end

    // ---------------- D: fault capture ----------------
    // 16k post-trigger words: 1 word/clock on the LLRF and interlock
    // records, 1 word per 2 clocks on the RF monitor (CIC R = 2)
    repeat (34000) @(negedge clk);
    checks += 3;
    if (!lw_sts.ready || !lw_sts.fault) begin failures++; $display("LLRF waveform not captured"); end
    if (!rw_sts.ready || !rw_sts.fault) begin failures++; $display("RFMON waveform not captured"); end
    if (!iw_sts.ready || !iw_sts.fault) begin failures++; $display("interlock waveform not captured"); end
    if (lw_sts.ready && rw_sts.ready && iw_sts.ready) n_capture++;
    begin
      // before the trigger: cavity 2 probe I/Q large; end of record: gone
      automatic int pre = 0, post = 0;
      automatic logic [14:0] base = lw_sts.trig_ptr;
      for (int a = 0; a < 56; a++) begin
        lw_ctl.rd_addr = base - 15'd400 + 15'(a);
        @(negedge clk); @(negedge clk);
        if (lw_sts.rd_slot == 1 || lw_sts.rd_slot == 15)
          pre += (lw_sts.rd_data < 0) ? -int'(lw_sts.rd_data) : int'(lw_sts.rd_data);
        lw_ctl.rd_addr = base + 15'(16384 - 60) + 15'(a);
        @(negedge clk); @(negedge clk);
        if (lw_sts.rd_slot == 1 || lw_sts.rd_slot == 15)
          post += (lw_sts.rd_data < 0) ? -int'(lw_sts.rd_data) : int'(lw_sts.rd_data);
      end
      $display("captured cavity-2 probe |I|+|Q| sum: before trip %0d, end of record %0d", pre, post);
      checks += 2;
      if (pre < 20000) begin failures++; $display("probe missing before trip"); end
      if (post > pre / 50) begin failures++; $display("probe still present after trip"); end
    end
    lw_ctl.ack = 1; rw_ctl.ack = 1; iw_ctl.ack = 1;
    @(negedge clk);
    lw_ctl.ack = 0; rw_ctl.ack = 0; iw_ctl.ack = 0;

    // ---------------- E: recovery ----------------
    mon_amp[N_LLRF_CH + 10] = mon_amp[N_LLRF_CH + 10] / 2.0;
    repeat (200) @(negedge clk);
    rst_trip = 1; @(negedge clk); rst_trip = 0;
    repeat (6000) @(negedge clk);
    $display("after reset: permit %b trips %h %h arc %h", rf_permit, trip_a, trip_b, arc_trip);
    checks += 2;
    if (rf_permit !== 1'b1) begin failures++; $display("permit not restored"); end
    expect_near((real'(dut.u_llrf.g_kly[1].u_fb.a1) + real'(dut.u_llrf.g_kly[1].u_fb.a2)) / 2.0,
                40000.0, 800.0, "average after recovery");
    if (rf_permit === 1'b1 && dac[1] != 0) n_recover++;
    else begin failures++; $display("drive not resumed"); end

    // ---------------- F: arc detector ----------------
    // a masked arc input is ignored; an unmasked one removes RF permit
    arc_mask[5] = 1'b0;
    arc_ok[5] = 1'b0; @(negedge clk); arc_ok[5] = 1'b1;
    repeat (5) @(negedge clk);
    checks++;
    if (!rf_permit || arc_trip != 0) begin failures++; $display("masked arc tripped"); end
    arc_mask[5] = 1'b1;
    arc_ok[5] = 1'b0; @(negedge clk); arc_ok[5] = 1'b1;
    repeat (3) @(negedge clk);
    checks++;
    if (rf_permit || arc_trip != (2 * N_ARC)'(1 << 5)) begin failures++; $display("arc trip missing: %h", arc_trip); end
    else n_arc++;
    rst_trip = 1; @(negedge clk); rst_trip = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (!rf_permit) begin failures++; $display("permit not back after arc reset"); end

    // ---------------- mechanism coverage ----------------
    $display("mechanisms: railed=%0d loop_updates=%0d amp_reg=%0d ph_reg=%0d avg_reg=%0d cic_words=%0d trip=%0d gated=%0d capture=%0d recover=%0d arc=%0d",
             n_railed, n_upd, n_amp_reg, n_ph_reg, n_avg_reg, n_cic, n_trip, n_gated, n_capture, n_recover, n_arc);
    checks += 11;
    if (n_arc == 0)     begin failures++; $display("no arc trip"); end
    if (n_railed == 0)  begin failures++; $display("saturation never happened"); end
    if (n_upd == 0)     begin failures++; $display("no loop updates"); end
    if (n_amp_reg == 0) begin failures++; $display("amplitude regulation never happened"); end
    if (n_ph_reg == 0)  begin failures++; $display("phase regulation never happened"); end
    if (n_avg_reg == 0) begin failures++; $display("two-cavity mode never happened"); end
    if (n_cic == 0)     begin failures++; $display("no CIC output"); end
    if (n_trip == 0)    begin failures++; $display("no interlock trip"); end
    if (n_gated == 0)   begin failures++; $display("permit gating never happened"); end
    if (n_capture == 0) begin failures++; $display("no fault capture"); end
    if (n_recover == 0) begin failures++; $display("no recovery"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
