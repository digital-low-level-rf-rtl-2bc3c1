// monitor_bank_tb: a small bank (4 channels, channel 0 fast, channels 1-3
// on the half-rate strobe, 256-word waveform memory) fed with IF sinusoids
// of different amplitudes and phases and the LO of a dds_lo.
//  - On the conveyor belt each frame must carry I in slots 0-3 and Q in
//    slots 4-7, with |I + jQ| = 16 * ADC amplitude for every channel.
//  - With CIC decimation 1 and shift 0 the CIC output must equal the belt
//    two clocks earlier; the filter is then set to R = 2 and must emit one
//    frame per two.
//  - A drop of RF permit must freeze the waveform memory with the fault
//    flag, and the frozen bank must hold the last 128 CIC words, in order,
//    around the trigger position.
module monitor_bank_tb;
  import llrf_pkg::*;
  localparam int NCH = 4, DEPTH = 256, HALF = DEPTH / 2;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic signed [ADC_W-1:0] adc [NCH];
  logic s2_stb;
  iq_t dlo_i, dlo_q;
  phase_t dlo_phi;
  logic [11:0] dec;
  logic [4:0] shift;
  logic permit;
  wave_ctl_t ctl;
  wave_sts_t sts;
  iq_t ddc_i [NCH], ddc_q [NCH];
  iq_stream_t strm, cic_out;

  dds_lo u_lo (.clk, .rst, .dlo_phi, .dlo_i, .dlo_q);
  monitor_bank #(.NCH(NCH), .N_FAST(1), .DEPTH(DEPTH), .RBITS(12)) dut (
    .clk, .rst, .adc, .s2_stb, .dlo_i, .dlo_q, .mode(4'd3), .cic_dec(dec), .cic_shift(shift),
    .permit, .wave_ctl(ctl), .ddc_i, .ddc_q, .strm, .cic_out, .wave_sts(sts));

  int checks = 0, failures = 0;
  longint t = 0;
  real amp [NCH] = '{1500.0, 900.0, 2500.0, 400.0};
  real psi [NCH] = '{0.3, 1.9, -2.2, 4.0};

  always @(negedge clk) begin
    automatic real ph = TWO_PI * real'((2 * t) % 11) / 11.0;
    t <= t + 1;
    s2_stb <= (t % 2) == 0;
    for (int c = 0; c < NCH; c++) adc[c] <= ADC_W'($rtoi($floor(amp[c] * $cos(ph + psi[c]) + 0.5)));
  end

  // stream history and the log of every CIC output word
  iq_stream_t hist [4];
  logic [SLOT_W+IQ_W-1:0] clog [8192];
  int ncic = 0, trig_idx = -1, nframe_out = 0;
  bit check_pass = 0;
  iq_t ibuf [NCH];
  always @(posedge clk) begin
    hist[1] <= hist[0]; hist[0] <= strm;
    if (!rst && cic_out.valid) begin
      if (ncic < 8192) clog[ncic] <= {cic_out.slot, cic_out.data};
      ncic <= ncic + 1;
      if (cic_out.first) nframe_out <= nframe_out + 1;
    end
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad = 0;
    dec = 12'd0; shift = 5'd0; permit = 1; ctl = '0;
    for (int c = 0; c < NCH; c++) adc[c] = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (200) @(negedge clk);
    // ---- belt contents and CIC pass-through ----
    for (int k = 0; k < 40 * 2 * NCH; k++) begin
      @(negedge clk);
      checks++;
      if (!strm.valid) begin failures++; $display("belt not valid"); end
      if (strm.slot < NCH) ibuf[strm.slot] = strm.data;
      else begin
        automatic int c = int'(strm.slot) - NCH;
        automatic real m = $sqrt(real'(ibuf[c]) ** 2 + real'(strm.data) ** 2);
        checks++;
        if (m - 16.0 * amp[c] > 60.0 || m - 16.0 * amp[c] < -60.0) begin
          failures++;
          if (bad++ < 5) $display("channel %0d magnitude %f exp %f", c, m, 16.0 * amp[c]);
        end
      end
      checks++;
      if (cic_out != hist[1]) begin
        failures++;
        if (bad++ < 10) $display("CIC R=1 output %h, belt two clocks earlier %h", cic_out, hist[1]);
      end
    end
    // ---- decimation by 2: one output frame per two belt frames ----
    dec = 12'd1; shift = 5'd2;
    repeat (4 * 2 * NCH) @(negedge clk);
    begin
      automatic int f0 = nframe_out;
      repeat (40 * 2 * NCH) @(negedge clk);
      checks++;
      if (nframe_out - f0 < 19 || nframe_out - f0 > 21) begin
        failures++; $display("R=2 gave %0d frames in 40", nframe_out - f0);
      end
    end
    // ---- fault capture ----
    permit = 0;
    trig_idx = ncic;
    repeat (2 * (HALF / 2) + 60) @(negedge clk);
    checks += 2;
    if (!sts.ready || !sts.fault) begin failures++; $display("not frozen by permit drop"); end
    if (int'(sts.trig_ptr) != trig_idx % HALF && int'(sts.trig_ptr) != (trig_idx + 1) % HALF) begin
      failures++; $display("trigger pointer %0d, word index at trigger %0d", sts.trig_ptr, trig_idx);
    end
    begin
      // the frozen bank holds words L-127..L for one L near trigger + POST
      logic [SLOT_W+IQ_W-1:0] rd [HALF];
      automatic int found = -1;
      for (int a = 0; a < HALF; a++) begin
        ctl.rd_addr = 15'(a);
        @(negedge clk); @(negedge clk);
        rd[a] = {sts.rd_slot, sts.rd_data};
      end
      for (int L = trig_idx + HALF / 2 - 4; L <= trig_idx + HALF / 2 + 4; L++) begin
        automatic bit ok = 1;
        for (int k = L - HALF + 1; k <= L; k++) if (rd[k % HALF] != clog[k]) ok = 0;
        if (ok) found = L;
      end
      checks++;
      if (found < 0) begin failures++; $display("frozen bank does not match the CIC output record"); end
      else $display("frozen bank = CIC words %0d..%0d (permit dropped at word %0d)", found - HALF + 1, found, trig_idx);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
