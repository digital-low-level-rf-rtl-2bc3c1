// als_llrf_top: the digital LLRF system of the ALS storage-ring RF.
//
// Three FPGA chassis in one DSP clock domain:
//   llrf_chassis      - cavity probes, 12 monitor channels, two klystron
//                       amplitude/phase loops, DAC drive words
//   rfmon_chassis     - 28 monitor channels
//   interlock_chassis - fast RF power interlock on both streams plus the
//                       arc detectors, producing RF permit
// The multi-gigabit links between the chassis are not part of this RTL:
// the transmit ends (llrf_link_tx, rfmon_link_tx) and receive ends
// (ilk_llrf_rx, ilk_rfmon_rx) are ports, as is the permit input of the
// LLRF chassis (llrf_permit), so the surroundings decide link latency.
// Host register access (set points, gains, decimation, waveform reads)
// and the PLC settings are plain ports as well.
module als_llrf_top
  import llrf_pkg::*;
#(
  parameter int DEPTH = 65536,
  parameter int RBITS = 12
) (
  input  logic                    clk,
  input  logic                    rst,
  // converters
  input  logic signed [ADC_W-1:0] adc_llrf  [N_LLRF_CH],
  input  logic signed [ADC_W-1:0] adc_rfmon [N_RFMON_CH],
  output logic                    llrf_s2_stb,
  output logic                    rfmon_s2_stb,
  output logic signed [DAC_W-1:0] dac [2],
  // host registers
  input  logic [MODE_W-1:0]       rf_mode,
  input  fb_cfg_t                 kly_cfg [2],
  input  logic [RBITS-1:0]        llrf_cic_dec,
  input  logic [4:0]              llrf_cic_shift,
  input  logic [RBITS-1:0]        rfmon_cic_dec,
  input  logic [4:0]              rfmon_cic_shift,
  input  wave_ctl_t               llrf_wave_ctl,
  input  wave_ctl_t               rfmon_wave_ctl,
  input  wave_ctl_t               ilk_wave_ctl,
  output wave_sts_t               llrf_wave_sts,
  output wave_sts_t               rfmon_wave_sts,
  output wave_sts_t               ilk_wave_sts,
  output iq_t                     amp_meas [2],
  output phase_t                  ph_meas [2],
  output logic [1:0]              loop_railed,
  // links
  output iq_stream_t              llrf_link_tx,
  output iq_stream_t              rfmon_link_tx,
  input  iq_stream_t              ilk_llrf_rx,
  input  iq_stream_t              ilk_rfmon_rx,
  input  logic                    llrf_permit,
  input  logic                    rfmon_permit,
  // PLC settings and arc detector wires
  input  logic                    rst_trip,
  input  logic [PWR_W-1:0]        thr_a [N_LLRF_CH],
  input  logic [PWR_W-1:0]        thr_b [N_RFMON_CH],
  input  logic [N_LLRF_CH-1:0]    en_a,
  input  logic [N_RFMON_CH-1:0]   en_b,
  input  logic [N_ARC-1:0]        arc_ok,
  input  logic [N_ARC-1:0]        arc_pwr_ok,
  input  logic [2*N_ARC-1:0]      cfg_arc_mask,
  output logic [N_LLRF_CH-1:0]    trip_a,
  output logic [N_RFMON_CH-1:0]   trip_b,
  output logic [2*N_ARC-1:0]      arc_trip,
  output logic [MODE_W-1:0]       ilk_mode_a,
  output logic [MODE_W-1:0]       ilk_mode_b,
  output logic                    rf_permit
);

  llrf_chassis #(.DEPTH(DEPTH), .RBITS(RBITS)) u_llrf (
    .clk, .rst, .adc(adc_llrf), .s2_stb(llrf_s2_stb), .rf_mode, .kly_cfg,
    .cic_dec(llrf_cic_dec), .cic_shift(llrf_cic_shift), .permit(llrf_permit),
    .wave_ctl(llrf_wave_ctl), .wave_sts(llrf_wave_sts), .dac,
    .amp_meas, .ph_meas, .loop_railed, .link_tx(llrf_link_tx));

  rfmon_chassis #(.DEPTH(DEPTH), .RBITS(RBITS)) u_rfmon (
    .clk, .rst, .adc(adc_rfmon), .s2_stb(rfmon_s2_stb), .rf_mode,
    .cic_dec(rfmon_cic_dec), .cic_shift(rfmon_cic_shift), .permit(rfmon_permit),
    .wave_ctl(rfmon_wave_ctl), .wave_sts(rfmon_wave_sts), .link_tx(rfmon_link_tx));

  interlock_chassis #(.DEPTH(DEPTH)) u_ilk (
    .clk, .rst, .rst_trip, .llrf_rx(ilk_llrf_rx), .rfmon_rx(ilk_rfmon_rx),
    .thr_a, .thr_b, .en_a, .en_b, .arc_ok, .arc_pwr_ok, .cfg_arc_mask,
    .wave_ctl(ilk_wave_ctl), .wave_sts(ilk_wave_sts),
    .trip_a, .trip_b, .arc_trip, .mode_a(ilk_mode_a), .mode_b(ilk_mode_b),
    .permit(rf_permit));

endmodule
