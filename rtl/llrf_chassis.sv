// llrf_chassis: the LLRF FPGA.
//
// Receives the two cavity-probe ADCs at f_S1 (channels 0 and 1) and twelve
// monitor ADCs at f_S2 (channels 2..13), all on the common IF of 2/11 of
// the DSP clock. A dds_lo provides the digital LO (phase, cos, sin) to the
// DDCs and the transmit LO phase to the up-converters. The monitor_bank
// frames the 14 I/Q pairs onto the conveyor belt, which goes out as the
// interlock link stream (with the RF drive mode word) and into the CIC and
// waveform memory. Two feedback_ctrl loops, one per klystron, read the
// cavity probes from the stream and produce the two DAC drive words,
// gated by RF permit.
//
// The chassis content follows the paper; the channel numbering and the
// single clock domain are this design's. s2_stb (every second clock) is
// generated here and brought out so the ADC interface can align to it.
//
// Lint note: the per-channel DDC outputs, the CIC output (consumed by the
// waveform memory inside the bank) and the loop outputs and update strobes
// are not brought out of the chassis and are left unused.
module llrf_chassis
  import llrf_pkg::*;
#(
  parameter int DEPTH = 65536,
  parameter int RBITS = 12
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] adc [N_LLRF_CH],
  output logic                    s2_stb,
  input  logic [MODE_W-1:0]       rf_mode,
  input  fb_cfg_t                 kly_cfg [2],
  input  logic [RBITS-1:0]        cic_dec,
  input  logic [4:0]              cic_shift,
  input  logic                    permit,
  input  wave_ctl_t               wave_ctl,
  output wave_sts_t               wave_sts,
  output logic signed [DAC_W-1:0] dac [2],
  output iq_t                     amp_meas [2],
  output phase_t                  ph_meas [2],
  output logic [1:0]              loop_railed,
  output iq_stream_t              link_tx
);

  phase_t dlo_phi;
  iq_t    dlo_i, dlo_q;
  iq_t    ddc_i [N_LLRF_CH];
  iq_t    ddc_q [N_LLRF_CH];
  iq_stream_t strm, cic_out;

  always_ff @(posedge clk) begin
    if (rst) s2_stb <= 1'b0;
    else     s2_stb <= !s2_stb;
  end

  dds_lo u_dds (.clk, .rst, .dlo_phi, .dlo_i, .dlo_q);

  monitor_bank #(.NCH(N_LLRF_CH), .N_FAST(2), .DEPTH(DEPTH), .RBITS(RBITS)) u_bank (
    .clk, .rst, .adc, .s2_stb, .dlo_i, .dlo_q, .mode(rf_mode),
    .cic_dec, .cic_shift, .permit, .wave_ctl,
    .ddc_i, .ddc_q, .strm, .cic_out, .wave_sts);

  for (genvar k = 0; k < 2; k++) begin : g_kly
    iq_t ua, up;
    logic upd;
    feedback_ctrl #(.NCH(N_LLRF_CH), .CAV1_CH(0), .CAV2_CH(1)) u_fb (
      .clk, .rst, .strm, .cfg(kly_cfg[k]), .dlo_phi, .permit,
      .dac(dac[k]), .amp_meas(amp_meas[k]), .ph_meas(ph_meas[k]),
      .u_amp(ua), .u_ph(up), .loop_upd(upd), .railed(loop_railed[k]));
  end

  assign link_tx = strm;

endmodule
