// rfmon_chassis: the RF monitor FPGA.
//
// 28 monitor channels (12 + 16 ADCs, klystron, circulator, magic-T and
// test-load forward/reverse signals), all sampled at f_S2 with the DSP
// clock at twice that rate. The LO is the same 2/11 DDS as in the LLRF
// chassis. The 28 I/Q pairs are framed onto the conveyor belt, sent to the
// interlock as the link stream and recorded through the CIC into the
// waveform memory. Content per the paper; channel order is this design's.
//
// Lint note: the DDS phase, the per-channel DDC outputs and the CIC output
// are not needed outside the bank and are left unused.
module rfmon_chassis
  import llrf_pkg::*;
#(
  parameter int DEPTH = 65536,
  parameter int RBITS = 12
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] adc [N_RFMON_CH],
  output logic                    s2_stb,
  input  logic [MODE_W-1:0]       rf_mode,
  input  logic [RBITS-1:0]        cic_dec,
  input  logic [4:0]              cic_shift,
  input  logic                    permit,
  input  wave_ctl_t               wave_ctl,
  output wave_sts_t               wave_sts,
  output iq_stream_t              link_tx
);

  phase_t dlo_phi;
  iq_t    dlo_i, dlo_q;
  iq_t    ddc_i [N_RFMON_CH];
  iq_t    ddc_q [N_RFMON_CH];
  iq_stream_t cic_out;

  always_ff @(posedge clk) begin
    if (rst) s2_stb <= 1'b0;
    else     s2_stb <= !s2_stb;
  end

  dds_lo u_dds (.clk, .rst, .dlo_phi, .dlo_i, .dlo_q);

  monitor_bank #(.NCH(N_RFMON_CH), .N_FAST(0), .DEPTH(DEPTH), .RBITS(RBITS)) u_bank (
    .clk, .rst, .adc, .s2_stb, .dlo_i, .dlo_q, .mode(rf_mode),
    .cic_dec, .cic_shift, .permit, .wave_ctl,
    .ddc_i, .ddc_q, .strm(link_tx), .cic_out, .wave_sts);

endmodule
