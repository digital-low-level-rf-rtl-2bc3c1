// monitor_bank: the receive side shared by the LLRF and RF monitor chassis.
//
// NCH ADC channels are each down-converted by a ddc. The first N_FAST
// channels are sampled every DSP clock (f_S1 = 229 MHz); the others every
// second clock (f_S2 = 114.5 MHz, marked by s2_stb), so that the DSP
// pipeline gets two clocks per sample ("double time"). The framing block
// puts all I/Q onto the conveyor belt, which leaves the bank as strm (to
// the feedback loops and the interlock link). The same stream passes a
// run-time decimating CIC filter into a double-buffered waveform memory
// that freezes on an RF permit drop.
//
// All sub-blocks follow the paper's chassis diagrams; the split of the
// chassis into this shared bank is this design's. ADC words are parallel
// two's-complement samples; the LVDS capture (ADC PHY) is outside.
//
// Lint note: each DDC's output strobe is not needed, because framing
// samples the latest I/Q every frame; it is left unused.
module monitor_bank
  import llrf_pkg::*;
#(
  parameter int NCH    = N_LLRF_CH,
  parameter int N_FAST = 2,
  parameter int DEPTH  = 65536,
  parameter int RBITS  = 12
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] adc [NCH],
  input  logic                    s2_stb,
  input  iq_t                     dlo_i,
  input  iq_t                     dlo_q,
  input  logic [MODE_W-1:0]       mode,
  input  logic [RBITS-1:0]        cic_dec,
  input  logic [4:0]              cic_shift,
  input  logic                    permit,
  input  wave_ctl_t               wave_ctl,
  output iq_t                     ddc_i [NCH],
  output iq_t                     ddc_q [NCH],
  output iq_stream_t              strm,
  output iq_stream_t              cic_out,
  output wave_sts_t               wave_sts
);

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic stb_o;
    ddc #(.CLK_PER_SAMPLE(c < N_FAST ? 1 : 2)) u_ddc (
      .clk, .rst, .adc(adc[c]), .adc_stb(c < N_FAST ? 1'b1 : s2_stb),
      .lo_cos(dlo_i), .lo_sin(dlo_q),
      .i_out(ddc_i[c]), .q_out(ddc_q[c]), .iq_stb(stb_o));
  end

  framing #(.NCH(NCH)) u_framing (
    .clk, .rst, .i_in(ddc_i), .q_in(ddc_q), .mode, .strm);

  cic_conveyor #(.NSLOT(2 * NCH), .ORDER(2), .RBITS(RBITS)) u_cic (
    .clk, .rst, .in(strm), .dec(cic_dec), .shift(cic_shift), .out(cic_out));

  wave_buffer #(.DEPTH(DEPTH)) u_wave (
    .clk, .rst, .in(cic_out), .permit, .ctl(wave_ctl), .sts(wave_sts));

endmodule
