// interlock_chassis: the Fast Interlock FPGA (with the Field IO inputs).
//
// Takes the two I/Q streams arriving from the LLRF and RF monitor links,
// the 32 arc-detector wires and the PLC settings (thresholds, enables,
// arc Config mask, trip reset) and produces RF permit through
// fast_interlock. A circular waveform memory records the LLRF stream as it
// arrives and freezes on a drop of the permit produced here, so the
// probe and drive history around an interlock trip can be read back.
// Content per the paper; the undecimated recording is this design's.
//
// Lint note: the per-channel power words of fast_interlock are not
// brought out and are left unused.
module interlock_chassis
  import llrf_pkg::*;
#(
  parameter int DEPTH = 65536
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              rst_trip,
  input  iq_stream_t        llrf_rx,
  input  iq_stream_t        rfmon_rx,
  input  logic [PWR_W-1:0]  thr_a [N_LLRF_CH],
  input  logic [PWR_W-1:0]  thr_b [N_RFMON_CH],
  input  logic [N_LLRF_CH-1:0]  en_a,
  input  logic [N_RFMON_CH-1:0] en_b,
  input  logic [N_ARC-1:0]  arc_ok,
  input  logic [N_ARC-1:0]  arc_pwr_ok,
  input  logic [2*N_ARC-1:0] cfg_arc_mask,
  input  wave_ctl_t         wave_ctl,
  output wave_sts_t         wave_sts,
  output logic [N_LLRF_CH-1:0]  trip_a,
  output logic [N_RFMON_CH-1:0] trip_b,
  output logic [2*N_ARC-1:0] arc_trip,
  output logic [MODE_W-1:0] mode_a,
  output logic [MODE_W-1:0] mode_b,
  output logic              permit
);

  logic [PWR_W-1:0] pwr_a [N_LLRF_CH];
  logic [PWR_W-1:0] pwr_b [N_RFMON_CH];

  fast_interlock #(.NCH_A(N_LLRF_CH), .NCH_B(N_RFMON_CH), .NA(N_ARC)) u_ilk (
    .clk, .rst, .rst_trip, .strm_a(llrf_rx), .strm_b(rfmon_rx),
    .thr_a, .thr_b, .en_a, .en_b, .arc_ok, .arc_pwr_ok, .cfg_arc_mask,
    .trip_a, .trip_b, .arc_trip, .pwr_a, .pwr_b, .mode_a, .mode_b, .permit);

  wave_buffer #(.DEPTH(DEPTH)) u_wave (
    .clk, .rst, .in(llrf_rx), .permit, .ctl(wave_ctl), .sts(wave_sts));

endmodule
