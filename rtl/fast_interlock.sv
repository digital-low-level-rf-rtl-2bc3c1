// fast_interlock: RF permit of the storage-ring RF system.
//
// Two power_interlock units watch the I/Q streams of the LLRF chassis
// (NCH_A = 14 channels) and of the RF monitor chassis (NCH_B = 28). The
// 16 arc-detector status bits and 16 arc-power status bits (1 = healthy)
// arrive by direct wire; a Config mask (1 = use) selects which of them
// count. RF permit is the AND of "no power trip on either stream" and "no
// unmasked arc fault". Any fault drops the permit and keeps it low until
// the PLC resets the trips (rst_trip); arc faults are latched too, so a
// brief arc still removes the drive.
//
// The AND structure and the channel counts follow the paper; the polarity
// of the arc bits, the Config mask and the latching are this design's.
//
// Timing: permit falls on the third clock edge after an over-threshold Q
// slot appears on a stream (about 13 ns at 229 MHz), and on the second
// edge after an unmasked arc input falls. The paper's end-to-end
// requirement is < 4 us, including the links and the RF switch.
//
// Lint note: the first-fault channel numbers of the two power units are
// kept for debugging but not brought out; they are left unused.
module fast_interlock
  import llrf_pkg::*;
#(
  parameter int NCH_A = N_LLRF_CH,
  parameter int NCH_B = N_RFMON_CH,
  parameter int NA    = N_ARC
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             rst_trip,
  input  iq_stream_t       strm_a,
  input  iq_stream_t       strm_b,
  input  logic [PWR_W-1:0] thr_a [NCH_A],
  input  logic [PWR_W-1:0] thr_b [NCH_B],
  input  logic [NCH_A-1:0] en_a,
  input  logic [NCH_B-1:0] en_b,
  input  logic [NA-1:0]    arc_ok,
  input  logic [NA-1:0]    arc_pwr_ok,
  input  logic [2*NA-1:0]  cfg_arc_mask,
  output logic [NCH_A-1:0] trip_a,
  output logic [NCH_B-1:0] trip_b,
  output logic [2*NA-1:0]  arc_trip,
  output logic [PWR_W-1:0] pwr_a [NCH_A],
  output logic [PWR_W-1:0] pwr_b [NCH_B],
  output logic [MODE_W-1:0] mode_a,
  output logic [MODE_W-1:0] mode_b,
  output logic             permit
);

  logic [7:0] ff_a, ff_b;

  power_interlock #(.NCH(NCH_A)) u_a (
    .clk, .rst, .rst_trip, .strm(strm_a), .thr(thr_a), .en(en_a),
    .trip(trip_a), .pwr(pwr_a), .first_fault(ff_a));

  power_interlock #(.NCH(NCH_B)) u_b (
    .clk, .rst, .rst_trip, .strm(strm_b), .thr(thr_b), .en(en_b),
    .trip(trip_b), .pwr(pwr_b), .first_fault(ff_b));

  // Field IO: arc faults, masked by Config, latched.
  always_ff @(posedge clk) begin
    if (rst || rst_trip) arc_trip <= '0;
    else                 arc_trip <= arc_trip | (~{arc_pwr_ok, arc_ok} & cfg_arc_mask);
  end

  always_ff @(posedge clk) begin
    if (rst) permit <= 1'b0;
    else     permit <= (trip_a == '0) && (trip_b == '0) && (arc_trip == '0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      mode_a <= '0;
      mode_b <= '0;
    end else begin
      if (strm_a.valid) mode_a <= strm_a.mode;
      if (strm_b.valid) mode_b <= strm_b.mode;
    end
  end

endmodule
