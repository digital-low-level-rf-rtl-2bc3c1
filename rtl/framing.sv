// framing: serialises the I/Q of NCH channels onto the conveyor belt.
//
// The conveyor belt is one stream word per DSP clock. A frame is 2*NCH
// slots long, in the order I1, I2, ..., IN, Q1, Q2, ..., QN, and frames
// follow back to back. At the start of every frame the latest I/Q of all
// channels are latched, so a frame is a consistent snapshot even though
// the channels' DDCs update at their own sample strobes. Every word carries
// its slot number, a first-of-frame flag and the RF drive mode word.
// Downstream blocks (CIC, feedback deframer, interlock) pick their slots
// by number, which is how one pipeline is reused for all channels.
//
// The slot order follows the paper's I1,I2,Q1,Q2 stream; the frame length,
// the snapshot and the stream word layout are this design's choices.
// Timing: strm changes one clock after the snapshot; a frame takes 2*NCH
// clocks, so each channel is refreshed every 2*NCH clocks.
module framing
  import llrf_pkg::*;
#(
  parameter int NCH = N_LLRF_CH
) (
  input  logic              clk,
  input  logic              rst,
  input  iq_t               i_in [NCH],
  input  iq_t               q_in [NCH],
  input  logic [MODE_W-1:0] mode,
  output iq_stream_t        strm
);

  localparam int NSLOT = 2 * NCH;
  localparam int CW    = $clog2(NCH);   // channel index width

  logic [SLOT_W-1:0] cnt;
  iq_t               snap_i [NCH];
  iq_t               snap_q [NCH];
  logic              run;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0;
      run <= 1'b0;
      strm <= '0;
      for (int c = 0; c < NCH; c++) begin
        snap_i[c] <= '0;
        snap_q[c] <= '0;
      end
    end else begin
      run <= 1'b1;
      cnt <= (32'(cnt) == NSLOT - 1) ? '0 : cnt + 1'b1;
      if (cnt == '0) begin
        snap_i <= i_in;
        snap_q <= q_in;
      end
      strm.valid <= run;
      strm.first <= run && (cnt == '0);
      strm.slot  <= cnt;
      strm.mode  <= mode;
      if (cnt == '0) strm.data <= i_in[0];
      else if (32'(cnt) < NCH) strm.data <= snap_i[CW'(cnt)];
      else strm.data <= snap_q[CW'(32'(cnt) - NCH)];
    end
  end

endmodule
