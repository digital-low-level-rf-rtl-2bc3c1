// power_interlock: fast RF power interlock on one conveyor-belt stream.
//
// For each of NCH channels the I word (slot c) is held until the Q word
// (slot NCH+c) arrives; then the power I^2 + Q^2 is formed and compared
// with the channel's threshold. An enabled channel whose power exceeds its
// threshold sets its trip bit, which stays set until rst_trip. The first
// channel to trip is recorded. Thresholds and enables come from the PLC.
// Comparing power against a per-channel threshold is the paper's function;
// the squared-magnitude measure, the latching and the first-fault record
// are this design's choices.
//
// Timing: trip[c] rises on the second clock edge after the Q slot of
// channel c appears on strm.
//
// Lint note: the stream's first/mode bits are not needed here.
module power_interlock
  import llrf_pkg::*;
#(
  parameter int NCH = N_LLRF_CH
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             rst_trip,
  input  iq_stream_t       strm,
  input  logic [PWR_W-1:0] thr [NCH],
  input  logic [NCH-1:0]   en,
  output logic [NCH-1:0]   trip,
  output logic [PWR_W-1:0] pwr [NCH],
  output logic [7:0]       first_fault     // channel index + 1, 0 = none
);

  iq_t              ihold [NCH];

  function automatic logic [PWR_W-1:0] sq(input iq_t v);
    logic signed [2*IQ_W-1:0] t;
    t = v * v;
    return PWR_W'(unsigned'(t));
  endfunction
  logic             pv;
  localparam int CW = $clog2(NCH);   // channel index width
  logic [CW-1:0]    pch;
  logic [PWR_W-1:0] p;

  always_ff @(posedge clk) begin
    if (rst) begin
      pv  <= 1'b0;
      pch <= '0;
      p   <= '0;
      for (int c = 0; c < NCH; c++) begin
        ihold[c] <= '0;
        pwr[c]   <= '0;
      end
    end else begin
      pv <= 1'b0;
      if (strm.valid) begin
        if (32'(strm.slot) < NCH) ihold[CW'(strm.slot)] <= strm.data;
        else if (32'(strm.slot) < 2 * NCH) begin
          automatic logic [CW-1:0] c = CW'(32'(strm.slot) - NCH);
          pv  <= 1'b1;
          pch <= c;
          p   <= sq(ihold[c]) + sq(strm.data);
        end
      end
      if (pv) pwr[pch] <= p;
    end
  end

  always_ff @(posedge clk) begin
    if (rst || rst_trip) begin
      trip        <= '0;
      first_fault <= '0;
    end else if (pv && en[pch] && p > thr[pch]) begin
      trip[pch] <= 1'b1;
      if (trip == '0) first_fault <= 8'(pch) + 8'd1;
    end
  end

endmodule
