// wave_buffer: double-buffered circular waveform memory with fault capture.
//
// The decimated conveyor-belt stream is written continuously into one of
// two banks of DEPTH/2 words, wrapping around (a circular buffer). A
// trigger, either a falling edge of RF permit (a fault) or a host request,
// lets the bank record POST more words and then freezes it, so the frozen
// bank holds the history before and after the event. Writing moves on to
// the other bank if the host has released it; if both banks are frozen,
// writing pauses. The host reads the frozen bank through rd_addr while the
// other bank is being written, so reads and writes never collide, and
// releases it with ack. With each frozen bank the buffer keeps the trigger
// timestamp (a free-running clock count), the cause and the write address
// at the trigger, so the host can unroll the circular order.
//
// Channel selection: the host's skip mask (one bit per slot) leaves the
// marked slots out of the record, so the memory holds a longer history of
// the channels that matter; the post-trigger count runs in recorded words.
//
// The 64k-word total, the permit-triggered capture, the double buffer and
// the dynamic channel selection follow the paper; the bank split, POST,
// the per-slot mask, the statistics kept and the host handshake are this
// design's choices.
//
// Timing: rd_data/rd_slot are registered, valid one clock after rd_addr.
// ready rises one clock after the last post-trigger word is written.
//
// Lint note: the stream's first/mode bits are not stored (only slot and
// data are) and are left unused.
module wave_buffer
  import llrf_pkg::*;
#(
  parameter int DEPTH = 65536,
  parameter int POST  = DEPTH / 4
) (
  input  logic       clk,
  input  logic       rst,
  input  iq_stream_t in,
  input  logic       permit,
  input  wave_ctl_t  ctl,
  output wave_sts_t  sts
);

  localparam int BW = $clog2(DEPTH) - 1;        // address bits inside a bank
  localparam int WW = SLOT_W + IQ_W;

  logic [WW-1:0]  mem [DEPTH];
  logic           wbank, rbank;
  logic [BW-1:0]  wptr;
  logic [1:0]     frozen;
  logic           trig_pend;
  logic [BW:0]    post_cnt;
  logic           permit_d;
  logic [47:0]    now;
  logic [47:0]    t_trig   [2];
  logic [BW-1:0]  p_trig   [2];
  logic [1:0]     cause;
  logic           writing;
  logic           trig_ev;

  logic           take;

  assign writing = !frozen[wbank];
  assign take    = in.valid && !ctl.skip[in.slot];
  assign trig_ev = (permit_d && !permit) || ctl.trig;

  always_ff @(posedge clk) begin
    if (writing && take) mem[{wbank, wptr}] <= {in.slot, in.data};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wbank     <= 1'b0;
      rbank     <= 1'b0;
      wptr      <= '0;
      frozen    <= '0;
      trig_pend <= 1'b0;
      post_cnt  <= '0;
      permit_d  <= 1'b0;
      now       <= '0;
      cause     <= '0;
      t_trig[0] <= '0; t_trig[1] <= '0;
      p_trig[0] <= '0; p_trig[1] <= '0;
    end else begin
      now      <= now + 1'b1;
      permit_d <= permit;
      // trigger: start counting the post-trigger words
      if (trig_ev && !trig_pend && writing) begin
        trig_pend      <= 1'b1;
        post_cnt       <= (BW+1)'(POST);
        t_trig[wbank]  <= now;
        p_trig[wbank]  <= wptr;
        cause[wbank]   <= permit_d && !permit;
      end
      if (writing && take) begin
        wptr <= wptr + 1'b1;
        if (trig_pend) begin
          if (post_cnt <= 1) begin
            // freeze this bank, move on to the other one
            trig_pend     <= 1'b0;
            frozen[wbank] <= 1'b1;
            if (!frozen[!wbank]) rbank <= wbank;
            wbank         <= !wbank;
            wptr          <= '0;
          end else begin
            post_cnt <= post_cnt - 1'b1;
          end
        end
      end
      // host releases the bank it has read
      if (ctl.ack && frozen[rbank]) begin
        frozen[rbank] <= 1'b0;
        if (frozen[!rbank]) rbank <= !rbank;
      end
    end
  end

  logic [WW-1:0] rd_word;
  always_ff @(posedge clk) rd_word <= mem[{rbank, ctl.rd_addr[BW-1:0]}];

  assign sts.ready    = frozen[rbank];
  assign sts.fault    = cause[rbank];
  assign sts.t_stamp  = t_trig[rbank];
  assign sts.trig_ptr = 15'(p_trig[rbank]);
  assign sts.rd_slot  = rd_word[IQ_W +: SLOT_W];
  assign sts.rd_data  = rd_word[IQ_W-1:0];

endmodule
