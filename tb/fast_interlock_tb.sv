// fast_interlock_tb: both streams carry frames of random I/Q below their
// power thresholds; permit must stay high and every reported power must be
// I^2+Q^2. Then one channel of each stream in turn goes over its threshold:
// only that trip bit may set, permit must fall 3 clocks after the Q slot is
// presented (the paper allows < 4 us end to end), stay low, and come back
// after rst_trip. A masked arc fault must be ignored, an unmasked one must
// drop permit 2 clocks later. Disabled channels must never trip.
module fast_interlock_tb;
  import llrf_pkg::*;
  localparam int NA = N_LLRF_CH, NB = N_RFMON_CH;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  iq_stream_t sa, sb;
  logic [PWR_W-1:0] thr_a [NA], thr_b [NB], pwr_a [NA], pwr_b [NB];
  logic [NA-1:0] en_a, trip_a;
  logic [NB-1:0] en_b, trip_b;
  logic [N_ARC-1:0] arc_ok, arc_pwr_ok;
  logic [2*N_ARC-1:0] mask, arc_trip;
  logic [MODE_W-1:0] ma, mb;
  logic rst_trip, permit;

  fast_interlock dut (.clk, .rst, .rst_trip, .strm_a(sa), .strm_b(sb), .thr_a, .thr_b,
    .en_a, .en_b, .arc_ok, .arc_pwr_ok, .cfg_arc_mask(mask), .trip_a, .trip_b, .arc_trip,
    .pwr_a, .pwr_b, .mode_a(ma), .mode_b(mb), .permit);

  int checks = 0, failures = 0;
  iq_t ia [NA], qa [NA], ib [NB], qb [NB];

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PWR_W-1:0] p2(iq_t i, iq_t q);
    return PWR_W'(longint'(i) * longint'(i) + longint'(q) * longint'(q));
  endfunction

  // One frame on both streams (slot k of stream b runs alongside slot k of a).
  // hot_a/hot_b: channel to push over threshold (-1 none); returns the
  // clocks from its Q slot to permit low (-1 if not seen in the frame).
  task automatic frame(input int hot_a, input int hot_b, output int lat);
    int qslot_t = -1;
    lat = -1;
    for (int c = 0; c < NA; c++) begin ia[c] = iq_t'(int'($urandom_range(0, 2000)) - 1000); qa[c] = iq_t'(int'($urandom_range(0, 2000)) - 1000); end
    for (int c = 0; c < NB; c++) begin ib[c] = iq_t'(int'($urandom_range(0, 2000)) - 1000); qb[c] = iq_t'(int'($urandom_range(0, 2000)) - 1000); end
    if (hot_a >= 0) qa[hot_a] = 18'sd5000;
    if (hot_b >= 0) qb[hot_b] = -18'sd5000;
    for (int k = 0; k < 2 * NB + 4; k++) begin
      sa = '0; sb = '0;
      if (k < 2 * NA) begin
        sa.valid = 1; sa.first = (k == 0); sa.slot = SLOT_W'(k); sa.mode = 4'd3;
        sa.data = (k < NA) ? ia[k] : qa[k - NA];
        if (hot_a >= 0 && k == NA + hot_a) qslot_t = k;
      end
      if (k < 2 * NB) begin
        sb.valid = 1; sb.first = (k == 0); sb.slot = SLOT_W'(k); sb.mode = 4'd7;
        sb.data = (k < NB) ? ib[k] : qb[k - NB];
        if (hot_b >= 0 && k == NB + hot_b) qslot_t = k;
      end
      @(negedge clk);
      if (qslot_t >= 0 && lat < 0 && !permit) lat = k - qslot_t + 1;
    end
  endtask

  initial begin
    int lat;
    sa = '0; sb = '0; rst_trip = 0;
    for (int c = 0; c < NA; c++) thr_a[c] = PWR_W'(3000000);
    for (int c = 0; c < NB; c++) thr_b[c] = PWR_W'(3000000);
    en_a = '1; en_b = '1; en_a[5] = 0;
    arc_ok = '1; arc_pwr_ok = '1; mask = '1; mask[3] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (3) @(negedge clk);
    // quiet frames
    repeat (4) begin
      frame(-1, -1, lat);
      checks++;
      if (!permit || trip_a != 0 || trip_b != 0) begin failures++; $display("spurious trip"); end
      for (int c = 0; c < NA; c++) begin checks++; if (pwr_a[c] != p2(ia[c], qa[c])) begin failures++; $display("pwr_a[%0d] %0d exp %0d", c, pwr_a[c], p2(ia[c], qa[c])); end end
      for (int c = 0; c < NB; c++) begin checks++; if (pwr_b[c] != p2(ib[c], qb[c])) begin failures++; $display("pwr_b[%0d]", c); end end
      checks++;
      if (ma != 4'd3 || mb != 4'd7) begin failures++; $display("mode words"); end
    end
    // disabled channel over threshold: no trip
    frame(5, -1, lat);
    checks++;
    if (!permit) begin failures++; $display("disabled channel tripped"); end
    // stream a channel 9
    frame(9, -1, lat);
    checks += 2;
    if (trip_a != (NA'(1) << 9) || trip_b != 0) begin failures++; $display("trip_a %b", trip_a); end
    if (lat != 3) begin failures++; $display("latency a %0d clocks, exp 3", lat); end
    frame(-1, -1, lat);
    checks++;
    if (permit) begin failures++; $display("permit not latched low"); end
    rst_trip = 1; @(negedge clk); rst_trip = 0; @(negedge clk); @(negedge clk);
    checks++;
    if (!permit) begin failures++; $display("permit not restored"); end
    // stream b channel 21
    frame(-1, 21, lat);
    checks += 2;
    if (trip_b != (NB'(1) << 21) || trip_a != 0) begin failures++; $display("trip_b %b", trip_b); end
    if (lat != 3) begin failures++; $display("latency b %0d clocks, exp 3", lat); end
    rst_trip = 1; @(negedge clk); rst_trip = 0; @(negedge clk); @(negedge clk);
    // masked arc fault
    arc_ok[3] = 0; repeat (4) @(negedge clk);
    checks++;
    if (!permit) begin failures++; $display("masked arc tripped"); end
    arc_ok[3] = 1;
    // unmasked arc power fault
    arc_pwr_ok[2] = 0;
    @(negedge clk);
    arc_pwr_ok[2] = 1;
    checks++;
    if (!permit) begin failures++; $display("arc latency too short"); end
    @(negedge clk);
    checks += 2;
    if (permit) begin failures++; $display("arc fault did not drop permit in 2 clocks"); end
    if (arc_trip != (32'(1) << 18)) begin failures++; $display("arc_trip %h", arc_trip); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
