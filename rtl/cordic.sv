// cordic: pipelined CORDIC with a per-sample choice of operation.
//
//   op = 0 (rotate): (x_out, y_out) = K * R(z_in) * (x_in, y_in)
//   op = 1 (vector): x_out = K * |(x_in, y_in)|, z_out = angle of (x_in, y_in)
//
// K = 1.6468 is the CORDIC gain, left in the result for the caller to scale.
// Angles are unsigned fractions of a turn, PW bits (2^PW = 360 deg).
// A quadrant pre-rotation by 180 deg brings the input into the +-90 deg
// convergence range, then STAGES shift-and-add micro-rotations follow.
// The same unit serves as polar-to-cartesian (DDS LO, Fig. "r*cos, r*sin"),
// Cart2Polar (cavity probe amplitude/phase) and Cart2Cart (drive
// up-conversion), as the LLRF data path uses it. The internal structure is
// this design's own; the paper only names the CORDIC.
//
// Timing: fully pipelined, one input per clock, latency STAGES+1 clocks.
// The tag travels with the sample so time-shared callers can sort results.
module cordic #(
  parameter int W      = 18,    // input width
  parameter int PW     = 18,    // angle width
  parameter int STAGES = 16,
  parameter int TAG_W  = 2
) (
  input  logic                  clk,
  input  logic                  op,
  input  logic signed [W-1:0]   x_in,
  input  logic signed [W-1:0]   y_in,
  input  logic        [PW-1:0]  z_in,
  input  logic        [TAG_W-1:0] tag_in,
  output logic signed [W+1:0]   x_out,
  output logic signed [W+1:0]   y_out,
  output logic        [PW-1:0]  z_out,
  output logic        [TAG_W-1:0] tag_out
);

  localparam int G  = 4;        // fractional guard bits
  localparam int XW = W + 2 + G; // room for sqrt(2) * K growth

  // atan(2^-i) as a fraction of a turn, 32-bit, rounded.
  localparam logic [31:0] ATAN32 [24] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756, 32'd42667331,
    32'd21354465,  32'd10679838,  32'd5340245,   32'd2670163,  32'd1335087,
    32'd667544,    32'd333772,    32'd166886,    32'd83443,    32'd41722,
    32'd20861,     32'd10430,     32'd5215,      32'd2608,     32'd1304,
    32'd652,       32'd326,       32'd163,       32'd81 };

  function automatic logic [PW-1:0] atan_turn(input int i);
    logic [32:0] r;
    r = {1'b0, ATAN32[i]} + (33'd1 << (32 - PW - 1));
    return r[32-PW +: PW];
  endfunction

  logic signed [XW-1:0] xs [STAGES+1];
  logic signed [XW-1:0] ys [STAGES+1];
  logic        [PW-1:0] zs [STAGES+1];
  logic                 ops[STAGES+1];
  logic     [TAG_W-1:0] tgs[STAGES+1];

  // Stage 0: quadrant pre-rotation.
  always_ff @(posedge clk) begin
    ops[0] <= op;
    tgs[0] <= tag_in;
    if (op) begin
      if (x_in < 0) begin
        xs[0] <= -(XW'(x_in) <<< G);
        ys[0] <= -(XW'(y_in) <<< G);
        zs[0] <= {1'b1, {(PW-1){1'b0}}};       // 180 deg
      end else begin
        xs[0] <= XW'(x_in) <<< G;
        ys[0] <= XW'(y_in) <<< G;
        zs[0] <= '0;
      end
    end else begin
      if (z_in[PW-1] ^ z_in[PW-2]) begin       // 90..270 deg
        xs[0] <= -(XW'(x_in) <<< G);
        ys[0] <= -(XW'(y_in) <<< G);
        zs[0] <= z_in ^ {1'b1, {(PW-1){1'b0}}};
      end else begin
        xs[0] <= XW'(x_in) <<< G;
        ys[0] <= XW'(y_in) <<< G;
        zs[0] <= z_in;
      end
    end
  end

  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    localparam logic [PW-1:0] A = atan_turn(i);
    logic dpos;   // rotate by +atan(2^-i)
    always_comb begin
      if (ops[i]) dpos = ys[i] < 0;            // vectoring: drive y to zero
      else        dpos = !zs[i][PW-1];          // rotation: drive z to zero
    end
    always_ff @(posedge clk) begin
      ops[i+1] <= ops[i];
      tgs[i+1] <= tgs[i];
      if (dpos) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - A;
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + A;
      end
    end
  end

  // round away the guard bits
  assign x_out   = (W+2)'((xs[STAGES] + XW'(1 << (G - 1))) >>> G);
  assign y_out   = (W+2)'((ys[STAGES] + XW'(1 << (G - 1))) >>> G);
  assign z_out   = zs[STAGES];
  assign tag_out = tgs[STAGES];

endmodule
