// pi_ctrl: proportional-integral controller with configurable saturation.
//
//   e      = sp - meas                    (wrapped to W bits if WRAP, for phase)
//   integ  = clip(integ + ki*e*2^-16 + ff, +-sat)
//   u      = clip(kp*e*2^-12 + floor(integ), +-sat)
//
// The integrator keeps 16 fractional bits, so that a small steady error
// (|ki*e| < 2^16) still accumulates instead of truncating to zero.
//
// This is C(z) = Kp + Ki / (1 - z^-1) with one integrator step per 'upd'
// strobe; the feedback controller pulses 'upd' every 4 DSP clocks, the
// loop period T = 4/f_clk. Feed-forward enters the integrator input and
// the saturation limits both the integrator and the output, as in the
// paper's controller drawing. The gain scalings, the sign of the error and
// the clip of the integrator are this design's choices; the paper's "SPR"
// box and proportional-path low-pass are not described and are not built.
//
// Timing: u and the integrator update on the clock edge where upd is high.
module pi_ctrl #(
  parameter int W    = 18,
  parameter bit WRAP = 1'b0
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                upd,
  input  logic signed [W-1:0] meas,
  input  logic signed [W-1:0] sp,
  input  logic signed [W-1:0] kp,
  input  logic signed [W-1:0] ki,
  input  logic signed [W-1:0] ff,
  input  logic signed [W-1:0] sat,
  output logic signed [W-1:0] u,
  output logic                railed     // output sits on the saturation limit
);

  localparam int EW = 2 * W + 4;
  typedef logic signed [EW-1:0] wide_t;

  localparam int FB = 16;                    // integrator fraction bits
  logic signed [W+FB-1:0] integ;
  wide_t e, p, i_new, u_new, lim;

  function automatic wide_t clip(input wide_t v, input wide_t l);
    if (v > l)       return l;
    else if (v < -l) return -l;
    else             return v;
  endfunction

  always_comb begin
    if (WRAP) e = wide_t'(W'(sp - meas));            // modulo-one-turn phase error
    else      e = wide_t'(sp) - wide_t'(meas);
    lim   = (sat < 0) ? wide_t'(0) : wide_t'(sat);
    p     = (wide_t'(kp) * e) >>> 12;
    i_new = clip(wide_t'(integ) + wide_t'(ki) * e + (wide_t'(ff) <<< FB), lim <<< FB);
    u_new = clip(p + (i_new >>> FB), lim);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      integ  <= '0;
      u      <= '0;
      railed <= 1'b0;
    end else if (upd) begin
      integ  <= (W+FB)'(i_new);
      u      <= W'(u_new);
      railed <= (u_new == lim) || (u_new == -lim);
    end
  end

endmodule
