// ddc: direct digital down-conversion of one non-IQ-sampled ADC channel.
//
// With the IF advancing theta per sample (not a multiple of 90 deg), two
// consecutive samples y_n, y_n+1 of y = I cos(n theta) + Q sin(n theta)
// determine I and Q through the inverse of the 2x2 sampling matrix:
//
//   I = ( sin((n+1)t) y_n - sin(n t) y_n+1 ) / sin t
//   Q = (-cos((n+1)t) y_n + cos(n t) y_n+1 ) / sin t
//
// The cos/sin coefficients are the shared DDS LO values (2^16 amplitude)
// present at each sample instant; the block keeps the previous sample and
// its LO values so a new I/Q is produced for every sample (overlapping
// pairs). 1/sin(theta) is a constant: theta = 2/11 turn for channels
// sampled every DSP clock (f_S1) and 4/11 turn for channels sampled every
// second clock (f_S2, "double time"). The equations are the paper's; the
// overlap, the pipelining and the scaling (I/Q = 16 x ADC units) are this
// design's choices.
//
// Interface: adc/lo_cos/lo_sin are sampled when adc_stb is high. i_out and
// q_out update 3 clocks later with iq_stb high for one clock. The first
// strobe after reset only primes the pair and produces no output.
module ddc
  import llrf_pkg::*;
#(
  parameter int CLK_PER_SAMPLE = 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [ADC_W-1:0]  adc,
  input  logic                     adc_stb,
  input  iq_t                      lo_cos,
  input  iq_t                      lo_sin,
  output iq_t                      i_out,
  output iq_t                      q_out,
  output logic                     iq_stb
);

  // round(2^16 / sin(2*pi*2*CLK_PER_SAMPLE/11))
  localparam logic signed [18:0] INV_SIN = (CLK_PER_SAMPLE == 1) ? 19'sd72047 : 19'sd86717;
  localparam int SH = 28;   // 2^16 (LO) * 2^16 (INV_SIN) / 2^4 (output gain 16)

  logic signed [ADC_W-1:0] y0, y1;
  iq_t                     c0, c1, s0, s1;
  logic                    primed, v1, v2;
  logic signed [ADC_W+IQ_W+1:0] pi_acc, pq_acc;

  always_ff @(posedge clk) begin
    if (rst) begin
      primed <= 1'b0;
      v1     <= 1'b0;
      v2     <= 1'b0;
      iq_stb <= 1'b0;
      y0 <= '0; y1 <= '0; c0 <= '0; c1 <= '0; s0 <= '0; s1 <= '0;
      pi_acc <= '0; pq_acc <= '0; i_out <= '0; q_out <= '0;
    end else begin
      // stage 1: shift the sample pair
      v1 <= adc_stb && primed;
      if (adc_stb) begin
        primed <= 1'b1;
        y0 <= y1;     c0 <= c1;     s0 <= s1;
        y1 <= adc;    c1 <= lo_cos; s1 <= lo_sin;
      end
      // stage 2: the matrix products (y0 = y_n, y1 = y_n+1)
      v2 <= v1;
      if (v1) begin
        pi_acc <= (s1 * y0) - (s0 * y1);
        pq_acc <= (c0 * y1) - (c1 * y0);
      end
      // stage 3: scale by 1/sin(theta)
      iq_stb <= v2;
      if (v2) begin
        i_out <= sat_iq((64'(pi_acc) * 64'(INV_SIN)) >>> SH);
        q_out <= sat_iq((64'(pq_acc) * 64'(INV_SIN)) >>> SH);
      end
    end
  end

endmodule
