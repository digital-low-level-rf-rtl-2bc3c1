// dds_lo: digital local oscillator at IF/CLK = NUM/DEN (2/11 of a turn per
// DSP clock), with its cosine and sine.
//
// The IF is f_MO/12 and the DSP clock f_LO/2 = 11/24 f_MO, so the IF phase
// advances exactly 2/11 turn per clock and repeats every 11 clocks. The
// phase is therefore kept as an exact counter k (mod DEN, step NUM) and
// mapped to the binary phase round(k * 2^PH_W / DEN): no phase error ever
// accumulates. A CORDIC in rotation mode turns the phase into cos and sin
// with amplitude 2^16 (the "1" at the CORDIC radius input).
//
// Outputs: dlo_phi (phase), dlo_i = 2^16 cos(phi), dlo_q = 2^16 sin(phi),
// all three aligned with each other and valid every clock after the CORDIC
// pipeline (STAGES+1 clocks) has filled. The ratio comes from the paper;
// the counter and the amplitude are this design's choice.
//
// Lint note: the CORDIC's angle and tag outputs are not needed here (the
// phase is tracked by the counter) and are left unused.
module dds_lo
  import llrf_pkg::*;
#(
  parameter int NUM    = 2,
  parameter int DEN    = 11,
  parameter int STAGES = 16
) (
  input  logic   clk,
  input  logic   rst,
  output phase_t dlo_phi,
  output iq_t    dlo_i,
  output iq_t    dlo_q
);

  localparam int CW = $clog2(DEN);
  // 2^16 / K, K = 1.646760 the CORDIC gain
  localparam logic signed [IQ_W-1:0] R0 = 18'sd39797;

  logic [CW-1:0] k;
  phase_t        phi;
  phase_t        phi_pipe [STAGES+1];

  function automatic phase_t k2phase(input logic [CW-1:0] kk);
    logic [PH_W+CW:0] num;
    num = ((PH_W+CW+1)'(kk) << PH_W) + (PH_W+CW+1)'(DEN / 2);
    return phase_t'(num / (PH_W+CW+1)'(DEN));
  endfunction

  always_ff @(posedge clk) begin
    if (rst) k <= '0;
    else if (32'(k) + NUM >= DEN) k <= CW'(32'(k) + NUM - DEN);
    else k <= CW'(32'(k) + NUM);
  end

  assign phi = k2phase(k);

  logic signed [IQ_W+1:0] xo, yo;
  phase_t                  zo;
  logic [1:0]              tg;

  cordic #(.W(IQ_W), .PW(PH_W), .STAGES(STAGES), .TAG_W(2)) u_cordic (
    .clk, .op(1'b0), .x_in(R0), .y_in('0), .z_in(phi), .tag_in(2'b00),
    .x_out(xo), .y_out(yo), .z_out(zo), .tag_out(tg));

  always_ff @(posedge clk) begin
    phi_pipe[0] <= phi;
    for (int i = 1; i <= STAGES; i++) phi_pipe[i] <= phi_pipe[i-1];
  end

  assign dlo_phi = phi_pipe[STAGES];
  assign dlo_i   = sat_iq(64'(xo));
  assign dlo_q   = sat_iq(64'(yo));

endmodule
