// feedback_ctrl: amplitude and phase feedback loop of one klystron.
//
// Data path, following the LLRF firmware drawing:
//  1. Deframing: the cavity-probe I/Q of cavities 1 and 2 are picked from
//     their slots of the conveyor belt (I in slot CAV1_CH / CAV2_CH, Q in
//     slot NCH+CAV1_CH / NCH+CAV2_CH).
//  2. Cart2Polar: one time-shared CORDIC in vectoring mode turns each
//     probe into amplitude A (in CORDIC units, K*|IQ|) and phase.
//  3. Drive-mode selection: the amplitude loop regulates A1, A2 or the
//     weighted average (w1*A1 + w2*A2)/2^16 when one klystron drives both
//     cavities; the phase loop follows the phase of one cavity (ph_cav).
//  4. Two pi_ctrl loops (amplitude, phase with wrap-around error), updated
//     every LOOP_T = 4 clocks, each with its own saturation.
//  5. Clip the loop outputs to +-clip (X from the amplitude loop, Y from
//     the phase loop).
//  6. Cart2Cart: a second CORDIC turns (X, Y) into the IF drive sample,
//     every clock. The DDC measures I/Q in the convention of the paper's
//     inverse matrix, y_n = I cos(n theta) + Q sin(n theta), so the drive
//     is generated in the same convention: with b = measured phase + phase
//     offset, the I/Q pair (X + jY) e^{jb} is sent as
//     Re{(X - jY) e^{j(LO - b)}}, i.e. (X, -Y) rotated by dlo_phi - b.
//     A positive Y then advances the measured cavity phase, and the phase
//     of the drive tracks the cavity phase (the offset compensates the
//     loop delay).
//  While RF permit is low both PI loops are held cleared (integrators at
//  zero), so that the drive restarts from zero when permit returns instead
//  of from an integrator wound up against the missing cavity signal (a
//  choice of this design; the paper only gates the drive).
//  7. Enable: the DAC word is the rotated X (scaled by 1/8, saturated to
//     DAC_W) while RF permit is high, and zero otherwise.
// The structure is the paper's. The slot assignment, the scaling, the
// selection encoding and the handling of "linearize" (not built: only the
// clip) are this design's choices.
//
// Timing: a measurement is ready STAGES+2 clocks after its Q slot passes;
// the DAC word follows dlo_phi by STAGES+3 clocks.
//
// Lint note: the vectoring CORDIC's y output, the rotating CORDIC's y,
// angle and tag outputs, and the stream's mode/first bits are not needed
// and are left unused.
module feedback_ctrl
  import llrf_pkg::*;
#(
  parameter int NCH     = N_LLRF_CH,
  parameter int CAV1_CH = 0,
  parameter int CAV2_CH = 1,
  parameter int LOOP_T  = 4,
  parameter int STAGES  = 16
) (
  input  logic                    clk,
  input  logic                    rst,
  input  iq_stream_t              strm,
  input  fb_cfg_t                 cfg,
  input  phase_t                  dlo_phi,
  input  logic                    permit,
  output logic signed [DAC_W-1:0] dac,
  output iq_t                     amp_meas,
  output phase_t                  ph_meas,
  output iq_t                     u_amp,
  output iq_t                     u_ph,
  output logic                    loop_upd,
  output logic                    railed
);

  // ---------------- deframing and Cart2Polar ----------------
  iq_t        i1, i2;
  iq_t        vx, vy;
  logic [1:0] vtag;

  always_ff @(posedge clk) begin
    if (rst) begin
      i1 <= '0; i2 <= '0; vx <= '0; vy <= '0; vtag <= 2'd0;
    end else begin
      vtag <= 2'd0;
      if (strm.valid) begin
        if (32'(strm.slot) == CAV1_CH) i1 <= strm.data;
        if (32'(strm.slot) == CAV2_CH) i2 <= strm.data;
        if (32'(strm.slot) == NCH + CAV1_CH) begin vx <= i1; vy <= strm.data; vtag <= 2'd1; end
        if (32'(strm.slot) == NCH + CAV2_CH) begin vx <= i2; vy <= strm.data; vtag <= 2'd2; end
      end
    end
  end

  logic signed [IQ_W+1:0] px, py;
  phase_t                 pz;
  logic [1:0]             ptag;

  cordic #(.W(IQ_W), .PW(PH_W), .STAGES(STAGES), .TAG_W(2)) u_c2p (
    .clk, .op(1'b1), .x_in(vx), .y_in(vy), .z_in('0), .tag_in(vtag),
    .x_out(px), .y_out(py), .z_out(pz), .tag_out(ptag));

  iq_t    a1, a2;
  phase_t ph1, ph2;
  logic [1:0] seen;

  always_ff @(posedge clk) begin
    if (rst) begin
      a1 <= '0; a2 <= '0; ph1 <= '0; ph2 <= '0; seen <= '0;
    end else begin
      if (ptag == 2'd1) begin a1 <= sat_iq(64'(px)); ph1 <= pz; seen[0] <= 1'b1; end
      if (ptag == 2'd2) begin a2 <= sat_iq(64'(px)); ph2 <= pz; seen[1] <= 1'b1; end
    end
  end

  // ---------------- drive-mode selection ----------------
  logic signed [IQ_W+17:0] avg;
  always_comb begin
    avg = (($signed({1'b0, cfg.w1}) * a1) + ($signed({1'b0, cfg.w2}) * a2)) >>> 16;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      amp_meas <= '0;
      ph_meas  <= '0;
    end else begin
      unique case (cfg.amp_src)
        SRC_CAV1: amp_meas <= a1;
        SRC_CAV2: amp_meas <= a2;
        SRC_AVG:  amp_meas <= sat_iq(64'(avg));
        default:  amp_meas <= a1;
      endcase
      ph_meas <= cfg.ph_cav ? ph2 : ph1;
    end
  end

  // ---------------- PI loops, T = LOOP_T clocks ----------------
  logic [$clog2(LOOP_T)-1:0] tcnt;
  always_ff @(posedge clk) begin
    if (rst) tcnt <= '0;
    else     tcnt <= (32'(tcnt) == LOOP_T - 1) ? '0 : tcnt + 1'b1;
  end
  assign loop_upd = (32'(tcnt) == LOOP_T - 1) && (seen == 2'b11);

  logic railed_a, railed_p;
  logic pi_rst;
  assign pi_rst = rst || !permit;

  pi_ctrl #(.W(IQ_W), .WRAP(1'b0)) u_amp_pi (
    .clk, .rst(pi_rst), .upd(loop_upd), .meas(amp_meas), .sp(cfg.amp_sp),
    .kp(cfg.kp_amp), .ki(cfg.ki_amp), .ff(cfg.ff_amp), .sat(cfg.sat_amp),
    .u(u_amp), .railed(railed_a));

  pi_ctrl #(.W(IQ_W), .WRAP(1'b1)) u_ph_pi (
    .clk, .rst(pi_rst), .upd(loop_upd), .meas(signed'(ph_meas)), .sp(cfg.ph_sp),
    .kp(cfg.kp_ph), .ki(cfg.ki_ph), .ff(cfg.ff_ph), .sat(cfg.sat_ph),
    .u(u_ph), .railed(railed_p));

  assign railed = railed_a || railed_p;

  // ---------------- clip, Cart2Cart up-conversion, enable ----------------
  iq_t    xc, yc;
  phase_t th;

  function automatic iq_t clip_iq(input iq_t v, input iq_t l);
    if (v > l)       return l;
    else if (v < -l) return -l;
    else             return v;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      xc <= '0; yc <= '0; th <= '0;
    end else begin
      xc <= clip_iq(u_amp, cfg.clip);
      yc <= -clip_iq(u_ph, cfg.clip);
      th <= dlo_phi - ph_meas - cfg.ph_offset;
    end
  end

  logic signed [IQ_W+1:0] ox, oy;
  phase_t                 oz;
  logic [1:0]             otag;

  cordic #(.W(IQ_W), .PW(PH_W), .STAGES(STAGES), .TAG_W(2)) u_c2c (
    .clk, .op(1'b0), .x_in(xc), .y_in(yc), .z_in(th), .tag_in(2'd0),
    .x_out(ox), .y_out(oy), .z_out(oz), .tag_out(otag));

  logic signed [IQ_W+1:0] ox8;
  assign ox8 = ox >>> 3;

  always_ff @(posedge clk) begin
    if (rst || !permit)         dac <= '0;
    else if (ox8 > 32767)       dac <= 16'sh7fff;
    else if (ox8 < -32768)      dac <= 16'sh8000;
    else                        dac <= DAC_W'(ox8);
  end

endmodule
