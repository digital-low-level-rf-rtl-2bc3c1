// cic_conveyor: run-time configurable decimating CIC filter applied to
// every slot of the conveyor-belt stream.
//
// Each of the NSLOT slots (I and Q of every channel) has its own chain of
// ORDER integrators, updated when that slot passes by. Every dec+1 frames
// the last integrator of each slot is passed on in slot order (a "dump
// frame"); a comb x - x*z^-NSLOT on that serial output subtracts the value
// the same slot had at the previous dump, ORDER times. The output word is
// the comb result shifted right by 'shift' and saturated to IQ_W. For a
// constant input x the settled output is x * (dec+1)^ORDER >> shift.
//
// Parallel per-slot integrators feeding a serial comb with an NSLOT-deep
// delay follow the paper's conveyor-belt CIC; the second order follows the
// paper's block diagram. Emitting the dump in slot order as the slots pass
// (instead of loading a separate shift chain) is this design's equivalent.
// Integrators wrap modulo 2^ACC_W, which is exact for a CIC when
// ACC_W >= IQ_W + ORDER*RBITS. The first ORDER dumps after reset or after
// changing dec are not settled.
//
// Timing: a dump word leaves 2 clocks after its slot entered.
//
// Lint note: the input's first flag is rebuilt from the slot number and
// the data field of the internal dump word is unused (the wide sum travels
// beside it); both are left unused.
module cic_conveyor
  import llrf_pkg::*;
#(
  parameter int NSLOT = 2 * N_LLRF_CH,
  parameter int ORDER = 2,
  parameter int RBITS = 12
) (
  input  logic             clk,
  input  logic             rst,
  input  iq_stream_t       in,
  input  logic [RBITS-1:0] dec,     // decimation factor minus one, in frames
  input  logic [4:0]       shift,
  output iq_stream_t       out
);

  localparam int ACC_W = IQ_W + ORDER * RBITS;
  typedef logic [ACC_W-1:0] acc_t;

  localparam int SW = $clog2(NSLOT);  // slot index width
  acc_t             integ [ORDER][NSLOT];
  acc_t             combd [ORDER][NSLOT];
  logic [RBITS-1:0] fcnt;

  iq_stream_t       s1;       // dump word leaving the integrators
  acc_t             s1_val;

  always_ff @(posedge clk) begin
    if (rst) begin
      fcnt   <= '0;
      s1     <= '0;
      s1_val <= '0;
      out    <= '0;
      for (int k = 0; k < ORDER; k++)
        for (int s = 0; s < NSLOT; s++) begin
          integ[k][s] <= '0;
          combd[k][s] <= '0;
        end
    end else begin
      // integrators
      s1.valid <= 1'b0;
      if (in.valid && 32'(in.slot) < NSLOT) begin
        automatic acc_t t = acc_t'(signed'(in.data));
        for (int k = 0; k < ORDER; k++) begin
          t = integ[k][SW'(in.slot)] + t;
          integ[k][SW'(in.slot)] <= t;
        end
        if (32'(in.slot) == NSLOT - 1) fcnt <= (fcnt == dec) ? '0 : fcnt + 1'b1;
        s1.valid <= (fcnt == dec);
        s1.first <= (in.slot == '0);
        s1.slot  <= in.slot;
        s1.mode  <= in.mode;
        s1.data  <= '0;
        s1_val   <= t;
      end
      // combs
      out.valid <= s1.valid;
      if (s1.valid) begin
        automatic acc_t c = s1_val;
        automatic acc_t d;
        for (int k = 0; k < ORDER; k++) begin
          d = c - combd[k][SW'(s1.slot)];
          combd[k][SW'(s1.slot)] <= c;
          c = d;
        end
        out.first <= s1.first;
        out.slot  <= s1.slot;
        out.mode  <= s1.mode;
        out.data  <= sat_iq(64'(signed'(c)) >>> shift);
      end
    end
  end


endmodule
