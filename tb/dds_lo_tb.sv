// dds_lo_tb: the LO phase must step by exactly 2/11 turn per clock
// (period 11 clocks, phase = round(k*2^18/11)) and dlo_i/dlo_q must be
// 2^16 cos/sin of that phase within a few LSB.
module dds_lo_tb;
  import llrf_pkg::*;
  localparam real TWO_PI = 6.283185307179586;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  phase_t phi;
  iq_t di, dq;
  dds_lo dut (.clk, .rst, .dlo_phi(phi), .dlo_i(di), .dlo_q(dq));

  int checks = 0, failures = 0;
  int kexp;
  phase_t prev [11];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (20) @(negedge clk);
    // find k of the current phase
    kexp = -1;
    for (int k = 0; k < 11; k++)
      if (phi == phase_t'((k * 262144 + 5) / 11)) kexp = k;
    checks++;
    if (kexp < 0) begin failures++; $display("phase %0d is not a multiple of 1/11 turn", phi); kexp = 0; end
    for (int t = 0; t < 200; t++) begin
      automatic real a = real'(phi) / 262144.0 * TWO_PI;
      automatic real ec = 65536.0 * $cos(a), es = 65536.0 * $sin(a);
      checks++;
      if (phi != phase_t'((kexp * 262144 + 5) / 11)) begin
        failures++; $display("t=%0d phase %0d exp k=%0d", t, phi, kexp);
      end
      checks++;
      if ((real'(di) - ec) > 4.0 || (real'(di) - ec) < -4.0 ||
          (real'(dq) - es) > 4.0 || (real'(dq) - es) < -4.0) begin
        failures++; $display("t=%0d cos/sin %0d %0d exp %f %f", t, di, dq, ec, es);
      end
      kexp = (kexp + 2) % 11;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
