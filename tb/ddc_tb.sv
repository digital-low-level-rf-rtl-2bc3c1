// ddc_tb: feeds y = round(A cos(phi + psi)) with the ideal 2^16 LO at the
// sample instants into a DDC sampled every clock (theta = 2/11 turn) and
// one sampled every second clock (theta = 4/11 turn). Both must return
// I = 16 A cos(psi), Q = -16 A sin(psi), and iq_stb must follow adc_stb
// by 3 clocks.
module ddc_tb;
  import llrf_pkg::*;
  localparam real TWO_PI = 6.283185307179586;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic signed [ADC_W-1:0] adc;
  logic stb2;
  iq_t lc, ls, i1, q1, i2, q2;
  logic v1, v2;

  ddc #(.CLK_PER_SAMPLE(1)) dut1 (.clk, .rst, .adc, .adc_stb(1'b1), .lo_cos(lc), .lo_sin(ls),
                                  .i_out(i1), .q_out(q1), .iq_stb(v1));
  ddc #(.CLK_PER_SAMPLE(2)) dut2 (.clk, .rst, .adc, .adc_stb(stb2), .lo_cos(lc), .lo_sin(ls),
                                  .i_out(i2), .q_out(q2), .iq_stb(v2));

  int checks = 0, failures = 0;
  real amp, psi;
  logic [3:0] stbhist;
  int stb_count, out_count;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out(input iq_t i, input iq_t q, input string nm);
    automatic real ei = 16.0 * amp * $cos(psi), eq = -16.0 * amp * $sin(psi);
    checks++;
    if ((real'(i) - ei) > 48.0 || (real'(i) - ei) < -48.0 ||
        (real'(q) - eq) > 48.0 || (real'(q) - eq) < -48.0) begin
      failures++;
      $display("%s: got %0d %0d exp %f %f", nm, i, q, ei, eq);
    end
  endtask

  initial begin
    adc = 0; lc = 0; ls = 0; stb2 = 0; stbhist = 0; stb_count = 0; out_count = 0;
    amp = 0; psi = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 3000; t++) begin
      automatic real ph = TWO_PI * real'((2 * t) % 11) / 11.0;
      if (t % 500 == 0) begin
        amp = real'($urandom_range(1000, 8000));
        psi = TWO_PI * real'($urandom_range(0, 999)) / 1000.0;
      end
      // checks of outputs produced by settled inputs
      if (t % 500 > 10) begin
        if (v1) check_out(i1, q1, "fast");
        if (v2) check_out(i2, q2, "slow");
      end
      // latency: slow channel strobe applied 3 clocks before v2 (stbhist[1] holds it)
      if (t > 10) begin
        checks++;
        if (v2 != stbhist[1]) begin failures++; $display("t=%0d latency mismatch", t); end
        if (v2) out_count++;
      end
      stbhist = {stbhist[2:0], stb2};
      stb2 = t[0];
      lc = iq_t'($rtoi($floor(65536.0 * $cos(ph) + 0.5)));
      ls = iq_t'($rtoi($floor(65536.0 * $sin(ph) + 0.5)));
      adc = ADC_W'($rtoi($floor(amp * $cos(ph + psi) + 0.5)));
      @(negedge clk);
    end
    checks++;
    if (out_count < 1400) begin failures++; $display("too few slow outputs %0d", out_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
