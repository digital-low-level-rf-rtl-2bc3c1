// cordic_tb: checks the CORDIC against real-number trigonometry.
// Random vectors go through both operations, one per clock, alternating
// rotate and vector. Each result is compared, STAGES+1 clocks later, with
// K*R(z)*(x,y) or with K*|v| and atan2(y,x); the tag must arrive with it,
// which checks the latency.
module cordic_tb;
  localparam int W = 18, PW = 18, ST = 16, N = 400, LAT = ST + 1;
  localparam real K = 1.646760258, TWO_PI = 6.283185307179586;

  logic clk = 0;
  always #5 clk = ~clk;

  logic op;
  logic signed [W-1:0] x, y;
  logic [PW-1:0] z;
  logic [1:0] tag;
  logic signed [W+1:0] xo, yo;
  logic [PW-1:0] zo;
  logic [1:0] tago;

  cordic #(.W(W), .PW(PW), .STAGES(ST), .TAG_W(2)) dut (
    .clk, .op, .x_in(x), .y_in(y), .z_in(z), .tag_in(tag),
    .x_out(xo), .y_out(yo), .z_out(zo), .tag_out(tago));

  int checks = 0, failures = 0;
  logic          ops [N];
  int            xs [N], ys [N], zs [N];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < N + LAT + 1; t++) begin
      @(negedge clk);
      if (t >= LAT) begin
        automatic int k = t - LAT;
        automatic real xr = xs[k], yr = ys[k], ang = real'(zs[k]) / 262144.0 * TWO_PI;
        checks++;
        if (tago != 2'(k)) begin failures++; $display("tag mismatch at %0d", k); end
        if (!ops[k]) begin
          automatic real ex = K * (xr * $cos(ang) - yr * $sin(ang));
          automatic real ey = K * (xr * $sin(ang) + yr * $cos(ang));
          checks++;
          if ((real'(xo) - ex) > 8.0 || (real'(xo) - ex) < -8.0 ||
              (real'(yo) - ey) > 8.0 || (real'(yo) - ey) < -8.0) begin
            failures++;
            $display("rot %0d: got %0d %0d exp %f %f", k, xo, yo, ex, ey);
          end
        end else begin
          automatic real em = K * $sqrt(xr * xr + yr * yr);
          automatic real ea = $atan2(yr, xr) / TWO_PI * 262144.0;
          automatic real da;
          if (ea < 0) ea += 262144.0;
          da = real'(zo) - ea;
          if (da > 131072.0) da -= 262144.0;
          if (da < -131072.0) da += 262144.0;
          checks++;
          if ((real'(xo) - em) > 8.0 || (real'(xo) - em) < -8.0 || da > 8.0 || da < -8.0) begin
            failures++;
            $display("vec %0d: got %0d %0d exp %f %f", k, xo, zo, em, ea);
          end
        end
      end
      if (t < N) begin
        ops[t] = t[0];
        xs[t] = int'($urandom_range(0, 60000)) - 30000;
        ys[t] = int'($urandom_range(0, 60000)) - 30000;
        if (ops[t] && xs[t] > -4000 && xs[t] < 4000 && ys[t] > -4000 && ys[t] < 4000) xs[t] = 20000;
        zs[t] = int'($urandom_range(0, 262143));
        op = ops[t]; x = W'(xs[t]); y = W'(ys[t]); z = PW'(zs[t]); tag = 2'(t);
      end else begin
        op = 0; x = 0; y = 0; z = 0; tag = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
