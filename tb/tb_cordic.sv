// tb_cordic: random vectoring jobs (all four quadrants) compared with
// K*hypot(x, y) and atan2(y, x), and random rotation jobs of (2^20/K, 0)
// compared with cos and sin, all in real arithmetic, within the precision
// that 16 steps on 22-bit words allow. Checks that done comes
// ITER+1 clocks after start and that busy covers the iterations.
module tb_cordic;
  import accel_pkg::*;
  localparam int W = 22, AW = 20, IT = 16;
  localparam real PI = 3.14159265358979323846;
  localparam real K  = 1.6467602578654548;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 1'b0, busy, done;
  cordic_mode_e mode = CORDIC_VECTOR;
  logic signed [W-1:0]  x_in = '0, y_in = '0, x_out, y_out;
  logic signed [AW-1:0] z_in = '0, z_out;
  cordic #(.WIDTH(W), .ANGLE_W(AW), .ITER(IT)) dut (.clk, .rst_n, .start, .mode, .x_in, .y_in, .z_in,
                                                    .busy, .done, .x_out, .y_out, .z_out);

  task automatic run(cordic_mode_e m, int x, int y, int z);
    int t0;
    @(negedge clk);
    mode = m; x_in = W'(x); y_in = W'(y); z_in = AW'(z); start = 1'b1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 1'b0;
    checks++;
    if (!busy) begin failures++; $display("busy not set"); end
    while (!done) @(negedge clk);
    checks++;
    if (cyc - t0 != IT + 1) begin failures++; $display("done after %0d clocks", cyc - t0); end
  endtask

  function automatic real absr(real v); return v < 0 ? -v : v; endfunction

  function automatic real wrap(real a);   // to (-pi, pi]
    while (a > PI) a -= 2.0 * PI;
    while (a <= -PI) a += 2.0 * PI;
    return a;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 60; n++) begin
      int x, y;
      real mag, ang, got_ang, e;
      x = $signed($urandom_range(400000)) - 200000;
      y = $signed($urandom_range(400000)) - 200000;
      if (n == 0) begin x = -150000; y = 0; end
      if (n == 1) begin x = 0; y = -150000; end
      run(CORDIC_VECTOR, x, y, 0);
      mag = K * $sqrt(real'(x) * x + real'(y) * y);
      ang = $atan2(real'(y), real'(x));
      got_ang = real'(z_out) * 2.0 * PI / real'(1 << AW);
      e = real'(x_out) - mag;
      checks++;
      if (e > 16.0 || e < -16.0) begin failures++; $display("vec (%0d,%0d): mag %0d want %f", x, y, x_out, mag); end
      e = wrap(got_ang - ang);
      checks++;
      // residual angle atan(2^-15) plus truncation of y, about 24 LSB, over |v|
      if (absr(e) > 4e-5 + 24.0 / mag) begin failures++; $display("vec (%0d,%0d): ang %f want %f", x, y, got_ang, ang); end
    end
    for (int n = 0; n < 60; n++) begin
      int z;
      real a, e1, e2, one;
      z = $signed($urandom_range((1 << AW) - 1)) - (1 << (AW - 1));
      one = real'(1 << 20);
      run(CORDIC_ROTATE, int'(one / K + 0.5), 0, z);
      a = real'(z) * 2.0 * PI / real'(1 << AW);
      e1 = real'(x_out) - one * $cos(a);
      e2 = real'(y_out) - one * $sin(a);
      checks++;
      if (e1 > 64.0 || e1 < -64.0 || e2 > 64.0 || e2 < -64.0) begin
        failures++; $display("rot %f: (%0d,%0d) want (%f,%f)", a, x_out, y_out, one * $cos(a), one * $sin(a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
