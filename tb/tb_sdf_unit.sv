// tb_sdf_unit: drives one 16-point SDF stage with three random frames (two
// back to back, one after a gap) and compares its output stream with the
// decimation-in-frequency stage computed in the testbench: first the halved
// sums x[k] + x[k+8], then the halved differences times exp(-j*2*pi*k/16).
// Also checks that the first output leaves L/2 + 2 clocks after the first
// input and that every frame yields exactly L outputs.
module tb_sdf_unit;
  localparam int L = 16, W = 16, D = L / 2, FRAMES = 3;
  localparam real PI = 3.14159265358979323846;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic di_en = 1'b0, do_en;
  logic signed [W-1:0] di_re = '0, di_im = '0, do_re, do_im;
  sdf_unit #(.L(L), .WIDTH(W), .TW_W(16), .TW_FRAC(14)) dut (.clk, .rst_n, .di_en, .di_re, .di_im, .do_en, .do_re, .do_im);

  real xr [FRAMES][L], xi [FRAMES][L];
  real er [FRAMES*L], ei [FRAMES*L];
  int  cyc = 0, first_in = -1, first_out = -1, nout = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real half_up(real v);
    return $floor((v + 1.0) / 2.0);
  endfunction

  initial begin
    // reference
    for (int f = 0; f < FRAMES; f++)
      for (int k = 0; k < L; k++) begin
        xr[f][k] = real'($signed($urandom_range(20000)) - 10000);
        xi[f][k] = real'($signed($urandom_range(20000)) - 10000);
      end
    for (int f = 0; f < FRAMES; f++)
      for (int k = 0; k < D; k++) begin
        real dr, dim, c, s;
        er[f*L+k] = half_up(xr[f][k] + xr[f][k+D]);
        ei[f*L+k] = half_up(xi[f][k] + xi[f][k+D]);
        dr  = half_up(xr[f][k] - xr[f][k+D]);
        dim = half_up(xi[f][k] - xi[f][k+D]);
        c = $cos(2.0*PI*k/L); s = -$sin(2.0*PI*k/L);
        er[f*L+D+k] = dr * c - dim * s;
        ei[f*L+D+k] = dr * s + dim * c;
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < FRAMES; f++) begin
      if (f == 2) repeat (5) @(posedge clk);
      for (int k = 0; k < L; k++) begin
        @(negedge clk);
        di_en = 1'b1; di_re = W'(int'(xr[f][k])); di_im = W'(int'(xi[f][k]));
        if (first_in < 0) first_in = cyc;
      end
      @(negedge clk); di_en = 1'b0;
    end
    repeat (3 * L) @(posedge clk);
    checks++;
    if (nout != FRAMES * L) begin failures++; $display("got %0d outputs", nout); end
    checks++;
    if (first_out - first_in != D + 2) begin failures++; $display("latency %0d", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && do_en) begin
    real e1, e2;
    if (first_out < 0) first_out = cyc;
    if (nout < FRAMES * L) begin
      e1 = real'(do_re) - er[nout];
      e2 = real'(do_im) - ei[nout];
      checks++;
      if (e1 > 1.5 || e1 < -1.5 || e2 > 1.5 || e2 < -1.5) begin
        failures++;
        $display("out %0d: got (%0d,%0d) want (%f,%f)", nout, do_re, do_im, er[nout], ei[nout]);
      end
    end
    nout++;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
