// tb_fft_core: runs a 64-point FFT pipeline on four random frames (three
// back to back, one after a gap) and a 16-point pipeline on two frames, and
// compares every output with a direct DFT computed in real arithmetic,
// divided by N and placed in bit-reversed order. Also checks the latency
// N - 2 + 2*log2(N) and the sustained rate of one frame per N clocks.
module tb_fft_core;
  localparam int W = 16;
  localparam real PI = 3.14159265358979323846;
  localparam real TOL = 4.0;     // LSBs: log2(N) roundings of one half LSB plus twiddle error
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- 64-point instance ----
  localparam int N1 = 64, F1 = 4;
  logic di1 = 1'b0, do1;
  logic signed [W-1:0] dr1 = '0, dim1 = '0, or1, oi1;
  fft_core #(.N(N1), .WIDTH(W)) dut64 (.clk, .rst_n, .di_en(di1), .di_re(dr1), .di_im(dim1), .do_en(do1), .do_re(or1), .do_im(oi1));

  // ---- 16-point instance ----
  localparam int N2 = 16, F2 = 2;
  logic di2 = 1'b0, do2;
  logic signed [W-1:0] dr2 = '0, dim2 = '0, or2, oi2;
  fft_core #(.N(N2), .WIDTH(W)) dut16 (.clk, .rst_n, .di_en(di2), .di_re(dr2), .di_im(dim2), .do_en(do2), .do_re(or2), .do_im(oi2));

  real x1r [F1*N1], x1i [F1*N1], x2r [F2*N2], x2i [F2*N2];
  int  fi1 = -1, fo1 = -1, n1 = 0, fi2 = -1, fo2 = -1, n2 = 0;
  int  last_frame_start1 = -1, frame_gap1 = 0;

  function automatic int bitrev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) r = (r << 1) | ((v >> i) & 1);
    return r;
  endfunction


  function automatic void cmp(string tag, int idx, int npts, int bits, int got_r, int got_i, real sr, real si);
    real e1, e2;
    e1 = real'(got_r) - sr / npts;
    e2 = real'(got_i) - si / npts;
    checks++;
    if (e1 > TOL || e1 < -TOL || e2 > TOL || e2 < -TOL) begin
      failures++;
      $display("%s out %0d: got (%0d,%0d) want (%f,%f)", tag, idx, got_r, got_i, sr / npts, si / npts);
    end
  endfunction

  initial begin
    for (int n = 0; n < F1 * N1; n++) begin
      x1r[n] = real'($signed($urandom_range(30000)) - 15000);
      x1i[n] = real'($signed($urandom_range(30000)) - 15000);
    end
    // frame 2 of the 64-point run: a pure tone in bin 5
    for (int n = 0; n < N1; n++) begin
      x1r[2*N1+n] = $floor(12000.0 * $cos(2.0*PI*5*n/N1) + 0.5);
      x1i[2*N1+n] = $floor(12000.0 * $sin(2.0*PI*5*n/N1) + 0.5);
    end
    for (int n = 0; n < F2 * N2; n++) begin
      x2r[n] = real'($signed($urandom_range(60000)) - 30000);
      x2i[n] = real'($signed($urandom_range(60000)) - 30000);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin
        for (int n = 0; n < F1 * N1; n++) begin
          if (n == 3 * N1) begin @(negedge clk); di1 = 1'b0; repeat (7) @(posedge clk); end
          @(negedge clk);
          di1 = 1'b1; dr1 = W'(int'(x1r[n])); dim1 = W'(int'(x1i[n]));
          if (fi1 < 0) fi1 = cyc;
        end
        @(negedge clk); di1 = 1'b0;
      end
      begin
        for (int n = 0; n < F2 * N2; n++) begin
          @(negedge clk);
          di2 = 1'b1; dr2 = W'(int'(x2r[n])); dim2 = W'(int'(x2i[n]));
          if (fi2 < 0) fi2 = cyc;
        end
        @(negedge clk); di2 = 1'b0;
      end
    join
    repeat (3 * N1) @(posedge clk);
    checks++; if (n1 != F1 * N1) begin failures++; $display("N=64: %0d outputs", n1); end
    checks++; if (n2 != F2 * N2) begin failures++; $display("N=16: %0d outputs", n2); end
    checks++; if (fo1 - fi1 != N1 - 2 + 2 * 6) begin failures++; $display("N=64 latency %0d", fo1 - fi1); end
    checks++; if (fo2 - fi2 != N2 - 2 + 2 * 4) begin failures++; $display("N=16 latency %0d", fo2 - fi2); end
    checks++; if (frame_gap1 != N1) begin failures++; $display("N=64 frame spacing %0d", frame_gap1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && do1) begin
    int f, m, k;
    real sr, si;
    if (fo1 < 0) fo1 = cyc;
    f = n1 / N1; m = n1 % N1; k = bitrev(m, 6);
    if (m == 0) begin
      if (f == 1) frame_gap1 = cyc - last_frame_start1;
      last_frame_start1 = cyc;
    end
    if (f < F1) begin
      sr = 0.0; si = 0.0;
      for (int n = 0; n < N1; n++) begin
        real c, s;
        c = $cos(2.0*PI*k*n/N1); s = -$sin(2.0*PI*k*n/N1);
        sr += x1r[f*N1+n] * c - x1i[f*N1+n] * s;
        si += x1r[f*N1+n] * s + x1i[f*N1+n] * c;
      end
      cmp("N=64", n1, N1, 6, int'(or1), int'(oi1), sr, si);
    end
    n1++;
  end

  always @(negedge clk) if (rst_n && do2) begin
    int f, m, k;
    real sr, si;
    if (fo2 < 0) fo2 = cyc;
    f = n2 / N2; m = n2 % N2; k = bitrev(m, 4);
    if (f < F2) begin
      sr = 0.0; si = 0.0;
      for (int n = 0; n < N2; n++) begin
        real c, s;
        c = $cos(2.0*PI*k*n/N2); s = -$sin(2.0*PI*k*n/N2);
        sr += x2r[f*N2+n] * c - x2i[f*N2+n] * s;
        si += x2r[f*N2+n] * s + x2i[f*N2+n] * c;
      end
      cmp("N=16", n2, N2, 4, int'(or2), int'(oi2), sr, si);
    end
    n2++;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
