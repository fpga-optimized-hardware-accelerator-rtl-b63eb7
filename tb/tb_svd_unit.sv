// tb_svd_unit: decomposes random and special 2x2 matrices (diagonal,
// rotation, singular, negative determinant, full-scale) and checks, in real
// arithmetic and independently of the unit's method:
//   sigma1 = sqrt of the larger eigenvalue of A^T A, |sigma2| the smaller,
//   sign(sigma2) = sign(det A), U and V orthonormal rotations, and
//   U * diag(sigma1, sigma2) * V^T = A.
// Also checks the 4*(ITER+2)+2 clock latency and the busy flag.
module tb_svd_unit;
  localparam int DW = 16, IT = 16;
  localparam real Q = 16384.0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 1'b0, busy, done;
  logic signed [DW-1:0] a = '0, b = '0, c = '0, d = '0;
  logic signed [DW+1:0] sigma1, sigma2;
  logic signed [15:0] u_cos, u_sin, v_cos, v_sin;
  logic signed [19:0] theta, phi;
  svd_unit #(.DATA_W(DW), .ITER(IT)) dut (.clk, .rst_n, .start, .a, .b, .c, .d, .busy, .done,
    .sigma1, .sigma2, .u_cos, .u_sin, .v_cos, .v_sin, .theta, .phi);

  function automatic real absr(real v); return v < 0 ? -v : v; endfunction

  task automatic job(int ia, int ib, int ic, int id);
    int t0;
    real F, det, l1, l2, s1, s2, uc, us, vc, vs, ra, rb, rc, rd, tol;
    @(negedge clk);
    a = DW'(ia); b = DW'(ib); c = DW'(ic); d = DW'(id); start = 1'b1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 1'b0;
    checks++;
    if (!busy) begin failures++; $display("busy not set"); end
    while (!done) @(negedge clk);
    checks++;
    if (cyc - t0 != 4 * (IT + 2) + 2) begin failures++; $display("latency %0d", cyc - t0); end
    F   = real'(ia) * ia + real'(ib) * ib + real'(ic) * ic + real'(id) * id;
    det = real'(ia) * id - real'(ib) * ic;
    l1  = (F + $sqrt(absr(F * F - 4.0 * det * det))) / 2.0;
    l2  = (F - $sqrt(absr(F * F - 4.0 * det * det))) / 2.0;
    s1  = $sqrt(l1);
    s2  = $sqrt(l2 < 0 ? 0.0 : l2);
    tol = 3.0 + 2e-4 * s1;
    checks++;
    if (absr(real'(sigma1) - s1) > tol) begin failures++; $display("A=[%0d %0d;%0d %0d] sigma1 %0d want %f", ia, ib, ic, id, sigma1, s1); end
    checks++;
    if (absr(absr(real'(sigma2)) - s2) > tol) begin failures++; $display("A=[%0d %0d;%0d %0d] |sigma2| %0d want %f", ia, ib, ic, id, sigma2, s2); end
    if (absr(det) > 1e6 && s2 > 16.0) begin
      checks++;
      if ((det < 0) != (sigma2 < 0)) begin failures++; $display("A=[%0d %0d;%0d %0d] sign of sigma2 %0d, det %f", ia, ib, ic, id, sigma2, det); end
    end
    uc = u_cos / Q; us = u_sin / Q; vc = v_cos / Q; vs = v_sin / Q;
    checks++;
    if (absr(uc * uc + us * us - 1.0) > 1e-3 || absr(vc * vc + vs * vs - 1.0) > 1e-3) begin
      failures++; $display("U or V not orthonormal: %f %f", uc * uc + us * us, vc * vc + vs * vs);
    end
    // U diag(s1,s2) V^T with U = [uc -us; us uc], V = [vc -vs; vs vc]
    ra =  uc * sigma1 * vc + us * sigma2 * vs;
    rb =  uc * sigma1 * vs - us * sigma2 * vc;
    rc =  us * sigma1 * vc - uc * sigma2 * vs;
    rd =  us * sigma1 * vs + uc * sigma2 * vc;
    tol = 4.0 + 4e-4 * s1;
    checks++;
    if (absr(ra - ia) > tol || absr(rb - ib) > tol || absr(rc - ic) > tol || absr(rd - id) > tol) begin
      failures++;
      $display("A=[%0d %0d;%0d %0d] rebuilt [%f %f;%f %f]", ia, ib, ic, id, ra, rb, rc, rd);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    job(1000, 0, 0, 500);
    job(-3000, 0, 0, 200);
    job(0, 0, 0, 0);
    job(7000, -7000, 7000, 7000);
    job(1200, 2400, 600, 1200);          // singular
    job(0, 5000, 5000, 0);               // negative determinant
    job(32767, 32767, -32768, 32767);
    job(-32768, -32768, -32768, -32768);
    for (int n = 0; n < 40; n++)
      job($signed($urandom_range(65535)) - 32768, $signed($urandom_range(65535)) - 32768,
          $signed($urandom_range(65535)) - 32768, $signed($urandom_range(65535)) - 32768);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
