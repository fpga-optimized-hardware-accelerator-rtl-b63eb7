// tb_fft_svd_accel: end-to-end test of the accelerator at its default
// parameters (1024-point FFT, 16-step CORDIC). The input stream carries:
//   frames A and B back to back (a random frame and a two-tone frame),
//   two SVD jobs back to back, the second held off while the first runs,
//   frame C with three missing words (zero padded, err_underrun set),
//   a few idle clocks, then frame D (random) and a last SVD job.
// Every FFT output is compared with a direct DFT of the frame as the
// pipeline saw it, divided by N, at the bin the output is tagged with; the
// tags are checked to run in bit-reversed order with last on the final bin.
// SVD results are checked by rebuilding A = U diag(sigma1, sigma2) V^T.
// Also checked: first-output latency N + 2*log2(N) clocks, one frame per
// N clocks on back-to-back frames, and SVD latency 75 clocks after the
// second matrix word. Each mechanism (back-to-back frames, idle gap between
// frames, underrun padding, SVD hold-off, mode switch both ways, FFT output
// while the SVD unit is busy) is counted and must occur at least once.
// Taking a 100 MHz clock, latency and frame time are also held against the
// reported 11.00 us FFT latency and 10.60 us FFT computation time.
module tb_fft_svd_accel;
  localparam int N = 1024, LB = 10, W = 16;
  localparam real PI = 3.14159265358979323846;
  localparam real TOL = 6.0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 1'b0, in_ready, in_mode = 1'b0;
  logic signed [W-1:0] in_re = '0, in_im = '0;
  logic err_underrun, fft_valid, fft_last, svd_busy, svd_valid;
  logic signed [W-1:0] fft_re, fft_im;
  logic [LB-1:0] fft_index;
  logic signed [W+1:0] sigma1, sigma2;
  logic signed [15:0] u_cos, u_sin, v_cos, v_sin;
  logic signed [19:0] theta, phi;

  fft_svd_accel dut (.clk, .rst_n, .in_valid, .in_ready, .in_mode, .in_re, .in_im, .err_underrun,
    .fft_valid, .fft_re, .fft_im, .fft_index, .fft_last, .svd_busy, .svd_valid,
    .sigma1, .sigma2, .u_cos, .u_sin, .v_cos, .v_sin, .theta, .phi);

  localparam int FRAMES = 4;
  real xr [FRAMES][N], xi [FRAMES][N];
  real cs [N], sn [N];
  int  svd_q [$];        // queued matrices, 4 entries per job
  int  svd_t [$];        // cycle of each job's second word

  // mechanism counters
  int n_b2b = 0, n_gap = 0, n_underrun = 0, n_stall = 0, n_to_svd = 0, n_to_fft = 0, n_concurrent = 0;
  int first_in = -1, first_out = -1, frame_start [FRAMES];
  logic last_mode = 1'b0;

  always @(posedge clk) begin
    if (in_valid && !in_ready) n_stall++;
    if (fft_valid && svd_busy) n_concurrent++;
  end

  task automatic word(bit m, real re, real im);
    @(negedge clk);
    in_valid = 1'b1; in_mode = m; in_re = W'(int'(re)); in_im = W'(int'(im));
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  task automatic frame(int f, int gap_at);
    if (last_mode == 1'b1) n_to_fft++;
    last_mode = 1'b0;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      if (gap_at >= 0 && n >= gap_at && n < gap_at + 3) begin
        in_valid = 1'b0;
        xr[f][n] = 0.0; xi[f][n] = 0.0;
        if (n == gap_at) n_underrun++;
      end else begin
        in_valid = 1'b1; in_mode = 1'b0;
        in_re = W'(int'(xr[f][n])); in_im = W'(int'(xi[f][n]));
        if (first_in < 0) first_in = cyc;
      end
    end
  endtask

  task automatic svd_job(int a, int b, int c, int d);
    if (last_mode == 1'b0) n_to_svd++;
    last_mode = 1'b1;
    svd_q.push_back(a); svd_q.push_back(b); svd_q.push_back(c); svd_q.push_back(d);
    word(1'b1, a, b);
    word(1'b1, c, d);
    svd_t.push_back(cyc - 1);   // the clock in which the word was taken
  endtask

  function automatic real absr(real v); return v < 0 ? -v : v; endfunction

  initial begin
    for (int n = 0; n < N; n++) begin
      cs[n] = $cos(2.0 * PI * n / N);
      sn[n] = $sin(2.0 * PI * n / N);
    end
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = real'($signed($urandom_range(16000)) - 8000);
        xi[f][n] = real'($signed($urandom_range(16000)) - 8000);
      end
    for (int n = 0; n < N; n++) begin   // frame B: two tones, bins 3 and 700
      xr[1][n] = $floor(10000.0 * cs[(3 * n) % N] + 6000.0 * cs[(700 * n) % N] + 0.5);
      xi[1][n] = $floor(10000.0 * sn[(3 * n) % N] + 6000.0 * sn[(700 * n) % N] + 0.5);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    frame(0, -1);
    frame(1, -1);
    n_b2b++;
    svd_job(12000, -3000, 4000, 9000);
    svd_job(-20000, 15000, 15000, 20000);
    checks++;
    if (err_underrun) begin failures++; $display("err_underrun set early"); end
    frame(2, 100);
    @(negedge clk); in_valid = 1'b0;
    repeat (7) @(posedge clk);
    n_gap++;
    frame(3, -1);
    @(negedge clk); in_valid = 1'b0;
    checks++;
    if (!err_underrun) begin failures++; $display("err_underrun not set"); end
    svd_job(30000, 200, -200, -30000);
    repeat (2 * N + 200) @(posedge clk);
    checks++;
    if (first_out - first_in != N + 2 * LB) begin failures++; $display("latency %0d", first_out - first_in); end
    // Against the reported FFT figures (11.00 us latency, 10.60 us per
    // FFT), taking a 100 MHz clock: at most 1100 and 1060 clocks.
    checks++;
    if (first_out - first_in > 1100) begin failures++; $display("latency above 11.00 us at 100 MHz"); end
    checks++;
    if (frame_start[1] - frame_start[0] > 1060) begin failures++; $display("frame time above 10.60 us at 100 MHz"); end
    checks++;
    if (frame_start[1] - frame_start[0] != N) begin failures++; $display("frame spacing %0d", frame_start[1] - frame_start[0]); end
    checks++;
    if (nout != FRAMES * N) begin failures++; $display("%0d FFT outputs", nout); end
    checks++;
    if (nsvd != 3) begin failures++; $display("%0d SVD results", nsvd); end
    $display("mechanisms: back_to_back=%0d idle_gap=%0d underrun=%0d svd_holdoff=%0d fft_to_svd=%0d svd_to_fft=%0d concurrent=%0d",
             n_b2b, n_gap, n_underrun, n_stall, n_to_svd, n_to_fft, n_concurrent);
    $display("max FFT error %f LSB", max_err);
    if (n_b2b == 0) failures++;
    if (n_gap == 0) failures++;
    if (n_underrun == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_to_svd == 0) failures++;
    if (n_to_fft == 0) failures++;
    if (n_concurrent == 0) failures++;
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FFT output checker
  int  nout = 0;
  real max_err = 0.0;
  always @(negedge clk) if (rst_n && fft_valid) begin
    int f, m, k, br;
    real sr, si, e1, e2;
    if (first_out < 0) first_out = cyc;
    f = nout / N; m = nout % N;
    if (m == 0 && f < FRAMES) frame_start[f] = cyc;
    br = 0;
    for (int i = 0; i < LB; i++) br = (br << 1) | ((m >> i) & 1);
    k = int'(fft_index);
    checks++;
    if (k != br || fft_last != (m == N - 1)) begin
      failures++; $display("output %0d: index %0d want %0d last %0d", nout, k, br, fft_last);
    end
    if (f < FRAMES) begin
      sr = 0.0; si = 0.0;
      for (int n = 0; n < N; n++) begin
        int p;
        p = (k * n) % N;
        sr += xr[f][n] * cs[p] + xi[f][n] * sn[p];
        si += xi[f][n] * cs[p] - xr[f][n] * sn[p];
      end
      e1 = absr(real'(fft_re) - sr / N);
      e2 = absr(real'(fft_im) - si / N);
      if (e1 > max_err) max_err = e1;
      if (e2 > max_err) max_err = e2;
      checks++;
      if (e1 > TOL || e2 > TOL) begin
        failures++;
        if (failures < 10) $display("frame %0d bin %0d: got (%0d,%0d) want (%f,%f)", f, k, fft_re, fft_im, sr / N, si / N);
      end
    end
    nout++;
  end

  // SVD result checker
  int nsvd = 0;
  always @(negedge clk) if (rst_n && svd_valid) begin
    int a, b, c, d, t;
    real uc, us, vc, vs, ra, rb, rc, rd, tol;
    a = svd_q.pop_front(); b = svd_q.pop_front(); c = svd_q.pop_front(); d = svd_q.pop_front();
    t = svd_t.pop_front();
    checks++;
    if (cyc - t != 75) begin failures++; $display("SVD latency %0d", cyc - t); end
    uc = u_cos / 16384.0; us = u_sin / 16384.0; vc = v_cos / 16384.0; vs = v_sin / 16384.0;
    ra = uc * sigma1 * vc + us * sigma2 * vs;
    rb = uc * sigma1 * vs - us * sigma2 * vc;
    rc = us * sigma1 * vc - uc * sigma2 * vs;
    rd = us * sigma1 * vs + uc * sigma2 * vc;
    tol = 4.0 + 4e-4 * real'(sigma1);
    checks++;
    if (absr(ra - a) > tol || absr(rb - b) > tol || absr(rc - c) > tol || absr(rd - d) > tol) begin
      failures++;
      $display("A=[%0d %0d;%0d %0d] rebuilt [%f %f;%f %f]", a, b, c, d, ra, rb, rc, rd);
    end
    nsvd++;
  end

  initial begin
    repeat (12 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
