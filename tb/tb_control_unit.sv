// tb_control_unit: checks the control unit on its own with N = 16.
//   - an FFT frame reaches the pipeline input unchanged, one clock later,
//     and in_mode is ignored inside the frame;
//   - a frame with two missing words is padded with zeros and sets
//     err_underrun (which was clear before);
//   - two SVD jobs back to back: the matrices reach the SVD ports, and the
//     second job is held off (in_ready low) while a model of the SVD unit
//     reports busy; no start is given while busy;
//   - pipeline outputs are tagged with bit-reversed bin indices and last.
module tb_control_unit;
  import accel_pkg::*;
  localparam int N = 16, W = 16, LB = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 1'b0, in_ready, err_underrun;
  mode_e in_mode = MODE_FFT;
  logic signed [W-1:0] in_re = '0, in_im = '0;
  logic fft_di_en, fft_do_en = 1'b0, out_valid, out_last, svd_start;
  logic signed [W-1:0] fft_di_re, fft_di_im, fft_do_re = '0, fft_do_im = '0, out_re, out_im;
  logic [LB-1:0] out_index;
  logic signed [W-1:0] svd_a, svd_b, svd_c, svd_d;
  logic svd_busy = 1'b0;

  control_unit #(.N(N), .DATA_W(W)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_mode, .in_re, .in_im,
    .err_underrun, .fft_di_en, .fft_di_re, .fft_di_im, .fft_do_en, .fft_do_re, .fft_do_im,
    .out_valid, .out_re, .out_im, .out_index, .out_last,
    .svd_start, .svd_a, .svd_b, .svd_c, .svd_d, .svd_busy);

  // Model of the SVD unit's busy flag: busy for 12 clocks after a start.
  int busy_left = 0, stalls = 0, starts = 0;
  always @(posedge clk) begin
    if (svd_start) begin
      checks++;
      if (svd_busy) begin failures++; $display("start while busy"); end
      busy_left = 12;
      starts++;
    end else if (busy_left > 0) busy_left--;
    svd_busy <= (busy_left > 0);
    if (in_valid && !in_ready) stalls++;
  end

  // Record what reaches the FFT pipeline.
  int fft_q [$];
  always @(posedge clk) if (rst_n && fft_di_en) fft_q.push_back({16'(fft_di_re), 16'(fft_di_im)});

  task automatic send(mode_e m, int re, int im);
    @(negedge clk);
    in_valid = 1'b1; in_mode = m; in_re = W'(re); in_im = W'(im);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  task automatic expect_fft(int want [$]);
    checks++;
    if (fft_q.size() != want.size()) begin
      failures++; $display("fft stream: %0d words, want %0d", fft_q.size(), want.size());
    end else begin
      foreach (want[i]) if (fft_q[i] != want[i]) begin
        failures++; $display("fft word %0d: %h want %h", i, fft_q[i], want[i]); break;
      end
    end
    fft_q.delete();
  endtask

  initial begin
    int want [$];
    int a1, b1, c1, d1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // 1. contiguous frame, with in_mode toggled inside it
    @(negedge clk);
    for (int k = 0; k < N; k++) begin
      in_valid = 1'b1; in_mode = (k == 3) ? MODE_SVD : MODE_FFT;
      in_re = W'(100 + k); in_im = W'(-k);
      want.push_back({16'(100 + k), 16'(-k)});
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    expect_fft(want);
    want.delete();
    checks++;
    if (err_underrun) begin failures++; $display("err_underrun set without a gap"); end
    // 2. frame with two missing words
    for (int k = 0; k < N; k++) begin
      if (k == 5 || k == 6) begin
        in_valid = 1'b0;
        want.push_back(0);
      end else begin
        in_valid = 1'b1; in_mode = MODE_FFT; in_re = W'(200 + k); in_im = W'(k);
        want.push_back({16'(200 + k), 16'(k)});
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    expect_fft(want);
    checks++;
    if (!err_underrun) begin failures++; $display("err_underrun not set"); end
    // 3. two SVD jobs back to back
    a1 = 11; b1 = -22; c1 = 33; d1 = -44;
    send(MODE_SVD, a1, b1);
    send(MODE_SVD, c1, d1);
    @(negedge clk);
    checks++;
    if (svd_a != W'(a1) || svd_b != W'(b1) || svd_c != W'(c1) || svd_d != W'(d1)) begin
      failures++; $display("svd ports %0d %0d %0d %0d", svd_a, svd_b, svd_c, svd_d);
    end
    send(MODE_SVD, 5, 6);
    send(MODE_SVD, 7, 8);
    @(negedge clk);
    checks++;
    if (svd_a != 5 || svd_b != 6 || svd_c != 7 || svd_d != 8) begin
      failures++; $display("svd ports %0d %0d %0d %0d", svd_a, svd_b, svd_c, svd_d);
    end
    repeat (2) @(negedge clk);
    checks++;
    if (starts != 2) begin failures++; $display("%0d SVD starts", starts); end
    checks++;
    if (stalls == 0) begin failures++; $display("second SVD job was never held off"); end
    checks++;
    if (fft_q.size() != 0) begin failures++; $display("SVD words reached the FFT"); end
    // 4. output tagging over two frames
    for (int m = 0; m < 2 * N; m++) begin
      @(negedge clk);
      fft_do_en = 1'b1; fft_do_re = W'(1000 + m); fft_do_im = W'(m);
    end
    @(negedge clk); fft_do_en = 1'b0;
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int om = 0;
  always @(negedge clk) if (rst_n && out_valid) begin
    int mm, br;
    mm = om % N;
    br = 0;
    for (int i = 0; i < LB; i++) br = (br << 1) | ((mm >> i) & 1);
    checks++;
    if (int'(out_index) != br || out_re != W'(1000 + om) || out_im != W'(om) || out_last != (mm == N - 1)) begin
      failures++;
      $display("output %0d: index %0d want %0d, re %0d, last %0d", om, out_index, br, out_re, out_last);
    end
    om++;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
