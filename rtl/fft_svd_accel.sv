// fft_svd_accel: FFT and SVD accelerator, top level.
//
// A control unit takes one stream of input words and dispatches each job
// either to a streaming N-point radix-2 SDF FFT pipeline (fft_core: a
// cascade of sdf_unit stages ending in sdf_unit2) or to a CORDIC-based 2x2
// SVD unit (svd_unit). Both datapaths run at the same time; an FFT frame can
// stream through while an SVD job iterates.
//
// Input: in_valid/in_ready handshake, in_mode (0 = FFT, 1 = SVD) on the
// first word of a job, complex word (in_re, in_im). An FFT job is N words on
// consecutive clocks; an SVD job is two words, (a, b) then (c, d).
// FFT output: fft_valid with (fft_re, fft_im) = X[fft_index] / N, bins in
// bit-reversed order, fft_last on the last bin of a frame. err_underrun is a
// sticky flag set when an FFT frame had to be padded with zeros.
// SVD output: svd_valid pulses with sigma1, sigma2, U = rot(theta) given by
// (u_cos, u_sin), V = rot(phi) given by (v_cos, v_sin), and the angles.
//
// Timing at the defaults (N = 1024, 16 CORDIC steps): the first FFT output
// is valid N + 2*log2(N) = 1044 clocks after the clock in which the first
// input word is taken (one register in the control unit on each side of the
// N - 2 + 2*log2(N) clock pipeline), and one frame per N clocks is
// sustained; svd_valid is high 75 clocks after the clock in which the
// second matrix word is taken.
//
// The block structure follows the paper's FFT diagram (control unit, SDF
// units with delay buffers, twiddle lookup, butterfly with complex add and
// subtract) and its description of the SVD module (butterfly feeding a
// CORDIC). Sizes, formats and the job protocol are this design's choices.
module fft_svd_accel #(
  parameter int N           = 1024,
  parameter int DATA_W      = 16,
  parameter int TW_W        = 16,
  parameter int TW_FRAC     = 14,
  parameter int ANGLE_W     = 20,
  parameter int CORDIC_ITER = 16,
  localparam int LB         = $clog2(N)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic                      in_mode,
  input  logic signed [DATA_W-1:0]  in_re,
  input  logic signed [DATA_W-1:0]  in_im,
  output logic                      err_underrun,
  output logic                      fft_valid,
  output logic signed [DATA_W-1:0]  fft_re,
  output logic signed [DATA_W-1:0]  fft_im,
  output logic [LB-1:0]             fft_index,
  output logic                      fft_last,
  output logic                      svd_busy,
  output logic                      svd_valid,
  output logic signed [DATA_W+1:0]  sigma1,
  output logic signed [DATA_W+1:0]  sigma2,
  output logic signed [TW_W-1:0]    u_cos,
  output logic signed [TW_W-1:0]    u_sin,
  output logic signed [TW_W-1:0]    v_cos,
  output logic signed [TW_W-1:0]    v_sin,
  output logic signed [ANGLE_W-1:0] theta,
  output logic signed [ANGLE_W-1:0] phi
);

  import accel_pkg::*;

  logic                     fft_di_en, fft_do_en;
  logic signed [DATA_W-1:0] fft_di_re, fft_di_im, fft_do_re, fft_do_im;
  logic                     svd_start;
  logic signed [DATA_W-1:0] svd_a, svd_b, svd_c, svd_d;

  control_unit #(.N(N), .DATA_W(DATA_W)) u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_mode(mode_e'(in_mode)), .in_re, .in_im,
    .err_underrun,
    .fft_di_en, .fft_di_re, .fft_di_im,
    .fft_do_en, .fft_do_re, .fft_do_im,
    .out_valid(fft_valid), .out_re(fft_re), .out_im(fft_im),
    .out_index(fft_index), .out_last(fft_last),
    .svd_start, .svd_a, .svd_b, .svd_c, .svd_d, .svd_busy
  );

  fft_core #(.N(N), .WIDTH(DATA_W), .TW_W(TW_W), .TW_FRAC(TW_FRAC)) u_fft (
    .clk, .rst_n,
    .di_en(fft_di_en), .di_re(fft_di_re), .di_im(fft_di_im),
    .do_en(fft_do_en), .do_re(fft_do_re), .do_im(fft_do_im)
  );

  svd_unit #(.DATA_W(DATA_W), .ANGLE_W(ANGLE_W), .ITER(CORDIC_ITER),
             .TW_W(TW_W), .TW_FRAC(TW_FRAC)) u_svd (
    .clk, .rst_n, .start(svd_start),
    .a(svd_a), .b(svd_b), .c(svd_c), .d(svd_d),
    .busy(svd_busy), .done(svd_valid),
    .sigma1, .sigma2, .u_cos, .u_sin, .v_cos, .v_sin, .theta, .phi
  );

endmodule
