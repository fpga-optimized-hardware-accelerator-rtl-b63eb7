// fft_core: N-point radix-2 SDF FFT pipeline.
//
// A cascade of log2(N)-1 sdf_unit stages with block sizes N, N/2, ..., 4 and
// one sdf_unit2 for the final two-point stage. It accepts one complex sample
// per clock and, once full, delivers one per clock, so a new frame can
// follow the previous one immediately. The output of a frame is X[k]/N (each
// stage halves) in bit-reversed order: the m-th output sample of a frame is
// bin bit_reverse(m). Latency from the first input sample of a frame to its
// first output sample is N - 2 + 2*log2(N) clocks (1042 for N = 1024).
//
// Following the paper: SdfUnit stages in series ending in one SdfUnit2, each
// stage passing its results to the next. N = 1024 is this design's default;
// the paper states no transform size.
module fft_core #(
  parameter int N       = 1024,
  parameter int WIDTH   = 16,
  parameter int TW_W    = 16,
  parameter int TW_FRAC = 14
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    di_en,
  input  logic signed [WIDTH-1:0] di_re,
  input  logic signed [WIDTH-1:0] di_im,
  output logic                    do_en,
  output logic signed [WIDTH-1:0] do_re,
  output logic signed [WIDTH-1:0] do_im
);

  localparam int STAGES = $clog2(N);

  logic                    en [STAGES+1];
  logic signed [WIDTH-1:0] re [STAGES+1];
  logic signed [WIDTH-1:0] im [STAGES+1];

  assign en[0] = di_en;
  assign re[0] = di_re;
  assign im[0] = di_im;

  for (genvar s = 0; s < STAGES - 1; s++) begin : g_stage
    sdf_unit #(.L(N >> s), .WIDTH(WIDTH), .TW_W(TW_W), .TW_FRAC(TW_FRAC)) u_sdf (
      .clk, .rst_n,
      .di_en(en[s]),   .di_re(re[s]),   .di_im(im[s]),
      .do_en(en[s+1]), .do_re(re[s+1]), .do_im(im[s+1])
    );
  end

  sdf_unit2 #(.WIDTH(WIDTH)) u_last (
    .clk, .rst_n,
    .di_en(en[STAGES-1]), .di_re(re[STAGES-1]), .di_im(im[STAGES-1]),
    .do_en(en[STAGES]),   .do_re(re[STAGES]),   .do_im(im[STAGES])
  );

  assign do_en = en[STAGES];
  assign do_re = re[STAGES];
  assign do_im = im[STAGES];

endmodule
