// butterfly: radix-2 butterfly, the complex adder and complex subtractor.
//
// Computes sum = a + b and dif = a - b on complex inputs, purely
// combinational. With SCALE = 1 both results are halved with round-half-up
// (saturating in the one case that rounds out of range), so the output has
// the input's width and an N-point FFT built from log2(N) such stages
// returns X[k]/N without overflow; with SCALE = 0 the results
// keep full precision in WIDTH+1 bits (used by the SVD unit). The add/sub
// pair follows the paper's butterfly equations and its Complex ADD / Complex
// SUB blocks; the twiddle multiply is outside this module (applied after the
// subtraction, decimation in frequency), and the halving is this design's
// choice.
module butterfly #(
  parameter int WIDTH = 16,
  parameter bit SCALE = 1'b1,
  localparam int OW = SCALE ? WIDTH : WIDTH + 1
) (
  input  logic signed [WIDTH-1:0] a_re,
  input  logic signed [WIDTH-1:0] a_im,
  input  logic signed [WIDTH-1:0] b_re,
  input  logic signed [WIDTH-1:0] b_im,
  output logic signed [OW-1:0]    sum_re,
  output logic signed [OW-1:0]    sum_im,
  output logic signed [OW-1:0]    dif_re,
  output logic signed [OW-1:0]    dif_im
);

  logic signed [WIDTH:0] s_re, s_im, d_re, d_im;

  always_comb begin
    s_re = (WIDTH+1)'(a_re) + (WIDTH+1)'(b_re);
    s_im = (WIDTH+1)'(a_im) + (WIDTH+1)'(b_im);
    d_re = (WIDTH+1)'(a_re) - (WIDTH+1)'(b_re);
    d_im = (WIDTH+1)'(a_im) - (WIDTH+1)'(b_im);
  end

  if (SCALE) begin : g_scale
    // (v + 1) >> 1 in WIDTH+2 bits, then back to WIDTH bits. Only
    // v = 2^WIDTH - 1 (largest positive minus most negative) rounds past the
    // range; it saturates.
    function automatic logic signed [WIDTH-1:0] half(input logic signed [WIDTH:0] v);
      logic signed [WIDTH+1:0] t;
      t = ((WIDTH+2)'(v) + (WIDTH+2)'(1)) >>> 1;
      if (t[WIDTH+1:WIDTH-1] == 3'b001) return {1'b0, {(WIDTH-1){1'b1}}};
      return t[WIDTH-1:0];
    endfunction
    assign sum_re = half(s_re);
    assign sum_im = half(s_im);
    assign dif_re = half(d_re);
    assign dif_im = half(d_im);
  end else begin : g_full
    assign sum_re = s_re;
    assign sum_im = s_im;
    assign dif_re = d_re;
    assign dif_im = d_im;
  end

endmodule
