// complex_mult: multiply a complex sample by a twiddle factor.
//
// p = x * w with x a WIDTH-bit signed complex sample and w a TW_W-bit
// complex factor with TW_FRAC fraction bits. The four partial products are
// summed at full precision, rounded half-up by TW_FRAC bits and saturated to
// WIDTH bits, so a factor of exactly 1.0 returns x unchanged. Combinational;
// the SDF stage registers the result. The paper asks only for a
// high-precision twiddle multiplication; the four-multiplier form, rounding
// and saturation are this design's choices.
module complex_mult #(
  parameter int WIDTH   = 16,
  parameter int TW_W    = 16,
  parameter int TW_FRAC = 14
) (
  input  logic signed [WIDTH-1:0] x_re,
  input  logic signed [WIDTH-1:0] x_im,
  input  logic signed [TW_W-1:0]  w_re,
  input  logic signed [TW_W-1:0]  w_im,
  output logic signed [WIDTH-1:0] p_re,
  output logic signed [WIDTH-1:0] p_im
);

  localparam int PW = WIDTH + TW_W + 1;

  function automatic logic signed [WIDTH-1:0] round_sat(input logic signed [PW-1:0] v);
    logic signed [PW-1:0] r;
    logic signed [PW-1:0] maxv, minv;
    r    = (v + (PW'(1) <<< (TW_FRAC - 1))) >>> TW_FRAC;
    maxv = PW'((64'sd1 <<< (WIDTH - 1)) - 1);
    minv = -PW'(64'sd1 <<< (WIDTH - 1));
    if (r > maxv) return maxv[WIDTH-1:0];
    if (r < minv) return minv[WIDTH-1:0];
    return r[WIDTH-1:0];
  endfunction

  logic signed [PW-1:0] rr, ii, ri, ir, acc_re, acc_im;

  always_comb begin
    // Assignment context extends the operands to PW bits before multiplying.
    rr     = x_re * w_re;
    ii     = x_im * w_im;
    ri     = x_re * w_im;
    ir     = x_im * w_re;
    acc_re = rr - ii;
    acc_im = ri + ir;
    p_re   = round_sat(acc_re);
    p_im   = round_sat(acc_im);
  end

endmodule
