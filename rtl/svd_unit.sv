// svd_unit: singular value decomposition of a 2x2 real matrix.
//
// For A = [a b; c d] it returns A = U * diag(sigma1, sigma2) * V^T with
// U = [cos(theta) -sin(theta); sin(theta) cos(theta)] and V the same in phi.
// With alpha = theta + phi and beta = theta - phi one has
//   a + d = (sigma1 + sigma2) cos(beta),  c - b = (sigma1 + sigma2) sin(beta)
//   a - d = (sigma1 - sigma2) cos(alpha), c + b = (sigma1 - sigma2) sin(alpha)
// so the work is two vectoring CORDICs and two rotation CORDICs:
//   1. the butterfly forms the four sums and differences at once, taking
//      p = a + j*c and q = d + j*b: p + q = (a+d) + j(c+b), p - q = (a-d) + j(c-b);
//   2. vectoring (a+d, c-b) gives K*(sigma1+sigma2) and beta;
//   3. vectoring (a-d, c+b) gives K*(sigma1-sigma2) and alpha;
//   4. theta = (alpha+beta)/2 and phi = (alpha-beta)/2; rotating (1/K, 0)
//      by theta and by phi gives cos and sin of each, the entries of U and V.
// The CORDIC gain of the two magnitudes is removed with a constant multiply
// by 1/K. sigma1 >= |sigma2|; sigma2 is negative when det(A) < 0.
//
// One cordic instance is reused for the four operations under a small state
// machine. Interface: start with the matrix on a..d while busy is low; done
// pulses with all results, which hold until the next job. Timing: done is
// high 4*(ITER+2)+2 clocks after the clock in which start is high (74 for
// ITER = 16): each CORDIC operation takes ITER+2 clocks including its launch.
// Formats: a..d DATA_W-bit signed integers; sigma1/sigma2 DATA_W+2 bits in
// the same units; cosines and sines TW_W bits with TW_FRAC fraction bits;
// theta/phi ANGLE_W-bit binary angles.
//
// From the paper: the SVD module instantiates the butterfly and the CORDIC,
// feeds the butterfly outputs into the CORDIC, iterates on x, y, z with an
// arctangent table, and updates its output registers from the CORDIC
// results. The 2x2 two-rotation method, the formats and the sequencing are
// this design's, as the paper gives no matrix size or algorithm.
module svd_unit #(
  parameter int DATA_W  = 16,
  parameter int ANGLE_W = 20,
  parameter int ITER    = 16,
  parameter int TW_W    = 16,
  parameter int TW_FRAC = 14,
  localparam int SW     = DATA_W + 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic signed [DATA_W-1:0]  a,
  input  logic signed [DATA_W-1:0]  b,
  input  logic signed [DATA_W-1:0]  c,
  input  logic signed [DATA_W-1:0]  d,
  output logic                      busy,
  output logic                      done,
  output logic signed [SW-1:0]      sigma1,
  output logic signed [SW-1:0]      sigma2,
  output logic signed [TW_W-1:0]    u_cos,
  output logic signed [TW_W-1:0]    u_sin,
  output logic signed [TW_W-1:0]    v_cos,
  output logic signed [TW_W-1:0]    v_sin,
  output logic signed [ANGLE_W-1:0] theta,
  output logic signed [ANGLE_W-1:0] phi
);

  import accel_pkg::*;

  // CORDIC word: butterfly output (DATA_W+1 bits) with 2 guard fraction bits,
  // times the gain K < 2, times sqrt(2) for the vector length, plus sign.
  localparam int CW       = DATA_W + 6;
  localparam int GUARD    = 2;
  localparam int ROT_FRAC = CW - 2;           // fraction bits of the rotation unit vector
  localparam logic signed [CW-1:0] ROT_X0 = CW'((INV_K_Q30 + (64'sd1 <<< (29 - ROT_FRAC))) >>> (30 - ROT_FRAC));

  typedef enum logic [2:0] {
    S_IDLE, S_VEC_SUM, S_VEC_DIF, S_ROT_U, S_ROT_V, S_OUT
  } state_e;

  state_e state;
  logic   launch;

  logic signed [DATA_W-1:0] a_q, b_q, c_q, d_q;

  // Butterfly on p = a + j*c and q = d + j*b (full precision):
  // p + q = (a+d) + j(c+b) and p - q = (a-d) + j(c-b), so each vectoring
  // input takes the real part of one result and the imaginary part of the other.
  logic signed [DATA_W:0] apd, cpb, amd, cmb;
  butterfly #(.WIDTH(DATA_W), .SCALE(1'b0)) u_bf (
    .a_re(a_q), .a_im(c_q),
    .b_re(d_q), .b_im(b_q),
    .sum_re(apd), .sum_im(cpb),
    .dif_re(amd), .dif_im(cmb)
  );

  // CORDIC shared by the four operations.
  cordic_mode_e            c_mode;
  logic signed [CW-1:0]    c_x, c_y, c_xo, c_yo;
  logic signed [ANGLE_W-1:0] c_z, c_zo;
  logic                    c_busy, c_done;

  logic signed [ANGLE_W-1:0] alpha, beta;
  logic signed [ANGLE_W:0]   sum_ab, dif_ab;
  logic signed [ANGLE_W-1:0] theta_c, phi_c;
  assign sum_ab  = (ANGLE_W+1)'(alpha) + (ANGLE_W+1)'(beta);
  assign dif_ab  = (ANGLE_W+1)'(alpha) - (ANGLE_W+1)'(beta);
  assign theta_c = sum_ab[ANGLE_W:1];
  assign phi_c   = dif_ab[ANGLE_W:1];

  always_comb begin
    c_mode = CORDIC_VECTOR;
    c_x    = '0;
    c_y    = '0;
    c_z    = '0;
    unique case (state)
      S_VEC_SUM: begin
        c_x = CW'(apd) <<< GUARD;
        c_y = CW'(cmb) <<< GUARD;
      end
      S_VEC_DIF: begin
        c_x = CW'(amd) <<< GUARD;
        c_y = CW'(cpb) <<< GUARD;
      end
      S_ROT_U: begin
        c_mode = CORDIC_ROTATE;
        c_x    = ROT_X0;
        c_z    = theta_c;
      end
      S_ROT_V: begin
        c_mode = CORDIC_ROTATE;
        c_x    = ROT_X0;
        c_z    = phi_c;
      end
      default: ;
    endcase
  end

  cordic #(.WIDTH(CW), .ANGLE_W(ANGLE_W), .ITER(ITER)) u_cordic (
    .clk, .rst_n, .start(launch), .mode(c_mode),
    .x_in(c_x), .y_in(c_y), .z_in(c_z),
    .busy(c_busy), .done(c_done),
    .x_out(c_xo), .y_out(c_yo), .z_out(c_zo)
  );

  // Gain removal: mag = x * (1/K), still with GUARD fraction bits.
  localparam int MW = CW + 18;
  function automatic logic signed [CW-1:0] remove_gain(input logic signed [CW-1:0] x);
    logic signed [MW-1:0] p;
    p = MW'(x) * MW'(signed'(INV_K_Q16));
    return CW'((p + (MW'(1) <<< 15)) >>> 16);
  endfunction

  // Unit-vector component from the rotation CORDIC, rounded to TW_FRAC bits.
  function automatic logic signed [TW_W-1:0] to_tw(input logic signed [CW-1:0] v);
    logic signed [CW:0] r;
    r = ((CW+1)'(v) + ((CW+1)'(1) <<< (ROT_FRAC - TW_FRAC - 1))) >>> (ROT_FRAC - TW_FRAC);
    return TW_W'(r);
  endfunction

  logic signed [CW-1:0] mag_p, mag_q;
  logic signed [CW:0]   s1_full, s2_full;
  assign s1_full = (CW+1)'(mag_p) + (CW+1)'(mag_q);
  assign s2_full = (CW+1)'(mag_p) - (CW+1)'(mag_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      launch <= 1'b0;
      done   <= 1'b0;
      {a_q, b_q, c_q, d_q} <= '0;
      {mag_p, mag_q}       <= '0;
      {alpha, beta}        <= '0;
      {u_cos, u_sin, v_cos, v_sin} <= '0;
      {sigma1, sigma2}     <= '0;
      {theta, phi}         <= '0;
    end else begin
      launch <= 1'b0;
      done   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          a_q <= a; b_q <= b; c_q <= c; d_q <= d;
          state  <= S_VEC_SUM;
          launch <= 1'b1;
        end
        S_VEC_SUM: if (c_done) begin
          mag_p  <= remove_gain(c_xo);
          beta   <= c_zo;
          state  <= S_VEC_DIF;
          launch <= 1'b1;
        end
        S_VEC_DIF: if (c_done) begin
          mag_q  <= remove_gain(c_xo);
          alpha  <= c_zo;
          state  <= S_ROT_U;
          launch <= 1'b1;
        end
        S_ROT_U: if (c_done) begin
          u_cos  <= to_tw(c_xo);
          u_sin  <= to_tw(c_yo);
          theta  <= theta_c;
          state  <= S_ROT_V;
          launch <= 1'b1;
        end
        S_ROT_V: if (c_done) begin
          v_cos  <= to_tw(c_xo);
          v_sin  <= to_tw(c_yo);
          phi    <= phi_c;
          state  <= S_OUT;
        end
        S_OUT: begin
          // sigma = (P +- Q) / 2, dropping the GUARD bits, rounded.
          sigma1 <= SW'(((s1_full + (CW+1)'(4)) >>> (GUARD + 1)));
          sigma2 <= SW'(((s2_full + (CW+1)'(4)) >>> (GUARD + 1)));
          done   <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
