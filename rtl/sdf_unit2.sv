// sdf_unit2: the last, two-point stage of the SDF FFT cascade.
//
// Same scheme as sdf_unit with L = 2: a one-sample delay register, a
// butterfly, and no multiplier, because the only twiddle factor of a
// two-point DFT is W_2^0 = 1. Sample 0 of each pair is held; when sample 1
// arrives the halved sum leaves at once and the halved difference is kept
// and leaves on the next clock. Output is registered once, so the first
// output of a pair leaves 2 clocks after the pair's first input. Input
// samples of a frame must be contiguous, as for sdf_unit.
//
// The paper describes SdfUnit2 as the final-stage variant with the same
// ports as SdfUnit that handles a particular twiddle resolution; dropping the
// multiplier for W_2 is how this design reads that.
module sdf_unit2 #(
  parameter int WIDTH = 16
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

  logic icnt, ocnt, bf_en, drain, mux_en;
  logic signed [WIDTH-1:0] db_in_re, db_in_im, db_out_re, db_out_im;
  logic signed [WIDTH-1:0] sum_re, sum_im, dif_re, dif_im, mux_re, mux_im;

  assign bf_en  = di_en & icnt;
  assign drain  = ocnt;
  assign mux_en = bf_en | drain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      icnt <= 1'b0;
      ocnt <= 1'b0;
    end else begin
      if (di_en)  icnt <= ~icnt;
      if (mux_en) ocnt <= ~ocnt;
    end
  end

  butterfly #(.WIDTH(WIDTH), .SCALE(1'b1)) u_bf (
    .a_re(db_out_re), .a_im(db_out_im),
    .b_re(di_re),     .b_im(di_im),
    .sum_re, .sum_im, .dif_re, .dif_im
  );

  always_comb begin
    if (bf_en) begin
      db_in_re = dif_re;
      db_in_im = dif_im;
      mux_re   = sum_re;
      mux_im   = sum_im;
    end else begin
      db_in_re = di_re;
      db_in_im = di_im;
      mux_re   = db_out_re;
      mux_im   = db_out_im;
    end
  end

  delay_buffer #(.DEPTH(1), .WIDTH(WIDTH)) u_db (
    .clk, .rst_n,
    .in_re(db_in_re),   .in_im(db_in_im),
    .out_re(db_out_re), .out_im(db_out_im)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      do_en <= 1'b0;
      do_re <= '0;
      do_im <= '0;
    end else begin
      do_en <= mux_en;
      do_re <= mux_re;
      do_im <= mux_im;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(bf_en && drain))
    else $error("sdf_unit2: frame input was not contiguous");

endmodule
