// sdf_unit: one radix-2 single-path delay feedback (SDF) FFT stage.
//
// The stage works on blocks of L consecutive samples (L = N for the first
// stage, halving down the cascade) and is decimation in frequency. During
// the first L/2 samples of a block the input is written into the delay
// buffer (depth L/2). During the second half each input x[k+L/2] meets x[k]
// coming out of the buffer: the butterfly sends (x[k]+x[k+L/2])/2 to the
// output at once and writes (x[k]-x[k+L/2])/2 back into the buffer. The next
// L/2 clocks then drain those differences, each multiplied by the twiddle
// factor W_L^k from the stage's lookup table (sums are multiplied by W^0 = 1).
// An output counter tells sums from differences and gives k.
//
// Interface: di_en marks an input sample. The samples of one N-point frame
// must arrive on consecutive clocks; gaps are allowed between frames. The
// output is an equally contiguous stream on do_en. Timing: the first output
// of a block leaves L/2 + 2 clocks after the block's first input (one
// register after the multiplexer, one after the multiplier, with the table
// read in parallel with the first).
//
// From the paper: a cascade of SDF units, each with a delay buffer, a
// butterfly and a twiddle multiplication applied to the stage output. The
// DIF ordering, per-stage halving, counters and pipeline registers are this
// design's choices.
module sdf_unit #(
  parameter int L       = 1024,
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

  localparam int LB = $clog2(L);
  localparam int D  = L / 2;
  localparam int AW = (L > 4) ? $clog2(L / 2) : 1;

  logic [LB-1:0] icnt, ocnt;
  logic          bf_en, drain, mux_en;

  logic signed [WIDTH-1:0] db_in_re, db_in_im, db_out_re, db_out_im;
  logic signed [WIDTH-1:0] sum_re, sum_im, dif_re, dif_im;
  logic signed [WIDTH-1:0] mux_re, mux_im;
  logic [AW-1:0]           tw_addr;

  // Second half of a block: butterfly active.
  assign bf_en = di_en & icnt[LB-1];
  // Second half of the output block: differences leave the buffer.
  assign drain = ocnt[LB-1];
  assign mux_en = bf_en | drain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      icnt <= '0;
      ocnt <= '0;
    end else begin
      if (di_en)  icnt <= icnt + 1'b1;
      if (mux_en) ocnt <= ocnt + 1'b1;
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

  delay_buffer #(.DEPTH(D), .WIDTH(WIDTH)) u_db (
    .clk, .rst_n,
    .in_re(db_in_re),   .in_im(db_in_im),
    .out_re(db_out_re), .out_im(db_out_im)
  );

  // Twiddle index: k for a difference, 0 for a sum.
  assign tw_addr = drain ? AW'(ocnt[LB-2:0]) : '0;

  logic signed [TW_W-1:0]  w_re, w_im;
  twiddle_rom #(.L(L), .TW_W(TW_W), .TW_FRAC(TW_FRAC)) u_rom (
    .clk, .addr(tw_addr), .w_re, .w_im
  );

  // Stage 1: register the selected sample, in step with the table read.
  logic                    r_en;
  logic signed [WIDTH-1:0] r_re, r_im;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_en <= 1'b0;
      r_re <= '0;
      r_im <= '0;
    end else begin
      r_en <= mux_en;
      r_re <= mux_re;
      r_im <= mux_im;
    end
  end

  // Stage 2: twiddle multiplication, registered.
  logic signed [WIDTH-1:0] p_re, p_im;
  complex_mult #(.WIDTH(WIDTH), .TW_W(TW_W), .TW_FRAC(TW_FRAC)) u_mul (
    .x_re(r_re), .x_im(r_im), .w_re, .w_im, .p_re, .p_im
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      do_en <= 1'b0;
      do_re <= '0;
      do_im <= '0;
    end else begin
      do_en <= r_en;
      do_re <= p_re;
      do_im <= p_im;
    end
  end

  // A sum and a difference can never be due in the same clock when frames
  // arrive contiguously.
  assert property (@(posedge clk) disable iff (!rst_n) !(bf_en && drain))
    else $error("sdf_unit L=%0d: frame input was not contiguous", L);

endmodule
