// control_unit: input dispatch and output tagging for the accelerator.
//
// One input stream carries both kinds of job, chosen by in_mode on the first
// word of each job:
//   FFT job: N consecutive words, one complex sample each (re, im), sent to
//            the FFT pipeline one per clock. Once a frame has started, every
//            clock feeds it one sample; if in_valid is low inside a frame the
//            missing sample is replaced by zero and the sticky err_underrun
//            flag is set, so the pipeline, which cannot pause, stays aligned
//            to frame boundaries. in_mode is ignored inside a frame.
//   SVD job: two words, (re, im) = (a, b) then (c, d), the rows of the 2x2
//            matrix [a b; c d]. The second word starts the SVD unit; it is
//            held off (in_ready low) while the SVD unit is busy.
// Outputs of the FFT pipeline are registered once more and tagged with the
// frequency bin they hold (the pipeline emits bins in bit-reversed order) and
// a last-of-frame flag.
//
// Timing: input words are registered before the FFT pipeline (1 clock); the
// SVD start pulse comes 1 clock after the second matrix word; output tags
// add 1 clock. Handshake: a word moves when in_valid and in_ready are both
// high; in_ready depends only on internal state.
//
// The paper shows a control unit between the input data and the datapath
// and mentions data flow control; everything about its behaviour here is
// this design's choice.
module control_unit #(
  parameter int N      = 1024,
  parameter int DATA_W = 16,
  localparam int LB    = $clog2(N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  accel_pkg::mode_e         in_mode,
  input  logic signed [DATA_W-1:0] in_re,
  input  logic signed [DATA_W-1:0] in_im,
  output logic                     err_underrun,
  // to the FFT pipeline
  output logic                     fft_di_en,
  output logic signed [DATA_W-1:0] fft_di_re,
  output logic signed [DATA_W-1:0] fft_di_im,
  // from the FFT pipeline
  input  logic                     fft_do_en,
  input  logic signed [DATA_W-1:0] fft_do_re,
  input  logic signed [DATA_W-1:0] fft_do_im,
  // tagged FFT output
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_re,
  output logic signed [DATA_W-1:0] out_im,
  output logic [LB-1:0]            out_index,
  output logic                     out_last,
  // to the SVD unit
  output logic                     svd_start,
  output logic signed [DATA_W-1:0] svd_a,
  output logic signed [DATA_W-1:0] svd_b,
  output logic signed [DATA_W-1:0] svd_c,
  output logic signed [DATA_W-1:0] svd_d,
  input  logic                     svd_busy
);

  import accel_pkg::*;

  typedef enum logic [1:0] {
    J_IDLE,      // waiting for the first word of a job
    J_FFT,       // inside an FFT frame
    J_SVD_ROW1   // first matrix row held, waiting for the second
  } job_e;

  job_e          job;
  logic [LB-1:0] icnt;
  logic          accept;

  assign in_ready = !((job == J_SVD_ROW1) && (svd_busy || svd_start));
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      job          <= J_IDLE;
      icnt         <= '0;
      err_underrun <= 1'b0;
      fft_di_en    <= 1'b0;
      fft_di_re    <= '0;
      fft_di_im    <= '0;
      svd_start    <= 1'b0;
      {svd_a, svd_b, svd_c, svd_d} <= '0;
    end else begin
      fft_di_en <= 1'b0;
      svd_start <= 1'b0;
      unique case (job)
        J_IDLE: if (accept) begin
          if (in_mode == MODE_FFT) begin
            fft_di_en <= 1'b1;
            fft_di_re <= in_re;
            fft_di_im <= in_im;
            icnt      <= LB'(1);
            job       <= J_FFT;
          end else begin
            svd_a <= in_re;
            svd_b <= in_im;
            job   <= J_SVD_ROW1;
          end
        end
        J_FFT: begin
          fft_di_en <= 1'b1;
          if (in_valid) begin
            fft_di_re <= in_re;
            fft_di_im <= in_im;
          end else begin
            fft_di_re    <= '0;
            fft_di_im    <= '0;
            err_underrun <= 1'b1;
          end
          icnt <= icnt + 1'b1;
          if (icnt == LB'(N - 1)) job <= J_IDLE;
        end
        J_SVD_ROW1: if (accept) begin
          svd_c     <= in_re;
          svd_d     <= in_im;
          svd_start <= 1'b1;
          job       <= J_IDLE;
        end
        default: job <= J_IDLE;
      endcase
    end
  end

  // Output tagging: the m-th output of a frame holds bin bit_reverse(m).
  logic [LB-1:0] ocnt, ocnt_rev;
  always_comb begin
    for (int i = 0; i < LB; i++) ocnt_rev[i] = ocnt[LB-1-i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ocnt      <= '0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
      out_index <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= fft_do_en;
      out_last  <= fft_do_en && (ocnt == LB'(N - 1));
      if (fft_do_en) begin
        out_re    <= fft_do_re;
        out_im    <= fft_do_im;
        out_index <= ocnt_rev;
        ocnt      <= ocnt + 1'b1;
      end
    end
  end

endmodule
