// tb_delay_buffer: checks that delay_buffer returns every sample exactly
// DEPTH clocks after it was written, for a RAM-based depth (8) and for the
// single-register depth (1). Random data; the reference is a history array
// kept by the testbench.
module tb_delay_buffer;
  localparam int W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic signed [W-1:0] in_re, in_im;
  logic signed [W-1:0] o8_re, o8_im, o1_re, o1_im;

  delay_buffer #(.DEPTH(8), .WIDTH(W)) dut8 (.clk, .rst_n, .in_re, .in_im, .out_re(o8_re), .out_im(o8_im));
  delay_buffer #(.DEPTH(1), .WIDTH(W)) dut1 (.clk, .rst_n, .in_re, .in_im, .out_re(o1_re), .out_im(o1_im));

  logic [2*W-1:0] hist [200];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_re = '0; in_im = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      if (t >= 8) begin
        checks++;
        if ({o8_re, o8_im} !== hist[t-8]) begin
          failures++;
          $display("depth 8 t=%0d got %h want %h", t, {o8_re, o8_im}, hist[t-8]);
        end
      end
      if (t >= 1) begin
        checks++;
        if ({o1_re, o1_im} !== hist[t-1]) begin
          failures++;
          $display("depth 1 t=%0d got %h want %h", t, {o1_re, o1_im}, hist[t-1]);
        end
      end
      in_re = W'($urandom);
      in_im = W'($urandom);
      hist[t] = {in_re, in_im};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
