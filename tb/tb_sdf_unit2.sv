// tb_sdf_unit2: feeds random sample pairs (contiguous, then after a gap) to
// the two-point stage and checks the output order (halved sum, then halved
// difference), the exact values and the 2-clock latency.
module tb_sdf_unit2;
  localparam int W = 16, PAIRS = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic di_en = 1'b0, do_en;
  logic signed [W-1:0] di_re = '0, di_im = '0, do_re, do_im;
  sdf_unit2 #(.WIDTH(W)) dut (.clk, .rst_n, .di_en, .di_re, .di_im, .do_en, .do_re, .do_im);

  int xr [2*PAIRS], xi [2*PAIRS], er [2*PAIRS], ei [2*PAIRS];
  int cyc = 0, first_in = -1, first_out = -1, nout = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int half_up(int v);
    return (v + 1) >>> 1;
  endfunction

  initial begin
    for (int p = 0; p < PAIRS; p++) begin
      xr[2*p] = $signed($urandom_range(60000)) - 30000; xi[2*p] = $signed($urandom_range(60000)) - 30000;
      xr[2*p+1] = $signed($urandom_range(60000)) - 30000; xi[2*p+1] = $signed($urandom_range(60000)) - 30000;
      er[2*p]   = half_up(xr[2*p] + xr[2*p+1]); ei[2*p]   = half_up(xi[2*p] + xi[2*p+1]);
      er[2*p+1] = half_up(xr[2*p] - xr[2*p+1]); ei[2*p+1] = half_up(xi[2*p] - xi[2*p+1]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2 * PAIRS; n++) begin
      if (n == PAIRS) begin @(negedge clk); di_en = 1'b0; repeat (3) @(posedge clk); end
      @(negedge clk);
      di_en = 1'b1; di_re = W'(xr[n]); di_im = W'(xi[n]);
      if (first_in < 0) first_in = cyc;
    end
    @(negedge clk); di_en = 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (nout != 2 * PAIRS) begin failures++; $display("got %0d outputs", nout); end
    checks++;
    if (first_out - first_in != 2) begin failures++; $display("latency %0d", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && do_en) begin
    if (first_out < 0) first_out = cyc;
    if (nout < 2 * PAIRS) begin
      checks++;
      if (int'(do_re) != er[nout] || int'(do_im) != ei[nout]) begin
        failures++;
        $display("out %0d: got (%0d,%0d) want (%0d,%0d)", nout, do_re, do_im, er[nout], ei[nout]);
      end
    end
    nout++;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
