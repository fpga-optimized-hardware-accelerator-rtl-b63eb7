// tb_twiddle_rom: reads every entry of a 64-point and of a 1024-point
// twiddle table and compares it with cos/-sin computed in real arithmetic
// (within one LSB), and checks the one-clock read latency.
module tb_twiddle_rom;
  localparam int TW = 16, FR = 14;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979323846;

  logic [4:0] a64;
  logic [8:0] a1k;
  logic signed [TW-1:0] r64, i64, r1k, i1k;
  twiddle_rom #(.L(64),   .TW_W(TW), .TW_FRAC(FR)) dut64 (.clk, .addr(a64), .w_re(r64), .w_im(i64));
  twiddle_rom #(.L(1024), .TW_W(TW), .TW_FRAC(FR)) dut1k (.clk, .addr(a1k), .w_re(r1k), .w_im(i1k));

  task automatic cmp(string what, int m, int got, real want);
    real e;
    e = real'(got) - want * real'(1 << FR);
    checks++;
    if (e > 1.0 || e < -1.0) begin
      failures++;
      $display("%s m=%0d got %0d want %f", what, m, got, want * real'(1 << FR));
    end
  endtask

  initial begin
    a64 = '0; a1k = '0;
    for (int m = 0; m < 512; m++) begin
      @(negedge clk);
      a64 = 5'(m % 32);
      a1k = 9'(m);
      @(posedge clk); #1;
      cmp("L64 re", m % 32, int'(r64), $cos(2.0*PI*real'(m % 32)/64.0));
      cmp("L64 im", m % 32, int'(i64), -$sin(2.0*PI*real'(m % 32)/64.0));
      cmp("L1024 re", m, int'(r1k), $cos(2.0*PI*real'(m)/1024.0));
      cmp("L1024 im", m, int'(i1k), -$sin(2.0*PI*real'(m)/1024.0));
    end
    // registered read: a new address shows only after the clock edge
    @(negedge clk); a64 = 5'd8; @(posedge clk); #1; @(negedge clk); a64 = 5'd0; #1;
    checks++;
    if (r64 !== 16'sd11585) begin failures++; $display("read not registered: %0d", r64); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
