// tb_complex_mult: random and corner-case products compared exactly with a
// reference computed in 64-bit integers (round half up by TW_FRAC bits,
// saturation to WIDTH bits), plus the identity W = 1.0.
module tb_complex_mult;
  localparam int W = 16, TW = 16, FR = 14;
  int checks = 0, failures = 0;
  logic signed [W-1:0] x_re, x_im, p_re, p_im;
  logic signed [TW-1:0] w_re, w_im;
  complex_mult #(.WIDTH(W), .TW_W(TW), .TW_FRAC(FR)) dut (.x_re, .x_im, .w_re, .w_im, .p_re, .p_im);

  function automatic longint ref_round_sat(longint v);
    longint r;
    r = v + (64'sd1 << (FR - 1));
    r = (r >= 0) ? r / (64'sd1 << FR) : -((-r + (64'sd1 << FR) - 1) / (64'sd1 << FR));
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  task automatic chk(string what, longint got, longint want);
    checks++;
    if (got != want) begin
      failures++;
      $display("%s got %0d want %0d x=(%0d,%0d) w=(%0d,%0d)", what, got, want, x_re, x_im, w_re, w_im);
    end
  endtask

  initial begin
    for (int n = 0; n < 500; n++) begin
      x_re = W'($urandom); x_im = W'($urandom);
      if (n < 50) begin w_re = 16'sd16384; w_im = 16'sd0; end
      else if (n < 60) begin x_re = 16'sh7fff; x_im = 16'sh7fff; w_re = 16'sd11585; w_im = 16'sd11585; end
      else begin
        w_re = TW'($signed($urandom_range(32768)) - 16384);
        w_im = TW'($signed($urandom_range(32768)) - 16384);
      end
      #1;
      chk("re", p_re, ref_round_sat(longint'(x_re) * w_re - longint'(x_im) * w_im));
      chk("im", p_im, ref_round_sat(longint'(x_re) * w_im + longint'(x_im) * w_re));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
