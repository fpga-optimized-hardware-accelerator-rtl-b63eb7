// tb_butterfly: checks the scaled (halving, round half up) and the
// full-precision butterfly on random and corner-case complex inputs against
// integer arithmetic done in the testbench.
module tb_butterfly;
  localparam int W = 16;
  int checks = 0, failures = 0;

  logic signed [W-1:0] a_re, a_im, b_re, b_im;
  logic signed [W-1:0] hs_re, hs_im, hd_re, hd_im;
  logic signed [W:0]   fs_re, fs_im, fd_re, fd_im;

  butterfly #(.WIDTH(W), .SCALE(1'b1)) dut_h (.a_re, .a_im, .b_re, .b_im,
    .sum_re(hs_re), .sum_im(hs_im), .dif_re(hd_re), .dif_im(hd_im));
  butterfly #(.WIDTH(W), .SCALE(1'b0)) dut_f (.a_re, .a_im, .b_re, .b_im,
    .sum_re(fs_re), .sum_im(fs_im), .dif_re(fd_re), .dif_im(fd_im));

  function automatic longint half_up(longint v);
    // floor((v + 1) / 2) for any sign
    longint t = v + 1;
    t = (t >= 0) ? t / 2 : -((-t + 1) / 2);
    return (t > 32767) ? 32767 : t;   // the one out-of-range case saturates
  endfunction

  task automatic check(string what, longint got, longint want);
    checks++;
    if (got != want) begin
      failures++;
      $display("%s: got %0d want %0d (a=%0d,%0d b=%0d,%0d)", what, got, want, a_re, a_im, b_re, b_im);
    end
  endtask

  initial begin
    for (int n = 0; n < 400; n++) begin
      if (n == 0)      begin a_re = 16'sh7fff; a_im = 16'sh8000; b_re = 16'sh7fff; b_im = 16'sh8000; end
      else if (n == 1) begin a_re = 16'sh8000; a_im = 16'sh7fff; b_re = 16'sh7fff; b_im = 16'sh8000; end
      else begin a_re = W'($urandom); a_im = W'($urandom); b_re = W'($urandom); b_im = W'($urandom); end
      #1;
      check("full sum re", fs_re, longint'(a_re) + longint'(b_re));
      check("full sum im", fs_im, longint'(a_im) + longint'(b_im));
      check("full dif re", fd_re, longint'(a_re) - longint'(b_re));
      check("full dif im", fd_im, longint'(a_im) - longint'(b_im));
      check("half sum re", hs_re, half_up(longint'(a_re) + longint'(b_re)));
      check("half sum im", hs_im, half_up(longint'(a_im) + longint'(b_im)));
      check("half dif re", hd_re, half_up(longint'(a_re) - longint'(b_re)));
      check("half dif im", hd_im, half_up(longint'(a_im) - longint'(b_im)));
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
