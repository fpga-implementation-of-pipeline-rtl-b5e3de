// tb_fft_pkg -- checks the shared helper functions of fft_pkg against values
// computed here: the Q15 twiddle factors W_16^e = cos - j*sin (double
// precision, rounded, 1.0 = 32768), the derived ROM constants, the
// round-half-up halving of a 17-bit value (clamped at 32767), and the 4-bit bit reversal.
module tb_fft_pkg;
  import fft_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic int q15(input real v);
    return int'($floor(v * 32768.0 + 0.5));
  endfunction

  initial begin
    for (int e = 0; e < 16; e++) begin
      automatic real th = 2.0 * 3.14159265358979 * e / 16.0;
      automatic int  wr = q15($cos(th));
      automatic int  wi = q15(-$sin(th));
      check(tw_re(e) == wr, $sformatf("tw_re(%0d) = %0d, expected %0d", e, tw_re(e), wr));
      check(tw_im(e) == wi, $sformatf("tw_im(%0d) = %0d, expected %0d", e, tw_im(e), wi));
      check(coef_value(K_WR_MINUS_WI, e) == wr - wi, $sformatf("Wr-Wi at %0d", e));
      check(coef_value(K_WR_PLUS_WI, e)  == wr + wi, $sformatf("Wr+Wi at %0d", e));
      check(coef_value(K_WI, e)          == wi,      $sformatf("Wi at %0d", e));
      check(coef_value(K_WR, e)          == wr,      $sformatf("Wr at %0d", e));
    end
    for (int s = -65536; s <= 65535; s += 3) begin
      automatic int r = int'(half_round(17'(s)));
      automatic int x = int'($floor(real'(s) / 2.0 + 0.5));
      if (x > 32767) x = 32767;
      check(r == x, $sformatf("half_round(%0d) = %0d, expected %0d", s, r, x));
    end
    check(int'(half_round(17'sd65535)) == 32767 && int'(half_round(17'sd65534)) == 32767 &&
          int'(half_round(17'(-65536))) == -32768, "half_round limits");
    for (int v = 0; v < 16; v++) begin
      automatic int b = ((v & 1) << 3) | ((v & 2) << 1) | ((v & 4) >> 1) | ((v & 8) >> 3);
      check(int'(bitrev4(4'(v))) == b, $sformatf("bitrev4(%0d)", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog: the checks above take no simulated time.
  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
