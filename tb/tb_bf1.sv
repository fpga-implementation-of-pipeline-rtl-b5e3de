// tb_bf1 -- checks Butterfly I (L = 8) against the radix-2 SDF rule written
// directly on the input stream: with blocks of 2L samples, c1 = 0 for the
// first L and 1 for the last L,
//   second half, position n+L : out = rnd((x[n] + x[n+L]) / 2)
//   next block, position n    : out = rnd((x[n] - x[n+L]) / 2)
// where rnd rounds half up (clamped at 32767); the output is one clock after the input.
module tb_bf1;
  import fft_pkg::*;

  localparam int L = 8;
  logic  clk = 1'b0, rst_n = 1'b0, c1;
  cplx_t a, b;
  int xr [$], xi [$];
  int checks = 0, failures = 0;

  bf1 dut (.clk(clk), .rst_n(rst_n), .c1(c1), .a(a), .b(b));

  always #5 clk = ~clk;

  function automatic int rnd2(input int s);
    return ((s + 1) >>> 1) > 32767 ? 32767 : ((s + 1) >>> 1);
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    a = '0; c1 = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 20*2*L; t++) begin
      automatic int pos = t % (2*L);
      automatic int r, i;
      // full scale extremes now and then, to exercise the rounding limits
      r = (t % 37 == 5) ? 32767 : (t % 41 == 7) ? -32768 : int'($urandom_range(65535)) - 32768;
      i = (t % 43 == 9) ? -32768 : int'($urandom_range(65535)) - 32768;
      // block 3: the one difference that must clamp, 32767 - (-32768)
      if (t / (2*L) == 3 && pos == 0) begin r = 32767;  i = -32768; end
      if (t / (2*L) == 3 && pos == L) begin r = -32768; i = 32767;  end
      xr.push_back(r); xi.push_back(i);
      a  = '{re: word_t'(r), im: word_t'(i)};
      c1 = (pos >= L);
      @(posedge clk);
      #1;
      if (pos >= L) begin
        check(int'(b.re) == rnd2(xr[t-L] + xr[t]) && int'(b.im) == rnd2(xi[t-L] + xi[t]),
              $sformatf("sum at %0d: (%0d,%0d)", t, b.re, b.im));
      end else if (t >= 2*L) begin
        check(int'(b.re) == rnd2(xr[t-2*L] - xr[t-L]) && int'(b.im) == rnd2(xi[t-2*L] - xi[t-L]),
              $sformatf("difference at %0d: (%0d,%0d)", t, b.re, b.im));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
