// tb_bf2 -- checks Butterfly II (L = 4) including the -j multiplication.
// Blocks of 2L samples, c2 = 0 for the first L and 1 for the last L; c1 is
// random.  A sample taken with c1 = c2 = 1 is first multiplied by -j:
// y = yi - j*yr.  Then, as for Butterfly I,
//   second half : out = rnd((x[n] + y[n+L]) / 2)
//   next block  : out = rnd((x[n] - y[n+L]) / 2)
// with rounding half up (clamped at 32767), one clock after the input.
module tb_bf2;
  import fft_pkg::*;

  localparam int L = 4;
  logic  clk = 1'b0, rst_n = 1'b0, c1, c2;
  cplx_t a, b;
  int xr [$], xi [$], yr [$], yi [$];
  int checks = 0, failures = 0, nswap = 0;

  bf2 dut (.clk(clk), .rst_n(rst_n), .c1(c1), .c2(c2), .a(a), .b(b));

  always #5 clk = ~clk;

  function automatic int rnd2(input int s);
    return ((s + 1) >>> 1) > 32767 ? 32767 : ((s + 1) >>> 1);
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    a = '0; c1 = 1'b0; c2 = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 40*2*L; t++) begin
      automatic int pos = t % (2*L);
      automatic int r, i;
      automatic bit sw;
      r = (t % 29 == 3) ? -32768 : int'($urandom_range(65535)) - 32768;
      i = (t % 31 == 6) ? -32768 : int'($urandom_range(65535)) - 32768;
      c2 = (pos >= L);
      c1 = 1'($urandom);
      // block 3: the one difference that must clamp, 32767 - (-32768)
      if (t / (2*L) == 3 && pos == 0) begin r = 32767;  i = 32767; end
      if (t / (2*L) == 3 && pos == L) begin r = -32768; i = -32768; c1 = 1'b0; end
      sw = c1 && c2;
      if (sw) nswap++;
      xr.push_back(r); xi.push_back(i);
      yr.push_back(sw ? i : r);
      yi.push_back(sw ? -r : i);
      a = '{re: word_t'(r), im: word_t'(i)};
      @(posedge clk);
      #1;
      if (pos >= L) begin
        check(int'(b.re) == rnd2(xr[t-L] + yr[t]) && int'(b.im) == rnd2(xi[t-L] + yi[t]),
              $sformatf("sum at %0d (swap %0b): (%0d,%0d)", t, sw, b.re, b.im));
      end else if (t >= 2*L) begin
        check(int'(b.re) == rnd2(xr[t-2*L] - yr[t-L]) && int'(b.im) == rnd2(xi[t-2*L] - yi[t-L]),
              $sformatf("difference at %0d: (%0d,%0d)", t, b.re, b.im));
      end
    end
    check(nswap > 0, "no -j sample");
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
