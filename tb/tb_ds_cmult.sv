// tb_ds_cmult -- checks the three-multiplier twiddle multiplier.
// Random E times W_16^e for every e, compared with the exact complex product
// (double precision, twiddles rounded to Q15): each real product is
// truncated, so the result may be up to 2 LSB below the exact value.
// Latency four clocks, one sample per clock.  Also:
//  * the operands of the paper's simulation waveform: B = 0x2c40 + j0xfd01,
//    W = 0x5a82 + j0xa57e (= W_16^2), A = 0x3a5e + j0x03d7; the radix-2
//    butterfly (A + BW)/2, (A - BW)/2 built here from the multiplier output
//    must give the printed 0x2bc4, 0xf137, 0x0e99, 0x12a0 within 1 LSB;
//  * saturation: (32767 - j32767) * W^2 = -j*1.414 clamps to -32768.
module tb_ds_cmult;
  import fft_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0;
  cplx_t      e, p;
  logic [3:0] sel;
  int checks = 0, failures = 0;
  real exp_re [$], exp_im [$];
  int  tag [$];

  ds_cmult dut (.clk(clk), .rst_n(rst_n), .e(e), .sel(sel), .p(p));

  always #5 clk = ~clk;

  function automatic real q15(input real v);
    return $floor(v * 32768.0 + 0.5);
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int  k, er, ei, tt, pr, pim;
  real th, wr, wi, xr, xi;
  int  ar, ai, o1r, o1i, o2r, o2i, fr1, fi1, fr2, fi2;

  initial begin
    e = '0; sel = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 800 + 3; t++) begin
      if (t < 800) begin
        k  = (t < 2) ? 2 : int'($urandom_range(15));
        th = 2.0 * 3.14159265358979 * k / 16.0;
        wr = q15($cos(th));
        wi = q15(-$sin(th));
        if (t == 0)      begin er = 11328; ei = -767; end       // 0x2c40, 0xfd01
        else if (t == 1) begin er = 32767; ei = -32767; end
        else begin
          er = int'($urandom_range(46000)) - 23000;
          ei = int'($urandom_range(46000)) - 23000;
        end
        e = '{re: word_t'(er), im: word_t'(ei)};
        sel = 4'(k);
        exp_re.push_back((er * wr - ei * wi) / 32768.0);
        exp_im.push_back((er * wi + ei * wr) / 32768.0);
        tag.push_back(t);
      end
      @(posedge clk);
      #1;
      if (t >= 3) begin
        xr = exp_re.pop_front();
        xi = exp_im.pop_front();
        tt = tag.pop_front();
        pr  = int'(p.re);
        pim = int'(p.im);
        if (tt == 1) begin
          check(pim == -32768 && pr >= -2 && pr <= 2,
                $sformatf("saturation: (%0d,%0d)", pr, pim));
        end else begin
          check((real'(pr) <= xr + 0.001) && (real'(pr) >= xr - 2.001) &&
                (real'(pim) <= xi + 0.001) && (real'(pim) >= xi - 2.001),
                $sformatf("sample %0d: (%0d,%0d) expected (%f,%f)", tt, pr, pim, xr, xi));
        end
        if (tt == 0) begin
          ar  = 14942;                       // 0x3a5e
          ai  = 983;                         // 0x03d7
          o1r = (ar + pr + 1) >>> 1;
          o1i = (ai + pim + 1) >>> 1;
          o2r = (ar - pr + 1) >>> 1;
          o2i = (ai - pim + 1) >>> 1;
          fr1 = 11204;                       // 0x2bc4
          fi1 = -3785;                       // 0xf137
          fr2 = 3737;                        // 0x0e99
          fi2 = 4768;                        // 0x12a0
          check(o1r - fr1 <= 1 && fr1 - o1r <= 1 && o1i - fi1 <= 1 && fi1 - o1i <= 1 &&
                o2r - fr2 <= 1 && fr2 - o2r <= 1 && o2i - fi2 <= 1 && fi2 - o2i <= 1,
                $sformatf("waveform example: %h %h %h %h", 16'(o1r), 16'(o1i), 16'(o2r), 16'(o2i)));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
