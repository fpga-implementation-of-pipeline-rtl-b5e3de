// tb_r22sdf_fft16 -- end-to-end test of the 16-point radix-2^2 SDF FFT with
// the digit-slicing multiplier-less twiddle multiplier, at its only size.
//
// Streams NFRAMES back-to-back frames (an impulse, a constant, a complex
// tone, full-scale alternating samples, then random samples with |x| < 1)
// and compares every result with a double-precision DFT divided by 16,
// allowing TOL LSBs of fixed-point error.  Also checks the 23-clock latency,
// the bit-reversed out_k order, and counts the mechanisms of the design:
// Butterfly I store/butterfly phases, the -j swaps of both Butterfly II
// stages, and every twiddle exponent (0,1,2,3,4,6,9).  A mechanism that
// never happened counts as a failure.
module tb_r22sdf_fft16;
  import fft_pkg::*;

  localparam int NFRAMES = 40;
  localparam int TOL     = 2;
  localparam int LAT     = 23;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  cplx_t            x;
  cplx_t            y;
  logic             out_valid;
  logic [LOG2N-1:0] out_k;

  int checks = 0, failures = 0;

  r22sdf_fft16 dut (.clk(clk), .rst_n(rst_n), .x(x), .y(y), .out_valid(out_valid), .out_k(out_k));

  always #5 clk = ~clk;

  int in_re [NFRAMES][16];
  int in_im [NFRAMES][16];

  // mechanism counters
  int n_s1_store = 0, n_s1_bfly = 0, n_s2_store = 0, n_s2_bfly = 0;
  int n_s1_swap = 0, n_s2_swap = 0;
  int n_tw [16];

  function automatic int rnd_sample();
    return int'($urandom_range(45000)) - 22500;   // |re|,|im| < 0.69 -> |x| < 1
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Stimulus generation.
  initial begin
    for (int f = 0; f < NFRAMES; f++) begin
      for (int n = 0; n < 16; n++) begin
        case (f)
          0: begin in_re[f][n] = (n == 0) ? 30000 : 0; in_im[f][n] = 0; end
          1: begin in_re[f][n] = 20000; in_im[f][n] = -10000; end
          2: begin
               in_re[f][n] = int'($floor(22000.0 * $cos(2.0*3.14159265358979*3*n/16) + 0.5));
               in_im[f][n] = int'($floor(22000.0 * $sin(2.0*3.14159265358979*3*n/16) + 0.5));
             end
          3: begin in_re[f][n] = (n % 2 != 0) ? -23000 : 23000; in_im[f][n] = (n % 3 != 0) ? 23000 : -23000; end
          default: begin in_re[f][n] = rnd_sample(); in_im[f][n] = rnd_sample(); end
        endcase
      end
    end
  end

  // Drive: one sample per clock from the first clock after reset.
  int cyc = 0;
  initial begin
    x = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int f = 0; f < NFRAMES + 3; f++) begin
      for (int n = 0; n < 16; n++) begin
        if (f < NFRAMES) x = '{re: word_t'(in_re[f][n]), im: word_t'(in_im[f][n])};
        else             x = '0;
        @(posedge clk);
        #1;
      end
    end
  end

  // Cycle counter since the first sample and mechanism counts.
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (dut.u_s1_bf1.c1) n_s1_bfly++; else n_s1_store++;
    if (dut.u_s2_bf1.c1) n_s2_bfly++; else n_s2_store++;
    if (dut.u_s1_bf2.swap) n_s1_swap++;
    if (dut.u_s2_bf2.swap) n_s2_swap++;
    n_tw[dut.tw_sel]++;
  end

  // Output checking.
  int nout = 0;
  bit seen_valid = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && !seen_valid) begin
      seen_valid = 1'b1;
      check(cyc == LAT, $sformatf("latency %0d, expected %0d", cyc, LAT));
    end
    if (out_valid && nout < NFRAMES*16) begin
      automatic int f = nout / 16;
      automatic int k = int'(bitrev4(4'(nout % 16)));
      automatic real er = 0.0, ei = 0.0;
      automatic int  ir, ii;
      for (int n = 0; n < 16; n++) begin
        automatic real a = -2.0*3.14159265358979*n*k/16.0;
        er += in_re[f][n]*$cos(a) - in_im[f][n]*$sin(a);
        ei += in_re[f][n]*$sin(a) + in_im[f][n]*$cos(a);
      end
      ir = int'($floor(er/16.0 + 0.5));
      ii = int'($floor(ei/16.0 + 0.5));
      check(int'(out_k) == k, $sformatf("out %0d: out_k=%0d expected %0d", nout, out_k, k));
      check((int'(y.re) - ir <= TOL) && (ir - int'(y.re) <= TOL) &&
            (int'(y.im) - ii <= TOL) && (ii - int'(y.im) <= TOL),
            $sformatf("frame %0d X[%0d] = (%0d,%0d), expected (%0d,%0d)", f, k, y.re, y.im, ir, ii));
      nout++;
    end
  end

  initial begin
    wait (nout == NFRAMES*16);
    @(posedge clk);
    check(n_s1_store > 0 && n_s1_bfly > 0, "stage-1 Butterfly I phases");
    check(n_s2_store > 0 && n_s2_bfly > 0, "stage-2 Butterfly I phases");
    check(n_s1_swap > 0, "stage-1 -j swap never happened");
    check(n_s2_swap > 0, "stage-2 -j swap never happened");
    foreach (n_tw[e]) begin
      if (e inside {0, 1, 2, 3, 4, 6, 9}) check(n_tw[e] > 0, $sformatf("twiddle W^%0d never used", e));
      else check(n_tw[e] == 0, $sformatf("twiddle W^%0d used", e));
    end
    $display("mechanisms: bf1 store/butterfly %0d/%0d and %0d/%0d, -j swaps %0d and %0d, W^0,1,2,3,4,6,9: %0d %0d %0d %0d %0d %0d %0d",
             n_s1_store, n_s1_bfly, n_s2_store, n_s2_bfly, n_s1_swap, n_s2_swap,
             n_tw[0], n_tw[1], n_tw[2], n_tw[3], n_tw[4], n_tw[6], n_tw[9]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    repeat ((NFRAMES + 10) * 16 + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial foreach (n_tw[e]) n_tw[e] = 0;

endmodule
