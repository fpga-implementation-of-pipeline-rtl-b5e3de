// bf2 -- Butterfly II of the radix-2^2 SDF pipeline (paper Fig. 5), with the
// trivial multiplication by -j.
//
// Like Butterfly I it stores the first half of a block in its feedback
// registers (c2 = 0) and combines it with the second half (c2 = 1).  When the
// incoming word must first be multiplied by -j, i.e. when c1 and c2 are both
// one (paper: "The control signals C1 and C2 will be one when there is a need
// for multiplication by -j"), the Swap MUX exchanges the real and imaginary
// parts of the input and the adder and subtracter of the imaginary path
// change places:
//     -j*(yr + j*yi) = yi - j*yr
//     out = ((fr + yi) + j(fi - yr)) / 2,  fb = ((fr - yi) + j(fi + yr)) / 2
// so no negation, and no overflow of -(-32768), is ever needed.  The AND of
// c1 and c2 is taken from that sentence; the gate drawn in Fig. 5 is not
// relied on.  Here c1 means "the preceding Butterfly I is emitting its
// differences"; the controller provides it.  Division by two rounds half up
// and clamps at 32767, as in bf1.
//
// Interface: a (complex input), c1, c2 (controls), b (complex output).
// Timing: b is registered, one clock after its inputs; feedback length L
// (paper: 4 in the first stage, 1 in the second).
module bf2
  import fft_pkg::*;
#(
  parameter int L = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  c1,
  input  logic  c2,
  input  cplx_t a,
  output cplx_t b
);

  cplx_t fb_q, fb_d, b_d;
  logic  swap;
  word_t y_re, y_im;                       // Swap MUX outputs
  logic signed [DW:0] fr, fi, yr, yi;
  logic signed [DW:0] out_re, out_im, bak_re, bak_im;

  sdf_delay #(.L(L)) u_fb (
    .clk  (clk),
    .rst_n(rst_n),
    .d    (fb_d),
    .q    (fb_q)
  );

  assign swap = c1 & c2;

  always_comb begin
    // Swap MUX: exchange real and imaginary parts for the -j product.
    y_re = swap ? a.im : a.re;
    y_im = swap ? a.re : a.im;
    fr = {fb_q.re[DW-1], fb_q.re};
    fi = {fb_q.im[DW-1], fb_q.im};
    yr = {y_re[DW-1], y_re};
    yi = {y_im[DW-1], y_im};
    out_re = fr + yr;
    bak_re = fr - yr;
    // Sign inversion of -j: adder and subtracter exchange places.
    out_im = swap ? (fi - yi) : (fi + yi);
    bak_im = swap ? (fi + yi) : (fi - yi);
    if (c2) begin
      b_d  = '{re: half_round(out_re), im: half_round(out_im)};
      fb_d = '{re: half_round(bak_re), im: half_round(bak_im)};
    end else begin
      b_d  = fb_q;
      fb_d = a;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) b <= '0;
    else        b <= b_d;
  end

endmodule
