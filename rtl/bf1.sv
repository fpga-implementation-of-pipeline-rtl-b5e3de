// bf1 -- Butterfly I of the radix-2^2 SDF pipeline (paper Fig. 4).
//
// With c1 = 0 the input word is written into the feedback registers and the
// word leaving them (a difference stored during the previous half block) is
// passed to the output.  With c1 = 1 the adder and subtracter are selected:
// the output is (fb + a)/2 and (fb - a)/2 goes back into the feedback
// registers.  The structure and the C1 meaning follow the paper; the
// divide-by-two with round-half-up follows its "divide by 2 ... rounding
// off" remark, the exact rounding rule (and the clamp of the one result,
// (32767 - (-32768))/2, that would round to 32768) is this design's choice.
//
// Interface: a (complex input), c1 (phase), b (complex output).
// Timing: b is registered, one clock after the a/c1 it is computed from.
// The feedback registers are L words long (paper: 8 in the first stage,
// 2 in the second).
module bf1
  import fft_pkg::*;
#(
  parameter int L = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  c1,
  input  cplx_t a,
  output cplx_t b
);

  cplx_t fb_q, fb_d, b_d;
  logic signed [DW:0] sum_re, sum_im, dif_re, dif_im;

  sdf_delay #(.L(L)) u_fb (
    .clk  (clk),
    .rst_n(rst_n),
    .d    (fb_d),
    .q    (fb_q)
  );

  always_comb begin
    sum_re = {fb_q.re[DW-1], fb_q.re} + {a.re[DW-1], a.re};
    sum_im = {fb_q.im[DW-1], fb_q.im} + {a.im[DW-1], a.im};
    dif_re = {fb_q.re[DW-1], fb_q.re} - {a.re[DW-1], a.re};
    dif_im = {fb_q.im[DW-1], fb_q.im} - {a.im[DW-1], a.im};
    if (c1) begin
      b_d  = '{re: half_round(sum_re), im: half_round(sum_im)};
      fb_d = '{re: half_round(dif_re), im: half_round(dif_im)};
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
