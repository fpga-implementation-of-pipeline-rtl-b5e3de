// sdf_delay -- feedback registers of a single-path delay-feedback butterfly.
//
// A shift register of L complex words (real and imaginary "Feedback reg."
// of Fig. 4/5 in the paper).  Every clock the word at d enters and the word
// that entered L clocks earlier leaves at q, so a butterfly can pair sample
// n with sample n+L.  The stage lengths 8, 4, 2 and 1 of the 16-point
// pipeline are the paper's; the plain register chain (rather than a RAM) and
// the clearing to zero at reset are choices of this design.
//
// Interface: clk, active-low synchronous reset rst_n, d in, q out.
// Timing: q(t) = d(t - L); no enable, the pipeline never stops.
module sdf_delay
  import fft_pkg::*;
#(
  parameter int L = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t d,
  output cplx_t q
);

  cplx_t mem [L];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < L; i++) mem[i] <= '0;
    end else begin
      mem[0] <= d;
      for (int i = 1; i < L; i++) mem[i] <= mem[i-1];
    end
  end

  assign q = mem[L-1];

endmodule
