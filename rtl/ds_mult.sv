// ds_mult -- pipelined digit-slicing multiplier-less real multiplier
// (paper Fig. 10 and Fig. 14), including the digit slicing unit (Fig. 8/9).
//
// The data word x is cut into 4-bit digits X_k (paper eq. 14):
//     x = sum_k 16^k * X_k,  top digit signed, all others unsigned.
// Each digit addresses the product ROM, which returns K*X_k for the constant
// K belonging to twiddle exponent sel; the partial products are shifted left
// by 0, 4, 8, 12 bits, added, and the sum shifted right by 15 (Q15 result).
// The sum of the shifted partial products equals K*x exactly, so
// y = floor(K*x / 2^15).  The right shift truncates, as drawn in the paper.
//
// The paper's word is 16 bits = four digits (DATA_W = 16).  A wider word is
// sign-extended to whole digits (the complex multiplier needs a 17-bit
// difference, five digits); that extension, the width of the result
// (OUT_W) and the two pipeline registers are choices of this design.
//
// Interface: x (signed data), sel (twiddle exponent), y (signed product).
// Timing: two clocks, a new operand every clock.
//   clock 1: digit slicing + ROM read (registered in ds_rom)
//   clock 2: shift, add, shift right, registered into y
module ds_mult
  import fft_pkg::*;
#(
  parameter coef_kind_e KIND   = K_WR,
  parameter int         DATA_W = 16,
  parameter int         CWID   = CW,
  parameter int         OUT_W  = 16,
  parameter int         SHIFT  = 15,
  parameter int         NSEL   = 16,
  localparam int        NDIG   = (DATA_W + DIGIT_W - 1) / DIGIT_W,
  localparam int        PW     = CWID + DIGIT_W,
  localparam int        AW     = CWID + NDIG*DIGIT_W,
  localparam int        SW     = $clog2(NSEL)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] x,
  input  logic [SW-1:0]            sel,
  output logic signed [OUT_W-1:0]  y
);

  // Digit slicing unit: sign-extend to whole digits and cut.
  logic signed [NDIG*DIGIT_W-1:0] xe;
  logic [DIGIT_W-1:0]             digit [NDIG];
  logic signed [PW-1:0]           prod  [NDIG];
  logic signed [AW-1:0]           acc;

  assign xe = (NDIG*DIGIT_W)'(x);

  always_comb begin
    for (int k = 0; k < NDIG; k++) digit[k] = xe[k*DIGIT_W +: DIGIT_W];
  end

  ds_rom #(
    .KIND(KIND),
    .NSEL(NSEL),
    .NDIG(NDIG),
    .CWID(CWID)
  ) u_rom (
    .clk  (clk),
    .sel  (sel),
    .digit(digit),
    .prod (prod)
  );

  // Shifters and adder: digit k weighs 2^(4k).
  always_comb begin
    acc = '0;
    for (int k = 0; k < NDIG; k++) acc += AW'(prod[k]) <<< (k*DIGIT_W);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) y <= '0;
    else        y <= OUT_W'(acc >>> SHIFT);
  end

endmodule
