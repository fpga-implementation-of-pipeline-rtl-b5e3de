// ds_rom -- product lookup table of the digit-slicing multiplier-less
// multiplier (the "ROM for all the possibilities for the multiply" of the
// paper's Fig. 14).
//
// Because the twiddle factors of an FFT are known in advance, every product
// of a twiddle-derived constant K with a 4-bit digit can be tabulated.  For
// each twiddle exponent e (sel) the table holds K(e)*d for the 16 digit
// values d.  The paper stores the 16 possibilities of one twiddle in one ROM;
// this design addresses all twiddles of the 16-point FFT by {sel, digit}.
// The most significant digit of a two's complement word is signed (paper
// eq. 14: its top bit weighs minus one), so the last read port uses a
// second 16-entry table holding K(e)*d for d = -8..7; the other ports read
// K(e)*d for d = 0..15.  Both tables are computed at elaboration from the
// cosine table in fft_pkg: entry = coef_value(KIND, sel) * digit.
//
// Interface: sel (twiddle exponent), NDIG digit read ports, NDIG products.
// Timing: synchronous read, prod is registered one clock after sel/digit.
module ds_rom
  import fft_pkg::*;
#(
  parameter coef_kind_e KIND = K_WR,
  parameter int         NSEL = 16,        // number of twiddle exponents
  parameter int         NDIG = 4,         // digits per word = read ports
  parameter int         CWID = CW,        // constant width
  localparam int        PW   = CWID + DIGIT_W,
  localparam int        SW   = $clog2(NSEL)
) (
  input  logic                       clk,
  input  logic [SW-1:0]              sel,
  input  logic [DIGIT_W-1:0]         digit [NDIG],
  output logic signed [PW-1:0]       prod  [NDIG]
);

  localparam int ENTRIES = NSEL * (1 << DIGIT_W);

  // Table image: entry (s*16 + d) at bits [(s*16+d)*PW +: PW].
  function automatic logic [ENTRIES*PW-1:0] build_table(input bit signed_digit);
    logic [ENTRIES*PW-1:0] t;
    int dv;
    longint pv;
    t = '0;
    for (int s = 0; s < NSEL; s++) begin
      for (int d = 0; d < (1 << DIGIT_W); d++) begin
        dv = (signed_digit && d >= (1 << (DIGIT_W-1))) ? d - (1 << DIGIT_W) : d;
        pv = longint'(coef_value(KIND, s)) * dv;
        t[(s*(1 << DIGIT_W) + d)*PW +: PW] = PW'(pv);
      end
    end
    return t;
  endfunction

  localparam logic [ENTRIES*PW-1:0] ROM_U = build_table(1'b0);  // digits 0..15
  localparam logic [ENTRIES*PW-1:0] ROM_S = build_table(1'b1);  // digits -8..7

  always_ff @(posedge clk) begin
    for (int k = 0; k < NDIG; k++) begin
      if (k == NDIG - 1) prod[k] <= ROM_S[{sel, digit[k]}*PW +: PW];
      else               prod[k] <= ROM_U[{sel, digit[k]}*PW +: PW];
    end
  end

endmodule
