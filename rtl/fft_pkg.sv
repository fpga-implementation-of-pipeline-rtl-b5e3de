// fft_pkg -- shared types, widths and constants of the 16-point radix-2^2
// single-path delay-feedback (SDF) FFT with a digit-slicing multiplier-less
// twiddle multiplier.
//
// Number format (follows the paper): samples and twiddle factors are 16-bit
// two's complement fractions (Q1.15, |value| < 1).  The constants that the
// three-multiplier complex product needs (Wr-Wi, Wr+Wi, Wi) can reach
// +-1.414, so they are held with one extra integer bit (CW = 17, still Q15
// scaling); this widening, and the exact 1.0 = 32768 it allows for W^0, is a
// choice of this design.
//
// The twiddle factors W_16^e = cos(2*pi*e/16) - j*sin(2*pi*e/16) are produced
// from a five-entry quarter-wave cosine table (values rounded to Q15), so no
// real-number arithmetic is needed at elaboration time.
package fft_pkg;

  parameter int N       = 16;  // FFT length (paper: 16-point structure, Fig. 3/13)
  parameter int LOG2N   = 4;
  parameter int DW      = 16;  // data word width (paper: 16-bit fixed point)
  parameter int DIGIT_W = 4;   // digit width (paper: four blocks of four bits)
  parameter int CW      = 17;  // ROM constant width, Q15 plus headroom (assumed)

  typedef logic signed [DW-1:0] word_t;

  typedef struct packed {
    word_t re;
    word_t im;
  } cplx_t;

  // Which constant derived from the twiddle factor a product ROM holds.
  typedef enum logic [1:0] {
    K_WR          = 2'd0,  // Wr        (plain real twiddle part)
    K_WR_MINUS_WI = 2'd1,  // Wr - Wi   (multiplies Er in eq. 13)
    K_WR_PLUS_WI  = 2'd2,  // Wr + Wi   (multiplies Ei in eq. 13)
    K_WI          = 2'd3   // Wi        (multiplies Er - Ei in eq. 13)
  } coef_kind_e;

  // cos(2*pi*k/16) in Q15, 1.0 represented exactly as 32768.
  function automatic int qcos16(input int k);
    int kk;
    int v;
    kk = k & 15;
    if (kk > 8) kk = 16 - kk;            // cos is even: fold to 0..8
    case (kk)
      0: v = 32768;
      1: v = 30274;
      2: v = 23170;
      3: v = 12540;
      4: v = 0;
      5: v = -12540;
      6: v = -23170;
      7: v = -30274;
      default: v = -32768;
    endcase
    return v;
  endfunction

  // Real and imaginary part of W_16^e = exp(-j*2*pi*e/16), Q15.
  function automatic int tw_re(input int e);
    return qcos16(e);
  endfunction

  function automatic int tw_im(input int e);
    return -qcos16(e - 4);               // -sin(x) = -cos(x - pi/2)
  endfunction

  // Constant of the given kind for twiddle exponent e.
  function automatic int coef_value(input coef_kind_e kind, input int e);
    case (kind)
      K_WR_MINUS_WI: return tw_re(e) - tw_im(e);
      K_WR_PLUS_WI:  return tw_re(e) + tw_im(e);
      K_WI:          return tw_im(e);
      default:       return tw_re(e);
    endcase
  endfunction

  // Divide a 17-bit sum or difference by two with rounding (round half up),
  // the "divide by 2 ... rounding off" of the butterflies.  Only the largest
  // difference, 32767 - (-32768) = 65535, rounds to 32768; it is clamped to
  // 32767.
  function automatic word_t half_round(input logic signed [DW:0] s);
    logic signed [DW+1:0] t;
    t = {s[DW], s} + {{(DW+1){1'b0}}, 1'b1};
    if (t[DW+1:DW] == 2'b01) return {1'b0, {(DW-1){1'b1}}};
    return t[DW:1];
  endfunction

  // 4-bit bit reversal, the output order of the 16-point SDF pipeline.
  function automatic logic [LOG2N-1:0] bitrev4(input logic [LOG2N-1:0] v);
    return {v[0], v[1], v[2], v[3]};
  endfunction

endpackage
