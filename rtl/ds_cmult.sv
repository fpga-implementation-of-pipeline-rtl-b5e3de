// ds_cmult -- twiddle-factor complex multiplier built from three
// digit-slicing multiplier-less real multipliers (paper eq. 13, Fig. 7,
// Fig. 12, Fig. 13).
//
// With W = Wr + jWi the twiddle factor and E = Er + jEi the output of
// Butterfly II, eq. (13) of the paper, with a = W and b = E, gives
//     Re = Er*(Wr - Wi) + Wi*(Er - Ei)
//     Im = Ei*(Wr + Wi) + Wi*(Er - Ei)
// The three constants Wr-Wi, Wr+Wi and Wi are known in advance and live in
// the product ROMs; only the data Er, Ei and Er-Ei are digit-sliced.  Which
// operand of eq. (13) is the twiddle is this design's reading (the paper
// slices "the output of Butterfly II").  Er-Ei needs 17 bits and is sliced
// into five digits; Er and Ei use the paper's four.  Each real product is
// truncated to Q15 as in Fig. 14, the two products are added and the sum is
// saturated to 16 bits (saturation is this design's addition; it can only
// act when |E| > 1).
//
// Interface: e (complex data), sel (twiddle exponent e of W_16^e), p = E*W.
// Timing: four clocks, one sample per clock:
//   1 pre-subtracter Er-Ei, 2 ROM read, 3 shift/add, 4 final add + saturate.
module ds_cmult
  import fft_pkg::*;
#(
  parameter int NSEL = 16,
  localparam int SW  = $clog2(NSEL),
  localparam int MW  = DW + 2              // width of one real product
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cplx_t         e,
  input  logic [SW-1:0] sel,
  output cplx_t         p
);

  word_t               er_q, ei_q;
  logic signed [DW:0]  d_q;
  logic [SW-1:0]       sel_q;
  logic signed [MW-1:0] m_r, m_i, m_d;
  logic signed [MW:0]   sum_re, sum_im;

  function automatic word_t sat(input logic signed [MW:0] v);
    if (v > (MW+1)'(32767))    return 16'sh7fff;
    else if (v < -(MW+1)'(32768)) return 16'sh8000;
    else                      return DW'(v);
  endfunction

  // Stage 1: pre-subtracter, register the operands.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      er_q  <= '0;
      ei_q  <= '0;
      d_q   <= '0;
      sel_q <= '0;
    end else begin
      er_q  <= e.re;
      ei_q  <= e.im;
      d_q   <= {e.re[DW-1], e.re} - {e.im[DW-1], e.im};
      sel_q <= sel;
    end
  end

  // Stages 2-3: three digit-slicing multiplier-less real multipliers.
  ds_mult #(.KIND(K_WR_MINUS_WI), .DATA_W(DW),   .OUT_W(MW), .NSEL(NSEL))
    u_m_r (.clk(clk), .rst_n(rst_n), .x(er_q), .sel(sel_q), .y(m_r));
  ds_mult #(.KIND(K_WR_PLUS_WI),  .DATA_W(DW),   .OUT_W(MW), .NSEL(NSEL))
    u_m_i (.clk(clk), .rst_n(rst_n), .x(ei_q), .sel(sel_q), .y(m_i));
  ds_mult #(.KIND(K_WI),          .DATA_W(DW+1), .OUT_W(MW), .NSEL(NSEL))
    u_m_d (.clk(clk), .rst_n(rst_n), .x(d_q),  .sel(sel_q), .y(m_d));

  assign sum_re = {m_r[MW-1], m_r} + {m_d[MW-1], m_d};
  assign sum_im = {m_i[MW-1], m_i} + {m_d[MW-1], m_d};

  // Stage 4: final adders with saturation.
  always_ff @(posedge clk) begin
    if (!rst_n) p <= '0;
    else        p <= '{re: sat(sum_re), im: sat(sum_im)};
  end

endmodule
