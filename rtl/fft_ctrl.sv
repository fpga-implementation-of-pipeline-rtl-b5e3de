// fft_ctrl -- control unit of the 16-point radix-2^2 SDF pipeline.
//
// The paper names the control signals C1 and C2 of the butterflies and the
// twiddle factors W_16^e, but not the logic that produces them; this is the
// usual single frame counter.  One sample enters per clock; cnt counts the
// input samples modulo 16 from the clock after reset is released, sample
// x[n] of a frame entering with cnt = n.  Every other control is a bit
// pattern of cnt minus the latency in front of the unit it drives:
//   Butterfly I  (L=8) : c1 = cnt[3]
//   Butterfly II (L=4) : c2 = c[2],  c1 = ~c[3]          with c = cnt - 1
//   multiplier         : e = n3 * bitrev2(q[3:2]), n3 = q[1:0], q = cnt + 2
//                        (order W^0 x4, W^0,2,4,6, W^0,1,2,3, W^0,3,6,9 of
//                        the paper's Fig. 2)
//   Butterfly I  (L=2) : c1 = q2[1]                     with q2 = cnt - 2
//   Butterfly II (L=1) : c2 = q3[0], c1 = ~q3[1]        with q3 = cnt - 3
//   output             : X[bitrev4(cnt - 7)] leaves the pipeline
// The -1/-2/... offsets follow from the one-clock output register of every
// butterfly and the four clocks of the complex multiplier (ds_cmult).  The
// Butterfly II c1 is high while the Butterfly I in front of it emits its
// differences, so that c1 & c2 marks the -j samples as the paper states.
//
// Interface: outputs only, all combinational from the counter.
// out_valid rises LATENCY = 23 clocks after the first sample and stays high.
module fft_ctrl
  import fft_pkg::*;
#(
  parameter int LATENCY = 23
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             s1_bf1_c1,
  output logic             s1_bf2_c1,
  output logic             s1_bf2_c2,
  output logic [LOG2N-1:0] tw_sel,
  output logic             s2_bf1_c1,
  output logic             s2_bf2_c1,
  output logic             s2_bf2_c2,
  output logic             out_valid,
  output logic [LOG2N-1:0] out_k
);

  logic [LOG2N-1:0] cnt;                   // input sample index in the frame
  logic [LOG2N-1:0] c, q, q2, q3, u;       // cnt offset by each unit's latency
  logic             unused_bits;
  logic [5:0]       fill;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt  <= '0;
      fill <= '0;
    end else begin
      cnt <= cnt + 1'b1;
      if (fill != 6'(LATENCY)) fill <= fill + 1'b1;
    end
  end

  // Twiddle exponent n3 * k for n3, k in 0..3 (a 16-entry table).
  function automatic logic [LOG2N-1:0] tw_exp(input logic [1:0] n3, input logic [1:0] k);
    case ({n3, k})
      4'b01_01: return 4'd1;
      4'b01_10: return 4'd2;
      4'b01_11: return 4'd3;
      4'b10_01: return 4'd2;
      4'b10_10: return 4'd4;
      4'b10_11: return 4'd6;
      4'b11_01: return 4'd3;
      4'b11_10: return 4'd6;
      4'b11_11: return 4'd9;
      default:  return 4'd0;
    endcase
  endfunction

  always_comb begin
    c  = cnt - 4'd1;
    q  = cnt + 4'd2;
    q2 = cnt - 4'd2;
    q3 = cnt - 4'd3;
    u  = cnt - 4'd7;
    s1_bf1_c1 = cnt[3];
    s1_bf2_c2 = c[2];
    s1_bf2_c1 = ~c[3];
    tw_sel    = tw_exp(q[1:0], {q[2], q[3]});
    s2_bf1_c1 = q2[1];
    s2_bf2_c2 = q3[0];
    s2_bf2_c1 = ~q3[1];
    out_k     = bitrev4(u);
    out_valid = (fill == 6'(LATENCY));
    unused_bits = ^{c[1:0], q2[3:2], q2[0], q3[3:2]};  // bits no unit needs
  end

endmodule
