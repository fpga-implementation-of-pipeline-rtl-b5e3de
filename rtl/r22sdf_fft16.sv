// r22sdf_fft16 -- 16-point radix-2^2 decimation-in-frequency single-path
// delay-feedback FFT whose twiddle multiplier is a pipelined digit-slicing
// multiplier-less complex multiplier (paper Fig. 13).
//
// Datapath (as in the paper):
//   x -> Butterfly I (8) -> Butterfly II with -j (4) -> twiddle multiplier
//     -> Butterfly I (2) -> Butterfly II with -j (1) -> X
// The twiddle multiplier (ds_cmult) replaces the conventional multiplier of
// Fig. 3: no hardware multiplier is used, products come from lookup tables.
// Every butterfly halves its result, so the output is X[k]/16.
//
// Interface: one complex 16-bit sample x per clock, continuously, starting
// on the first clock after rst_n is released (the n-th sample of each frame
// enters 16*f + n clocks later).  The results leave in bit-reversed order,
// one per clock, each tagged with its frequency index out_k; out_valid is
// high from the first result on.  Latency 23 clocks from x[0] to X[0]
// (15 clocks of the SDF structure, 4 butterfly output registers, 4 clocks of
// the multiplier).  Samples should satisfy |x| < 1; beyond that the
// multiplier saturates.
module r22sdf_fft16
  import fft_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  cplx_t            x,
  output cplx_t            y,
  output logic             out_valid,
  output logic [LOG2N-1:0] out_k
);

  logic             s1_bf1_c1, s1_bf2_c1, s1_bf2_c2;
  logic             s2_bf1_c1, s2_bf2_c1, s2_bf2_c2;
  logic [LOG2N-1:0] tw_sel;
  cplx_t            s1_b, s1_e, tw_p, s2_b;

  fft_ctrl u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .s1_bf1_c1(s1_bf1_c1),
    .s1_bf2_c1(s1_bf2_c1),
    .s1_bf2_c2(s1_bf2_c2),
    .tw_sel   (tw_sel),
    .s2_bf1_c1(s2_bf1_c1),
    .s2_bf2_c1(s2_bf2_c1),
    .s2_bf2_c2(s2_bf2_c2),
    .out_valid(out_valid),
    .out_k    (out_k)
  );

  bf1 #(.L(8)) u_s1_bf1 (.clk(clk), .rst_n(rst_n), .c1(s1_bf1_c1), .a(x), .b(s1_b));

  bf2 #(.L(4)) u_s1_bf2 (.clk(clk), .rst_n(rst_n), .c1(s1_bf2_c1), .c2(s1_bf2_c2),
                         .a(s1_b), .b(s1_e));

  ds_cmult #(.NSEL(N)) u_twiddle (.clk(clk), .rst_n(rst_n), .e(s1_e), .sel(tw_sel), .p(tw_p));

  bf1 #(.L(2)) u_s2_bf1 (.clk(clk), .rst_n(rst_n), .c1(s2_bf1_c1), .a(tw_p), .b(s2_b));

  bf2 #(.L(1)) u_s2_bf2 (.clk(clk), .rst_n(rst_n), .c1(s2_bf2_c1), .c2(s2_bf2_c2),
                         .a(s2_b), .b(y));

endmodule
