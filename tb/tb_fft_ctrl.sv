// tb_fft_ctrl -- checks the control sequence against the 16-point schedule,
// with t the number of clocks since reset was released:
//   first Butterfly I c1 high for t mod 16 in 8..15;
//   twiddle exponents, starting at t = 14, repeat the order of the paper's
//   signal flow graph: 0 0 0 0 | 0 2 4 6 | 0 1 2 3 | 0 3 6 9;
//   out_valid rises at t = 23 and out_k then runs 0 8 4 12 2 10 6 14 1 ...;
//   the -j swaps (c1 & c2 of each Butterfly II) fall on 4 of every 16 clocks
//   for the first Butterfly II and on 4 of every 16 (one per group of 4) for
//   the second.
module tb_fft_ctrl;
  import fft_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic s1_bf1_c1, s1_bf2_c1, s1_bf2_c2, s2_bf1_c1, s2_bf2_c1, s2_bf2_c2, out_valid;
  logic [3:0] tw_sel, out_k;
  int checks = 0, failures = 0;

  localparam int TW_ORDER [16] = '{0,0,0,0, 0,2,4,6, 0,1,2,3, 0,3,6,9};
  localparam int BR_ORDER [16] = '{0,8,4,12, 2,10,6,14, 1,9,5,13, 3,11,7,15};

  fft_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int sw1, sw2;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      check(s1_bf1_c1 == ((t % 16) >= 8), $sformatf("stage-1 c1 at %0d", t));
      if (t >= 14) check(int'(tw_sel) == TW_ORDER[(t - 14) % 16], $sformatf("twiddle at %0d: %0d", t, tw_sel));
      check(out_valid == (t >= 23), $sformatf("out_valid at %0d", t));
      if (t >= 23) check(int'(out_k) == BR_ORDER[(t - 23) % 16], $sformatf("out_k at %0d", t));
      if (t >= 16 && t % 16 == 0) begin
        check(sw1 == 4 && sw2 == 4, $sformatf("swaps per frame %0d %0d", sw1, sw2));
      end
      if (t % 16 == 0) begin sw1 = 0; sw2 = 0; end
      sw1 += (s1_bf2_c1 && s1_bf2_c2) ? 1 : 0;
      sw2 += (s2_bf2_c1 && s2_bf2_c2) ? 1 : 0;
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
