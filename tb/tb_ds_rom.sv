// tb_ds_rom -- checks every entry of the product tables.  The constants are
// recomputed here from cos/sin in double precision rounded to Q15 (1.0 as
// 32768): Wr = cos(2*pi*e/16), Wi = -sin(2*pi*e/16).  Ports 0..2 must return
// K*d for d = 0..15, port 3 (the sign digit) K*d for d = -8..7, one clock
// after the address.  Two constant kinds are tested: Wr and Wr + Wi.
module tb_ds_rom;
  import fft_pkg::*;

  logic                clk = 1'b0;
  logic [3:0]          sel;
  logic [DIGIT_W-1:0]  digit [4];
  logic signed [20:0]  p_wr [4];
  logic signed [20:0]  p_sum [4];
  int checks = 0, failures = 0;

  ds_rom                               dut_wr  (.clk(clk), .sel(sel), .digit(digit), .prod(p_wr));
  ds_rom #(.KIND(K_WR_PLUS_WI))        dut_sum (.clk(clk), .sel(sel), .digit(digit), .prod(p_sum));

  always #5 clk = ~clk;

  function automatic int q15(input real v);
    return int'($floor(v * 32768.0 + 0.5));
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    sel = '0;
    foreach (digit[k]) digit[k] = '0;
    for (int e = 0; e < 16; e++) begin
      for (int d = 0; d < 16; d++) begin
        automatic real th = 2.0 * 3.14159265358979 * e / 16.0;
        automatic int wr = q15($cos(th));
        automatic int wi = q15(-$sin(th));
        automatic int ds = (d >= 8) ? d - 16 : d;
        sel = 4'(e);
        foreach (digit[k]) digit[k] = 4'(d);
        @(posedge clk);
        #1;
        for (int k = 0; k < 3; k++) begin
          check(int'(p_wr[k])  == wr * d,        $sformatf("Wr e=%0d d=%0d port %0d: %0d", e, d, k, p_wr[k]));
          check(int'(p_sum[k]) == (wr + wi) * d, $sformatf("Wr+Wi e=%0d d=%0d port %0d", e, d, k));
        end
        check(int'(p_wr[3])  == wr * ds,        $sformatf("Wr e=%0d sign digit %0d: %0d", e, ds, p_wr[3]));
        check(int'(p_sum[3]) == (wr + wi) * ds, $sformatf("Wr+Wi e=%0d sign digit %0d", e, ds));
      end
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
