// tb_ds_mult -- checks the digit-slicing multiplier-less multiplier against
// an ordinary product: y = floor(K * x / 2^15), two clocks after x, one
// operand per clock.  K is recomputed from cos/sin (Q15, 1.0 = 32768).
// Instance a: the paper's 16-bit word (four digits), K = Wr.
// Instance b: a 17-bit word (five digits), K = Wi, as the complex multiplier
// uses it.  Also reproduces the worked example of the paper's multiplier
// figure: 0.57 * 0.7071 (Wr of W^2) = 0.4031.
module tb_ds_mult;
  import fft_pkg::*;

  logic               clk = 1'b0, rst_n = 1'b0;
  logic signed [15:0] xa;
  logic signed [16:0] xb;
  logic [3:0]         sel;
  logic signed [15:0] ya;
  logic signed [17:0] yb;
  int checks = 0, failures = 0;
  int exp_a [$], exp_b [$];

  ds_mult dut_a (.clk(clk), .rst_n(rst_n), .x(xa), .sel(sel), .y(ya));
  ds_mult #(.KIND(K_WI), .DATA_W(17), .OUT_W(18))
          dut_b (.clk(clk), .rst_n(rst_n), .x(xb), .sel(sel), .y(yb));

  always #5 clk = ~clk;

  function automatic longint q15(input real v);
    return longint'($floor(v * 32768.0 + 0.5));
  endfunction

  function automatic longint floor_div15(input longint p);
    return (p >= 0) ? p / 32768 : -((-p + 32767) / 32768);
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    xa = '0; xb = '0; sel = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      automatic int e = int'($urandom_range(15));
      automatic real th = 2.0 * 3.14159265358979 * e / 16.0;
      automatic int a, b;
      if (t == 0)      begin a = 18678; e = 2; th = 2.0 * 3.14159265358979 * 2 / 16.0; end // 0.57
      else if (t == 1) a = -32768;
      else if (t == 2) a = 32767;
      else             a = int'($urandom_range(65535)) - 32768;
      b = (t == 3) ? -65536 : (t == 4) ? 65535 : int'($urandom_range(131071)) - 65536;
      xa = 16'(a); xb = 17'(b); sel = 4'(e);
      exp_a.push_back(int'(floor_div15(q15($cos(th)) * a)));
      exp_b.push_back(int'(floor_div15(q15(-$sin(th)) * b)));
      @(posedge clk);
      #1;
      if (t >= 1) begin
        automatic int ea = exp_a.pop_front();
        automatic int eb = exp_b.pop_front();
        check(int'(ya) == ea, $sformatf("16-bit: got %0d expected %0d", ya, ea));
        check(int'(yb) == eb, $sformatf("17-bit: got %0d expected %0d", yb, eb));
        if (t == 1) check(ya > 0 && ($itor(ya) / 32768.0 - 0.4031 < 0.0001) &&
                          (0.4031 - $itor(ya) / 32768.0 < 0.0001), "paper example 0.57*0.7071");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
