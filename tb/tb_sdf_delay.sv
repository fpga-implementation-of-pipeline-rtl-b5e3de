// tb_sdf_delay -- checks the feedback register chain: zero after reset and
// q(t) = d(t - L) for random words, at L = 8 (first stage of the FFT) and
// L = 1 (last stage).
module tb_sdf_delay;
  import fft_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  cplx_t d;
  cplx_t q8, q1;
  cplx_t hist [$];
  int checks = 0, failures = 0;

  sdf_delay           dut8 (.clk(clk), .rst_n(rst_n), .d(d), .q(q8));
  sdf_delay #(.L(1))  dut1 (.clk(clk), .rst_n(rst_n), .d(d), .q(q1));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    d = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(q8 == '0 && q1 == '0, "reset value");
    for (int t = 0; t < 200; t++) begin
      d = '{re: word_t'($urandom), im: word_t'($urandom)};
      hist.push_back(d);
      @(posedge clk);
      #1;
      // hist[t] entered at this edge; q1 shows it, q8 shows hist[t-7]
      check(q1 == hist[t], $sformatf("L=1 at %0d", t));
      if (t >= 7) check(q8 == hist[t-7], $sformatf("L=8 at %0d", t));
      else        check(q8 == '0, $sformatf("L=8 fill at %0d", t));
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
