// tb_stochastic_issue: the coin must pass with probability 2^-K (checked on 20000
// flips for K = 0, 2, 4 within a few standard deviations), must not advance without
// `step`, and two copies with the same seed must draw identical sequences.
module tb_stochastic_issue;
  logic clk = 0, rst_n = 0, step = 0;
  logic [2:0] k = 3'd2;
  logic pass_a, pass_b;
  int checks = 0, failures = 0;

  stochastic_issue dut (.clk, .rst_n, .step, .log2_inv_p(k), .pass(pass_a));
  stochastic_issue twin (.clk, .rst_n, .step, .log2_inv_p(k), .pass(pass_b));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(int kk, int lo, int hi);
    int n;
    n = 0;
    k = 3'(kk);
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk); step = 1;
      if (pass_a) n++;
      checks++; if (pass_a !== pass_b) failures++;
    end
    @(negedge clk); step = 0;
    checks++;
    if (n < lo || n > hi) begin failures++; $display("K=%0d passes=%0d", kk, n); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    measure(0, 20000, 20000);
    measure(2, 4700, 5300);     // 1/4
    measure(4, 1100, 1400);     // 1/16
    // no step: the coin holds
    begin
      logic [15:0] snap;
      snap = dut.lfsr;
      repeat (20) @(negedge clk);
      checks++; if (dut.lfsr !== snap) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
