// tb_next_rank_predictor: random oldest-request streams; the inhibit pin of a rank
// must be set one cycle after the oldest host request is a read to that rank.
module tb_next_rank_predictor;
  logic clk = 0, rst_n = 0;
  logic oldest_valid = 0, oldest_is_read = 0;
  logic [1:0] oldest_rank = '0;
  logic [3:0] inhibit;
  logic [3:0] expd;
  int checks = 0, failures = 0, seen = 0;

  next_rank_predictor #(.NRANKS(4)) dut (.clk, .rst_n, .oldest_valid, .oldest_is_read,
                                          .oldest_rank, .inhibit);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); checks++; if (inhibit !== 4'b0) failures++;
    repeat (1000) begin
      @(negedge clk);
      oldest_valid = 1'($urandom); oldest_is_read = 1'($urandom); oldest_rank = 2'($urandom);
      expd = (oldest_valid && oldest_is_read) ? (4'b1 << oldest_rank) : 4'b0;
      @(negedge clk);
      checks++;
      if (inhibit !== expd) failures++;
      if (inhibit != 0) seen++;
    end
    checks++; if (seen < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
