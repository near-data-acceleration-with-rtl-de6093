// tb_pe_sram: writes random data to every entry of the 1KB PE memory, reads it
// back through the combinational port and checks read-before-write behaviour.
module tb_pe_sram;
  logic clk = 0, we = 0;
  logic [6:0] waddr = '0, raddr = '0;
  logic [63:0] wdata = '0, rdata;
  logic [63:0] ref_m [128];
  int checks = 0, failures = 0;

  pe_sram dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); we = 1; waddr = 7'(i); wdata = {$urandom, $urandom}; ref_m[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 128; i++) begin
      raddr = 7'(127 - i); #1;
      checks++; if (rdata !== ref_m[127 - i]) failures++;
    end
    // same-cycle write and read of one entry: old data until the edge
    @(negedge clk); we = 1; waddr = 7'd9; raddr = 7'd9; wdata = 64'hDEAD_BEEF_0123_4567; #1;
    checks++; if (rdata !== ref_m[9]) failures++;
    @(negedge clk); we = 0; #1;
    checks++; if (rdata !== 64'hDEAD_BEEF_0123_4567) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
