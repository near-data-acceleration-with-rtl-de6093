// pe_sram: one 1KB memory of the NDA processing element, 128 entries of 8B.
//
// The PE has two of these: the buffer, which holds a 1KB batch of an operand or of
// results (it is also the 128-entry NDA write buffer drained by write phases), and
// the scratchpad, which keeps a vector of up to one batch across operations. Sizes
// follow the paper (1KB each, 8B access granularity); the port structure is this
// design's choice: one synchronous write port and one combinational read port, so a
// read-modify-write of one entry takes one cycle. A write and a read of the same
// entry in one cycle return the old contents.
module pe_sram #(
  parameter int DEPTH = 128,
  parameter int WIDTH = 64,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
