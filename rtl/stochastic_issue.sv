// stochastic_issue: the coin used by stochastic NDA write issue.
//
// Before an NDA issues a write to an idle rank it flips a coin and issues only on
// heads; the coin weight trades host performance against NDA progress. The paper
// evaluates weights 1/4 and 1/16. Here the coin is a 16-bit Galois LFSR
// (x^16 + x^14 + x^13 + x^11 + 1) with a fixed seed: heads when its K low bits are
// all zero, which has probability 2^-K (K = log2_inv_p, 0 = always issue). The LFSR
// only advances on `step`, i.e. each time a coin is consumed, so the copy in the
// host-side replica draws exactly the same sequence as the one on the logic die.
// The random source and the power-of-two weights are this design's choices.
module stochastic_issue #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       step,
  input  logic [2:0] log2_inv_p,
  output logic       pass
);
  logic [15:0] lfsr;
  logic [7:0]  mask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    lfsr <= SEED;
    else if (step) lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
  end

  assign mask = 8'((9'd1 << log2_inv_p) - 9'd1);
  assign pass = ((lfsr[7:0] & mask) == 8'd0);
endmodule
