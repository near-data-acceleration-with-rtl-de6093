// next_rank_predictor: next-rank prediction for NDA write throttling.
//
// NDA writes interleaved with host reads cost the host a write-to-read turnaround
// each time. The predictor looks at the oldest outstanding request in the host
// memory controller's transaction queue of the channel: if it is a read, the host
// is about to read that rank, so NDA writes to that rank are inhibited. One inhibit
// pin per rank carries the decision to the rank's NDAs (and to the host-side
// replica of their state machine). The rule follows the paper; the pin is
// registered once, so the decision of cycle t acts in cycle t+1 on both sides.
module next_rank_predictor #(
  parameter int NRANKS = 2,
  localparam int RW    = (NRANKS > 1) ? $clog2(NRANKS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              oldest_valid,
  input  logic              oldest_is_read,
  input  logic [RW-1:0]     oldest_rank,
  output logic [NRANKS-1:0] inhibit
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inhibit <= '0;
    end else begin
      for (int r = 0; r < NRANKS; r++)
        inhibit[r] <= oldest_valid && oldest_is_read && (oldest_rank == RW'(r));
    end
  end
endmodule
