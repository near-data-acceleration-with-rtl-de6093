// nda_chip: logic die of one 3D-stacked DRAM chip with its near-data accelerator.
//
// Holds the rank's replicated state machine (nda_sched: sequencer, NDA memory
// controller, rank state table, coin) and the processing element (pe). The host's
// commands pass by on the C/A bus and update the local rank table; in the rank's
// idle cycles the NDA issues its own commands to the DRAM dice of this chip on
// dram_cmd. All chips of a rank run the same sequence in lock-step, each on its own
// 8B slice of every operand.
//
// Data path: an NDA read returns its 8B beat on dram_rdata exactly tCL cycles after
// the RD command; a tCL-deep pipeline carries the beat's PE action, scalar select
// and buffer index to meet it. Scratchpad reads go to the PE in the cycle they are
// sequenced. For an NDA write, the buffer entry is driven on dram_wdata together
// with the WR command (the dice apply it; the tCWL data delay is accounted for in
// the rank table). A scratchpad write copies the buffer entry into the scratchpad;
// a GEMV flush access moves the accumulators into the scratchpad entry it names.
// acc holds the two lane accumulators of DOT/NRM2 for the host to read.
module nda_chip
  import chopim_pkg::*;
#(
  parameter logic [15:0] SEED = 16'hACE1,
  parameter int          RL   = T_CL
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ddr_cmd_t          host_cmd,
  input  logic              launch,
  input  nda_pkt_t          pkt,
  input  logic              wr_inhibit,
  input  thr_mode_e         mode,
  input  logic [2:0]        log2_inv_p,
  output ddr_cmd_t          dram_cmd,
  output logic [BEAT_W-1:0] dram_wdata,
  input  logic              dram_rvalid,
  input  logic [BEAT_W-1:0] dram_rdata,
  output logic              busy,
  output logic              done,
  output logic              err,
  output logic [1:0][31:0]  acc
);
  typedef struct packed {
    logic       v;
    pe_act_e    act;
    logic [1:0] ssel;
    logic [6:0] idx;
  } rtag_t;

  nda_req_t   req;
  logic       col_issue, spm_fire, in_write, yield, throttled;
  rank_view_t st;
  rtag_t      rpipe [RL];
  rtag_t      rhead;
  logic       beat_valid, beat_spm;
  pe_act_e    beat_act;
  logic [1:0] beat_ssel;
  logic [6:0] beat_idx, out_idx;
  logic       out_spm_we, acc_flush;

  nda_sched #(.SEED(SEED)) u_sched (
    .clk, .rst_n, .host_cmd, .launch, .pkt, .wr_inhibit, .mode, .log2_inv_p,
    .nda_cmd(dram_cmd), .req, .col_issue, .spm_fire, .st, .busy, .in_write,
    .done, .err, .yield, .throttled
  );

  // read-return tag pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < RL; i++) rpipe[i] <= '0;
    end else begin
      rpipe[0] <= '{v: col_issue && !req.wr, act: req.act, ssel: req.ssel, idx: req.idx};
      for (int i = 1; i < RL; i++) rpipe[i] <= rpipe[i-1];
    end
  end
  // tag of a read issued RL cycles ago, whose data is on dram_rdata now
  assign rhead = rpipe[RL-1];

  always_comb begin
    if (spm_fire && !req.wr) begin
      beat_valid = 1'b1;  beat_spm = 1'b1;
      beat_act = req.act; beat_ssel = req.ssel; beat_idx = req.idx;
    end else begin
      beat_valid = rhead.v; beat_spm = 1'b0;
      beat_act = rhead.act; beat_ssel = rhead.ssel; beat_idx = rhead.idx;
    end
    out_idx    = req.idx;
    out_spm_we = spm_fire && req.wr && !req.flush;
    acc_flush  = spm_fire && req.flush;
  end

  pe u_pe (
    .clk, .rst_n, .start(launch), .scalar_in(pkt.scalar),
    .beat_valid, .beat_act, .beat_ssel, .beat_idx, .beat_spm, .beat_data(dram_rdata),
    .out_idx, .out_spm_we, .acc_flush, .wr_data(dram_wdata), .acc
  );

  // the dice return data exactly when the tag pipeline expects it
  assert property (@(posedge clk) disable iff (!rst_n) rhead.v == dram_rvalid);
  // a scratchpad beat never collides with returning DRAM data
  assert property (@(posedge clk) disable iff (!rst_n) !(rhead.v && spm_fire));
endmodule
