// nda_sched: the replicated NDA state machine of one rank.
//
// Bundles the microcode sequencer (nda_fsm), the NDA memory controller (nda_mc),
// the rank's bank/timing table (rank_state) and the write-issue coin
// (stochastic_issue). The very same module runs on the logic die of every chip of
// the rank and, as a replica, in the host-side NDA controller. Both copies start
// from reset together, receive each launch in the same cycle and see the same host
// commands and the same inhibit pin, and nothing else: NDA accesses depend only on
// the operation, not on data. So both issue the same NDA commands in the same
// cycles, and the host memory controller learns every NDA command from its replica
// without any signal from the NDAs.
//
// host_cmd is the host's command to this rank in the cycle (CMD_NOP if none); a
// launch also occupies the rank's C/A slot. The table sees host_cmd or the NDA's
// command (never both). st is the table's view, used by the host scheduler.
// Access completion: a DRAM access is done when its RD/WR issues; a scratchpad
// access is done in the cycle it is presented.
module nda_sched
  import chopim_pkg::*;
#(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  ddr_cmd_t   host_cmd,
  input  logic       launch,
  input  nda_pkt_t   pkt,
  input  logic       wr_inhibit,
  input  thr_mode_e  mode,
  input  logic [2:0] log2_inv_p,
  output ddr_cmd_t   nda_cmd,
  output nda_req_t   req,
  output logic       col_issue,
  output logic       spm_fire,
  output rank_view_t st,
  output logic       busy,
  output logic       in_write,
  output logic       done,
  output logic       err,
  output logic       yield,
  output logic       throttled
);
  logic     req_done, coin_step, coin_pass, host_busy;
  ddr_cmd_t mc_cmd, table_cmd;

  nda_fsm u_fsm (
    .clk, .rst_n, .launch, .pkt, .req, .req_done, .busy, .in_write, .done, .err
  );

  assign host_busy = (host_cmd.cmd != CMD_NOP) || launch;

  nda_mc u_mc (
    .req, .st, .host_busy, .wr_inhibit, .mode, .coin_pass, .coin_step,
    .cmd(mc_cmd), .col_issue, .yield, .throttled
  );

  stochastic_issue #(.SEED(SEED)) u_coin (
    .clk, .rst_n, .step(coin_step), .log2_inv_p, .pass(coin_pass)
  );

  assign spm_fire  = req.valid && req.spm;
  assign req_done  = col_issue || spm_fire;
  assign nda_cmd   = mc_cmd;
  assign table_cmd = (host_cmd.cmd != CMD_NOP) ? host_cmd : mc_cmd;

  rank_state u_state (.clk, .rst_n, .cmd(table_cmd), .st);

  assert property (@(posedge clk) disable iff (!rst_n)
    !((host_cmd.cmd != CMD_NOP) && (mc_cmd.cmd != CMD_NOP)));
endmodule
