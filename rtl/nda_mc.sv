// nda_mc: NDA memory controller of one rank.
//
// Turns the sequencer's current access into DRAM commands under an open-page
// policy: RD/WR when the access's row is open, PRE when another row is open, ACT
// when the bank is closed, each only when the rank state table says it is legal.
// Host requests always come first: the NDA issues nothing in a cycle in which the
// host uses the rank's C/A slot (host_busy), so it only fills the rank's idle
// cycles, and a host command can at any time close or replace the NDA's row.
//
// Write throttling (mode):
//   THR_NONE   writes issue whenever legal;
//   THR_STOCH  a write that could issue first flips a coin (stochastic_issue,
//              advanced through coin_step) and issues only if the coin passes;
//   THR_NRP    next-rank prediction: no write while the rank's inhibit pin is set
//              (the oldest host request of the channel is a read to this rank).
// Throttling acts on write commands only; reads and row commands are never held.
//
// Outputs: cmd (combinational, NOP when nothing issues), col_issue when the access
// itself (RD/WR) issued, and event pulses for statistics: yield (an access waited
// because of the host) and throttled (a legal write was held back).
module nda_mc
  import chopim_pkg::*;
(
  input  nda_req_t   req,
  input  rank_view_t st,
  input  logic       host_busy,
  input  logic       wr_inhibit,
  input  thr_mode_e  mode,
  input  logic       coin_pass,
  output logic       coin_step,
  output ddr_cmd_t   cmd,
  output logic       col_issue,
  output logic       yield,
  output logic       throttled
);
  logic b_open, b_hit, col_legal, thr_ok;

  always_comb begin
    cmd       = '{cmd: CMD_NOP, bank: req.bank, row: req.row, col: req.col};
    col_issue = 1'b0;
    coin_step = 1'b0;
    yield     = 1'b0;
    throttled = 1'b0;
    b_open    = st.open[req.bank];
    b_hit     = b_open && (st.row[req.bank] == req.row);
    col_legal = req.wr ? st.wr_ok[req.bank] : st.rd_ok[req.bank];
    thr_ok    = 1'b1;
    if (req.valid && !req.spm) begin
      if (host_busy) begin
        yield = 1'b1;
      end else if (b_hit) begin
        if (col_legal) begin
          if (req.wr) begin
            unique case (mode)
              THR_STOCH: begin coin_step = 1'b1; thr_ok = coin_pass; end
              THR_NRP:   thr_ok = !wr_inhibit;
              default:   thr_ok = 1'b1;
            endcase
          end
          if (thr_ok) begin
            cmd.cmd   = req.wr ? CMD_WR : CMD_RD;
            col_issue = 1'b1;
          end else begin
            throttled = 1'b1;
          end
        end
      end else if (b_open) begin
        if (st.pre_ok[req.bank]) cmd.cmd = CMD_PRE;
      end else begin
        if (st.act_ok[req.bank]) cmd.cmd = CMD_ACT;
      end
    end
  end
endmodule
