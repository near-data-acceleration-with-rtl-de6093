// rank_state: bank and timing state table of one DRAM rank.
//
// Host and NDA commands reach the same rank, so both memory controllers must agree
// on which rows are open and when each command becomes legal. This table is kept
// once inside every NDA logic die (fed with the host commands it sees on the C/A
// bus and with its own NDA commands) and once in the host-side NDA controller (fed
// with the host's commands and with the commands of the replicated NDA sequencer),
// and both copies therefore evolve identically.
//
// Per bank it holds the open flag, the open row and three down-counters: cycles
// until the next ACT (tRC after ACT, tRP after PRE), until a PRE (tRAS after ACT,
// tRTP after RD, tCWL+tBL+tWR after WR) and until a column command (tRCD). Per rank
// it holds cycles until the next RD (tCCD after RD, tCWL+tBL+tWTR after WR), the
// next WR (tCCD after WR, tCL+tBL+tRTRS-tCWL after RD) and the next ACT (tRRD).
// A command issued in cycle t with constraint N makes the next command legal in
// cycle t+N. Bank groups, tFAW and refresh are not modelled: the same-bank-group
// values of tCCD, tWTR and tRRD apply to every pair of commands.
//
// Interface: cmd is the single command issued to this rank in the cycle (host and
// NDA never issue in the same cycle); st is the registered view. An assertion flags
// any command that the table says is illegal.
module rank_state
  import chopim_pkg::*;
#(
  parameter int tRCD = T_RCD,
  parameter int tRP  = T_RP,
  parameter int tRAS = T_RAS,
  parameter int tRC  = T_RC,
  parameter int tCL  = T_CL,
  parameter int tCWL = T_CWL,
  parameter int tBL  = T_BL,
  parameter int tCCD = T_CCD,
  parameter int tWTR = T_WTR,
  parameter int tWR  = T_WR,
  parameter int tRTP = T_RTP,
  parameter int tRRD = T_RRD,
  parameter int tRTRS = T_RTRS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  ddr_cmd_t   cmd,
  output rank_view_t st
);
  localparam int CW = 7;
  localparam int RD2WR = tCL + tBL + tRTRS - tCWL;
  localparam int WR2RD = tCWL + tBL + tWTR;
  localparam int WR2PRE = tCWL + tBL + tWR;

  logic [NBANKS-1:0]            open_q;
  logic [NBANKS-1:0][ROW_W-1:0] row_q;
  logic [NBANKS-1:0][CW-1:0]    act_c, pre_c, col_c;
  logic [CW-1:0]                rd_c, wr_c, rrd_c;

  function automatic logic [CW-1:0] dec(logic [CW-1:0] v);
    return (v == '0) ? v : v - 1'b1;
  endfunction

  // counter after this cycle, given a new constraint n (0 = none)
  function automatic logic [CW-1:0] upd(logic [CW-1:0] v, int n);
    logic [CW-1:0] a, b;
    a = dec(v);
    b = (n > 0) ? CW'(n - 1) : '0;
    return (b > a) ? b : a;
  endfunction

  logic [NBANKS-1:0]            hit;
  always_comb for (int b = 0; b < NBANKS; b++) hit[b] = (cmd.bank == BANK_W'(b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q <= '0;
      row_q  <= '0;
      act_c  <= '0;
      pre_c  <= '0;
      col_c  <= '0;
      rd_c   <= '0;
      wr_c   <= '0;
      rrd_c  <= '0;
    end else begin
      for (int b = 0; b < NBANKS; b++) begin
        act_c[b] <= upd(act_c[b], (hit[b] && cmd.cmd == CMD_ACT) ? tRC :
                                  (hit[b] && cmd.cmd == CMD_PRE) ? tRP : 0);
        pre_c[b] <= upd(pre_c[b], (hit[b] && cmd.cmd == CMD_ACT) ? tRAS :
                                  (hit[b] && cmd.cmd == CMD_RD)  ? tRTP :
                                  (hit[b] && cmd.cmd == CMD_WR)  ? WR2PRE : 0);
        col_c[b] <= upd(col_c[b], (hit[b] && cmd.cmd == CMD_ACT) ? tRCD : 0);
        if (hit[b] && cmd.cmd == CMD_ACT) begin
          open_q[b] <= 1'b1;
          row_q[b]  <= cmd.row;
        end else if (hit[b] && cmd.cmd == CMD_PRE) begin
          open_q[b] <= 1'b0;
        end
      end
      rd_c  <= upd(rd_c, (cmd.cmd == CMD_RD) ? tCCD : (cmd.cmd == CMD_WR) ? WR2RD : 0);
      wr_c  <= upd(wr_c, (cmd.cmd == CMD_WR) ? tCCD : (cmd.cmd == CMD_RD) ? RD2WR : 0);
      rrd_c <= upd(rrd_c, (cmd.cmd == CMD_ACT) ? tRRD : 0);
    end
  end

  always_comb begin
    st.open = open_q;
    st.row  = row_q;
    for (int b = 0; b < NBANKS; b++) begin
      st.act_ok[b] = !open_q[b] && (act_c[b] == '0) && (rrd_c == '0);
      st.pre_ok[b] =  open_q[b] && (pre_c[b] == '0);
      st.rd_ok[b]  =  open_q[b] && (col_c[b] == '0) && (rd_c == '0);
      st.wr_ok[b]  =  open_q[b] && (col_c[b] == '0) && (wr_c == '0);
    end
  end

  // DRAM protocol rules: every command must be legal in the current state.
  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd.cmd == CMD_ACT) |-> st.act_ok[cmd.bank]);
  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd.cmd == CMD_PRE) |-> st.pre_ok[cmd.bank]);
  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd.cmd == CMD_RD) |-> (st.rd_ok[cmd.bank] && st.row[cmd.bank] == cmd.row));
  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd.cmd == CMD_WR) |-> (st.wr_ok[cmd.bank] && st.row[cmd.bank] == cmd.row));
endmodule
