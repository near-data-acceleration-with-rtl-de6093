// tb_rank_state: drives random legal DDR4 command streams into the rank table and
// compares every ready flag, open flag and open row each cycle with a reference
// computed from the issue times of past commands and the DDR4 timing rules.
module tb_rank_state;
  import chopim_pkg::*;
  logic clk = 0, rst_n = 0;
  ddr_cmd_t cmd;
  rank_view_t st;
  int checks = 0, failures = 0;
  longint now = 0;
  longint l_act[NBANKS], l_pre[NBANKS], l_rd[NBANKS], l_wr[NBANKS];
  longint r_act = -1000, r_rd = -1000, r_wr = -1000;
  logic   r_open[NBANKS];
  logic [ROW_W-1:0] r_row[NBANKS];
  int     n_issued[5];

  rank_state dut (.clk, .rst_n, .cmd, .st);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ok_act(int b);
    return !r_open[b] && now >= l_act[b] + T_RC && now >= l_pre[b] + T_RP && now >= r_act + T_RRD;
  endfunction
  function automatic bit ok_pre(int b);
    return r_open[b] && now >= l_act[b] + T_RAS && now >= l_rd[b] + T_RTP &&
           now >= l_wr[b] + T_CWL + T_BL + T_WR;
  endfunction
  function automatic bit ok_rd(int b);
    return r_open[b] && now >= l_act[b] + T_RCD && now >= r_rd + T_CCD &&
           now >= r_wr + T_CWL + T_BL + T_WTR;
  endfunction
  function automatic bit ok_wr(int b);
    return r_open[b] && now >= l_act[b] + T_RCD && now >= r_wr + T_CCD &&
           now >= r_rd + T_CL + T_BL + T_RTRS - T_CWL;
  endfunction

  initial begin
    for (int b = 0; b < NBANKS; b++) begin
      l_act[b] = -1000; l_pre[b] = -1000; l_rd[b] = -1000; l_wr[b] = -1000;
      r_open[b] = 0; r_row[b] = '0;
    end
    for (int i = 0; i < 5; i++) n_issued[i] = 0;
    cmd = '{cmd: CMD_NOP, bank: '0, row: '0, col: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (20000) begin
      @(negedge clk);
      // compare
      for (int b = 0; b < NBANKS; b++) begin
        checks++;
        if (st.act_ok[b] !== ok_act(b) || st.pre_ok[b] !== ok_pre(b) ||
            st.rd_ok[b] !== ok_rd(b) || st.wr_ok[b] !== ok_wr(b) ||
            st.open[b] !== r_open[b] || (r_open[b] && st.row[b] !== r_row[b])) begin
          failures++;
          if (failures < 5) $display("t=%0d bank %0d mismatch act %b/%b pre %b/%b rd %b/%b wr %b/%b",
            now, b, st.act_ok[b], ok_act(b), st.pre_ok[b], ok_pre(b), st.rd_ok[b], ok_rd(b),
            st.wr_ok[b], ok_wr(b));
        end
      end
      // pick a random legal command
      cmd = '{cmd: CMD_NOP, bank: '0, row: '0, col: '0};
      if ($urandom % 3 == 0) begin
        int b, k;
        b = int'($urandom % NBANKS);
        k = int'($urandom % 4);
        if (k == 0 && ok_act(b)) begin
          cmd = '{cmd: CMD_ACT, bank: 4'(b), row: 16'($urandom), col: '0};
          l_act[b] = now; r_act = now; r_open[b] = 1; r_row[b] = cmd.row;
        end else if (k == 1 && ok_pre(b)) begin
          cmd = '{cmd: CMD_PRE, bank: 4'(b), row: r_row[b], col: '0};
          l_pre[b] = now; r_open[b] = 0;
        end else if (k == 2 && ok_rd(b)) begin
          cmd = '{cmd: CMD_RD, bank: 4'(b), row: r_row[b], col: 7'($urandom)};
          l_rd[b] = now; r_rd = now;
        end else if (k == 3 && ok_wr(b)) begin
          cmd = '{cmd: CMD_WR, bank: 4'(b), row: r_row[b], col: 7'($urandom)};
          l_wr[b] = now; r_wr = now;
        end
        n_issued[int'(cmd.cmd)]++;
      end
      @(posedge clk);
      now++;
    end
    for (int i = 1; i < 5; i++) begin checks++; if (n_issued[i] < 50) failures++; end
    $display("issued ACT %0d PRE %0d RD %0d WR %0d", n_issued[1], n_issued[2], n_issued[3], n_issued[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
