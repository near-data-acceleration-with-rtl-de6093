// tb_nda_sched: replicated NDA state machine of one rank, with a random host that
// issues legal commands from the rank table. Every command on the rank (host or
// NDA) is checked against an independent DDR4 timing model kept from issue times;
// NDA column commands must target the access the sequencer presents; host and NDA
// never share a cycle; the NDA issues nothing in a launch cycle; every operation
// finishes. Runs in all three throttling modes and counts yields and held writes.
module tb_nda_sched;
  import chopim_pkg::*;
  logic clk = 0, rst_n = 0, launch = 0, wr_inhibit = 0;
  ddr_cmd_t host_cmd, nda_cmd;
  nda_pkt_t pkt;
  thr_mode_e mode = THR_NONE;
  logic [2:0] log2_inv_p = 3'd1;
  nda_req_t req;
  logic col_issue, spm_fire, busy, in_write, done, err, yield, throttled;
  rank_view_t st;
  int checks = 0, failures = 0, n_yield = 0, n_thr = 0, n_nda = 0, n_host = 0, n_ops = 0;

  nda_sched dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // independent timing model
  longint now = 0;
  longint l_act[NBANKS], l_pre[NBANKS], l_rd[NBANKS], l_wr[NBANKS];
  longint r_act = -1000, r_rd = -1000, r_wr = -1000;
  bit     o[NBANKS];
  logic [ROW_W-1:0] orow[NBANKS];
  initial for (int b = 0; b < NBANKS; b++) begin
    l_act[b] = -1000; l_pre[b] = -1000; l_rd[b] = -1000; l_wr[b] = -1000; o[b] = 0; orow[b] = '0;
  end

  function automatic bit legal(ddr_cmd_t c);
    int b;
    b = int'(c.bank);
    case (c.cmd)
      CMD_ACT: return !o[b] && now >= l_act[b] + T_RC && now >= l_pre[b] + T_RP && now >= r_act + T_RRD;
      CMD_PRE: return o[b] && now >= l_act[b] + T_RAS && now >= l_rd[b] + T_RTP &&
                      now >= l_wr[b] + T_CWL + T_BL + T_WR;
      CMD_RD:  return o[b] && orow[b] == c.row && now >= l_act[b] + T_RCD && now >= r_rd + T_CCD &&
                      now >= r_wr + T_CWL + T_BL + T_WTR;
      CMD_WR:  return o[b] && orow[b] == c.row && now >= l_act[b] + T_RCD && now >= r_wr + T_CCD &&
                      now >= r_rd + T_CL + T_BL + T_RTRS - T_CWL;
      default: return 1;
    endcase
  endfunction

  always @(posedge clk) if (rst_n) begin
    ddr_cmd_t c;
    int b;
    c = (host_cmd.cmd != CMD_NOP) ? host_cmd : nda_cmd;
    b = int'(c.bank);
    checks++;
    if (host_cmd.cmd != CMD_NOP && nda_cmd.cmd != CMD_NOP) begin failures++; $display("collision"); end
    if (launch && nda_cmd.cmd != CMD_NOP) begin failures++; $display("NDA command in launch cycle"); end
    if (!legal(c)) begin failures++; $display("t=%0d illegal %s bank %0d", now, c.cmd.name(), b); end
    if (nda_cmd.cmd inside {CMD_RD, CMD_WR}) begin
      checks++;
      if (!col_issue || nda_cmd.bank !== req.bank || nda_cmd.row !== req.row ||
          nda_cmd.col !== req.col || (nda_cmd.cmd == CMD_WR) !== req.wr) begin
        failures++; $display("column command does not match the access");
      end
    end
    case (c.cmd)
      CMD_ACT: begin l_act[b] = now; r_act = now; o[b] = 1; orow[b] = c.row; end
      CMD_PRE: begin l_pre[b] = now; o[b] = 0; end
      CMD_RD:  begin l_rd[b] = now; r_rd = now; end
      CMD_WR:  begin l_wr[b] = now; r_wr = now; end
      default: ;
    endcase
    if (nda_cmd.cmd != CMD_NOP) n_nda++;
    if (host_cmd.cmd != CMD_NOP) n_host++;
    if (yield) n_yield++;
    if (throttled) n_thr++;
    if (done) n_ops++;
    now++;
  end

  // random host
  always @(negedge clk) begin
    int b;
    host_cmd = '{cmd: CMD_NOP, bank: '0, row: '0, col: '0};
    wr_inhibit = $urandom % 2;
    b = int'($urandom % NBANKS);
    if (rst_n && !launch && $urandom % 4 == 0) begin
      if (st.open[b]) begin
        if ($urandom % 3 == 0 && st.pre_ok[b]) host_cmd = '{CMD_PRE, 4'(b), st.row[b], '0};
        else if (st.rd_ok[b]) host_cmd = '{CMD_RD, 4'(b), st.row[b], 7'($urandom)};
        else if (st.wr_ok[b]) host_cmd = '{CMD_WR, 4'(b), st.row[b], 7'($urandom)};
      end else if (st.act_ok[b]) host_cmd = '{CMD_ACT, 4'(b), 16'($urandom % 8), '0};
    end
  end

  initial begin
    nda_pkt_t p;
    int launched = 0;
    pkt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 24; it++) begin
      mode = thr_mode_e'(it % 3);
      p = '0;
      p.op = nda_op_e'($urandom % NUM_OPS);
      p.nbeats = LEN_W'(1 + $urandom % 300);
      p.nrows  = 8'(1 + $urandom % 3);
      for (int k = 0; k < 4; k++) begin
        p.base[k] = '{bank: 4'($urandom), row: 16'($urandom % 8), col: 7'($urandom)};
        p.bound[k] = 16'hFFFF;
      end
      @(negedge clk);
      while (host_cmd.cmd != CMD_NOP) @(negedge clk);
      pkt = p; launch = 1;
      @(negedge clk);
      launch = 0;
      launched++;
      while (busy) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks += 3;
    if (n_ops != launched) begin failures++; $display("ops %0d of %0d", n_ops, launched); end
    if (n_yield == 0) failures++;
    if (n_thr == 0) failures++;
    $display("host %0d NDA %0d commands, yields %0d, held writes %0d", n_host, n_nda, n_yield, n_thr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
