// tb_nda_mc: NDA memory controller (combinational). Random accesses against random
// rank states, host activity, throttling modes, inhibit pin and coin; the command,
// column-issue, coin-step, yield and throttle outputs are compared with a reference
// decision written from the rules: host first; row hit -> RD/WR when legal (writes
// subject to throttling); other row open -> PRE; bank closed -> ACT.
module tb_nda_mc;
  import chopim_pkg::*;
  nda_req_t req;
  rank_view_t st;
  logic host_busy, wr_inhibit, coin_pass, coin_step, col_issue, yield, throttled;
  thr_mode_e mode;
  ddr_cmd_t cmd;
  int checks = 0, failures = 0;
  int seen [5];

  nda_mc dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5; i++) seen[i] = 0;
    for (int it = 0; it < 50000; it++) begin
      ddr_cmd_e e_cmd;
      bit e_col, e_step, e_yield, e_thr, hit, ok;
      int b;
      req = '0;
      req.valid = ($urandom % 8 != 0);
      req.wr    = $urandom % 2;
      req.spm   = ($urandom % 8 == 0);
      req.bank  = 4'($urandom);
      req.row   = 16'($urandom % 4);
      req.col   = 7'($urandom);
      st.open   = 16'($urandom);
      for (int i = 0; i < NBANKS; i++) st.row[i] = 16'($urandom % 4);
      st.act_ok = 16'($urandom); st.pre_ok = 16'($urandom);
      st.rd_ok  = 16'($urandom); st.wr_ok  = 16'($urandom);
      host_busy = ($urandom % 4 == 0);
      wr_inhibit = $urandom % 2;
      coin_pass = $urandom % 2;
      mode = thr_mode_e'($urandom % 3);
      #1;
      b = int'(req.bank);
      e_cmd = CMD_NOP; e_col = 0; e_step = 0; e_yield = 0; e_thr = 0;
      hit = st.open[b] && st.row[b] == req.row;
      if (req.valid && !req.spm) begin
        if (host_busy) e_yield = 1;
        else if (hit) begin
          if (req.wr ? st.wr_ok[b] : st.rd_ok[b]) begin
            ok = 1;
            if (req.wr && mode == THR_STOCH) begin e_step = 1; ok = coin_pass; end
            if (req.wr && mode == THR_NRP) ok = !wr_inhibit;
            if (ok) begin e_cmd = req.wr ? CMD_WR : CMD_RD; e_col = 1; end
            else e_thr = 1;
          end
        end else if (st.open[b]) begin
          if (st.pre_ok[b]) e_cmd = CMD_PRE;
        end else if (st.act_ok[b]) e_cmd = CMD_ACT;
      end
      checks++;
      if (cmd.cmd !== e_cmd || col_issue !== e_col || coin_step !== e_step ||
          yield !== e_yield || throttled !== e_thr ||
          (e_cmd != CMD_NOP && (cmd.bank !== req.bank || cmd.row !== req.row || cmd.col !== req.col))) begin
        failures++;
        if (failures < 10) $display("cmd %s exp %s col %b/%b step %b/%b yield %b/%b thr %b/%b",
          cmd.cmd.name(), e_cmd.name(), col_issue, e_col, coin_step, e_step, yield, e_yield, throttled, e_thr);
      end
      seen[int'(e_cmd)]++;
    end
    for (int i = 0; i < 5; i++) begin checks++; if (seen[i] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
