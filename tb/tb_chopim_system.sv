// tb_chopim_system: end-to-end test of the whole memory system at its default size
// (2 channels x 2 ranks x 8 chips, one reserved NDA bank per rank).
//
// The testbench plays the parts that are not RTL: the software that posts NDA
// operations, the host memory controller of each channel (a queue of host requests
// served in order, issuing PRE/ACT/RD/WR whenever the rank table allows, with
// priority over NDA launches), and the DRAM dice of every chip (sparse storage,
// read data tCL after the command). Host requests come from random physical
// addresses translated by the system's address mapper.
//
// Four phases run back to back: (1) no throttling, bank partitioning on, host reads
// and writes; (2) stochastic write issue; (3) next-rank prediction; (4) bank
// partitioning off with host reads only, so the host hits the NDA bank and closes
// NDA rows. In each phase every rank gets several queued operations of random type
// and length, a scratchpad round trip, a GEMV whose row results are copied out of
// the scratchpad, and one operation with a bound violation; every result
// is checked on every chip when the rank reports done. Each cycle, the NDA command
// every chip issues must equal the one the host-side replica predicts.
// Mechanisms counted (a failure if one never happens): NDA yields to the host,
// stochastically held writes, writes held by the inhibit pin, host closing an NDA
// row, operations queued behind a busy rank, launches alternating between ranks,
// bank-partition remaps, scratchpad accesses, GEMV row flushes, rejected operations, NDA commands
// issued in idle rank cycles while the host has requests outstanding.
module tb_chopim_system;
  import chopim_pkg::*;
  import fp_ref_pkg::*;
  import nda_ref_pkg::*;

  localparam int NCH = 2, NRANKS = 2, NCHIPS = 8;

  logic clk = 0, rst_n = 0;
  thr_mode_e  mode = THR_NONE;
  logic [2:0] log2_inv_p = 3'd2;
  logic       bp_en = 1;
  logic [34:0] map_pa;
  logic        map_ch, map_rank, map_shared;
  logic [BANK_W-1:0] map_bank;
  logic [ROW_W-1:0]  map_row;
  logic [COL_W-1:0]  map_col;
  logic     [NCH-1:0]       req_valid, req_ready;
  logic     [NCH-1:0][1:0]  req_rank;
  nda_pkt_t [NCH-1:0]       req_pkt;
  host_cmd_t [NCH-1:0]      host_cmd;
  logic      [NCH-1:0]      launch_valid, launch_grant, oldest_valid, oldest_is_read;
  logic      [NCH-1:0][1:0] oldest_rank;
  rank_view_t [NCH-1:0][NRANKS-1:0] rank_st;
  ddr_cmd_t   [NCH-1:0][NRANKS-1:0] replica_cmd;
  logic       [NCH-1:0][NRANKS-1:0] nda_busy, nda_done, nda_err, nda_yield, nda_throttled,
                                    nda_in_write, wr_inhibit;
  ddr_cmd_t   [NCH-1:0][NRANKS-1:0][NCHIPS-1:0]             nda_dram_cmd;
  logic       [NCH-1:0][NRANKS-1:0][NCHIPS-1:0][BEAT_W-1:0] nda_dram_wdata, nda_dram_rdata;
  logic       [NCH-1:0][NRANKS-1:0][NCHIPS-1:0]             nda_dram_rvalid, chip_busy;
  logic       [NCH-1:0][NRANKS-1:0][NCHIPS-1:0][1:0][31:0]  pe_acc;

  chopim_system dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_yield = 0, n_stoch = 0, n_nrp = 0, n_conflict = 0, n_queued = 0, n_rr = 0,
      n_remap = 0, n_spm = 0, n_err = 0, n_concurrent = 0, n_host = 0, n_nda_cmd = 0,
      n_ops = 0, n_gemv = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- DRAM dice
  logic [63:0] dmem [bit [31:0]];
  logic [ROW_W-1:0] open_row [NCH][NRANKS][NBANKS];

  function automatic bit [31:0] dkey(int c, int r, int k, dram_loc_t l);
    return {1'(c), 1'(r), 3'(k), l.bank, l.row, l.col};
  endfunction
  function automatic logic [63:0] dpeek(int c, int r, int k, dram_loc_t l);
    if (dmem.exists(dkey(c, r, k, l))) return dmem[dkey(c, r, k, l)];
    return '0;
  endfunction

  logic [63:0] host_wdata;

  for (genvar c = 0; c < NCH; c++) begin : g_c
    for (genvar r = 0; r < NRANKS; r++) begin : g_r
      ddr_cmd_t mc;
      logic     from_nda;
      assign from_nda = !(host_cmd[c].c.cmd != CMD_NOP && host_cmd[c].rank == 2'(r));
      assign mc = from_nda ? nda_dram_cmd[c][r][0] : host_cmd[c].c;
      initial for (int b = 0; b < NBANKS; b++) open_row[c][r][b] = '0;
      always @(posedge clk) if (mc.cmd == CMD_ACT) open_row[c][r][mc.bank] = mc.row;
      for (genvar k = 0; k < NCHIPS; k++) begin : g_k
        logic        vp [T_CL];
        logic [63:0] dp [T_CL];
        initial for (int i = 0; i < T_CL; i++) begin vp[i] = 0; dp[i] = '0; end
        always @(posedge clk) begin
          dram_loc_t l;
          l = '{bank: mc.bank, row: open_row[c][r][mc.bank], col: mc.col};
          for (int i = T_CL - 1; i > 0; i--) begin vp[i] = vp[i-1]; dp[i] = dp[i-1]; end
          vp[0] = (mc.cmd == CMD_RD) && from_nda;
          dp[0] = (mc.cmd == CMD_RD) ? dpeek(c, r, k, l) : '0;
          if (mc.cmd == CMD_WR)
            dmem[dkey(c, r, k, l)] = from_nda ? nda_dram_wdata[c][r][k] : host_wdata;
          if ((mc.cmd == CMD_RD || mc.cmd == CMD_WR) && open_row[c][r][mc.bank] != mc.row) begin
            failures++;
            $display("column command to a closed row");
          end
        end
        assign nda_dram_rvalid[c][r][k] = vp[T_CL-1];
        assign nda_dram_rdata[c][r][k]  = dp[T_CL-1];
      end
    end
  end

  // ---------------------------------------------------------- host controller
  typedef struct packed {
    logic              wr;
    logic              rank;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
  } hreq_t;
  hreq_t hq [NCH][$];
  int    host_rate = 4;        // new host request with probability host_rate/16 per cycle
  bit    host_reads_only = 0;
  bit    host_on = 1;

  // address generation through the system's address mapper
  always @(negedge clk) begin
    logic [34:0] pa;
    pa = {3'($urandom), $urandom};
    if (bp_en) while (pa[34:31] == 4'hF) pa = {3'($urandom), $urandom};  // host-only data
    map_pa = pa;
    #1;
    if (rst_n && host_on && int'($urandom % 16) < host_rate && hq[map_ch].size() < 16) begin
      hreq_t h;
      h = '{wr: !host_reads_only && ($urandom % 3 == 0), rank: map_rank, bank: map_bank,
            row: map_row, col: map_col};
      hq[map_ch].push_back(h);
      // remap: hashed bank ID was the reserved one
      if (bp_en && map_row != pa[34:19]) n_remap++;
      if (bp_en) begin
        checks++;
        if (map_bank == 4'(NBANKS - 1) || map_shared) begin
          failures++;
          $display("host-only address %h mapped to the NDA bank", pa);
        end
      end
    end
  end

  // scheduler: oldest request first; host commands win, launches fill the gaps
  always @(negedge clk) begin
    #2;
    for (int c = 0; c < NCH; c++) begin
      host_cmd[c] = '0;
      oldest_valid[c] = hq[c].size() != 0;
      oldest_is_read[c] = 0;
      oldest_rank[c] = '0;
      if (hq[c].size() != 0) begin
        hreq_t h;
        rank_view_t st;
        h = hq[c][0];
        oldest_is_read[c] = !h.wr;
        oldest_rank[c] = {1'b0, h.rank};
        st = rank_st[c][h.rank];
        host_cmd[c].rank = {1'b0, h.rank};
        if (st.open[h.bank] && st.row[h.bank] == h.row) begin
          if (h.wr ? st.wr_ok[h.bank] : st.rd_ok[h.bank]) begin
            host_cmd[c].c = '{h.wr ? CMD_WR : CMD_RD, h.bank, h.row, h.col};
            void'(hq[c].pop_front());
          end
        end else if (st.open[h.bank]) begin
          if (st.pre_ok[h.bank]) begin
            host_cmd[c].c = '{CMD_PRE, h.bank, st.row[h.bank], '0};
            if (h.bank == 4'(NBANKS - 1) && nda_busy[c][h.rank]) n_conflict++;
          end
        end else if (st.act_ok[h.bank]) begin
          host_cmd[c].c = '{CMD_ACT, h.bank, h.row, '0};
        end
      end
      if (host_cmd[c].c.cmd != CMD_NOP) n_host++;
      launch_grant[c] = launch_valid[c] && host_cmd[c].c.cmd == CMD_NOP;
    end
    host_wdata = {$urandom, $urandom};
  end

  // ------------------------------------------------------------- NDA software
  class op_rec;
    nda_pkt_t    p;
    int          c, r;
    bit          bad;
    logic [63:0] exp_out [NCHIPS][];
    logic [1:0][31:0] exp_acc [NCHIPS];
  endclass

  op_rec pend [NCH][NRANKS][$];
  logic [63:0] spm_ref [NCH][NRANKS][NCHIPS][128];
  int next_row [NCH][NRANKS];
  int last_launch_rank [NCH];
  logic [1:0] lrank [NCH];
  for (genvar c = 0; c < NCH; c++) begin : g_lr
    assign lrank[c] = dut.g_ch[c].lrank;
  end

  function automatic logic [63:0] get(op_rec o, int k, int opnd, int i);
    if (o.p.spm[opnd]) return spm_ref[o.c][o.r][k][i];
    return dpeek(o.c, o.r, k, loc_of(o.p.base[opnd], i));
  endfunction

  // build an operation on rank (c, r), fill its inputs, compute its results
  function automatic op_rec make_op(int c, int r, nda_op_e op, int n, logic [3:0] spm, bit bad);
    op_rec o;
    int outk;
    o = new;
    o.c = c; o.r = r; o.bad = bad;
    o.p = '0;
    o.p.op = op;
    o.p.nbeats = LEN_W'(n);
    o.p.nrows = (op == OP_GEMV) ? 8'd5 : 8'd0;
    o.p.spm = spm;
    for (int s = 0; s < 3; s++) o.p.scalar[s] = rand_f32(125, 129, 6);
    for (int j = 0; j < 4; j++) begin
      o.p.base[j] = '{bank: 4'(NBANKS - 1), row: 16'(next_row[c][r]), col: 7'($urandom)};
      o.p.bound[j] = o.p.base[j].row + 16'(bad ? 0 : 3);
      next_row[c][r] += 4;
      if (!spm[j])
        for (int k = 0; k < NCHIPS; k++)
          for (int i = 0; i < ((op == OP_GEMV && j == 1) ? n * int'(o.p.nrows) : n); i++)
            dmem[dkey(c, r, k, loc_of(o.p.base[j], i))] = {rand_f32(125, 129, 6), rand_f32(125, 129, 6)};
    end
    if (bad) return o;
    if (op == OP_GEMV) begin
      // row results land in the scratchpad; the accumulators end cleared
      for (int k = 0; k < NCHIPS; k++) begin
        o.exp_acc[k] = '0;
        for (int rr = 0; rr < int'(o.p.nrows); rr++) begin
          logic [1:0][31:0] s2;
          s2 = '0;
          for (int i = 0; i < n; i++) begin
            logic [63:0] x, a;
            x = get(o, k, 0, i); a = get(o, k, 1, rr * n + i);
            for (int h = 0; h < 2; h++) s2[h] = fma32(x[32*h +: 32], a[32*h +: 32], s2[h]);
          end
          spm_ref[c][r][k][rr] = s2;
        end
      end
      return o;
    end
    outk = out_opnd(op);
    for (int k = 0; k < NCHIPS; k++) begin
      o.exp_out[k] = new[n];
      o.exp_acc[k] = '0;
      for (int i = 0; i < n; i++) begin
        logic [63:0] x, y, z;
        x = get(o, k, 0, i); y = get(o, k, 1, i); z = get(o, k, 2, i);
        o.exp_out[k][i] = ref_beat(op, x, y, z, o.p.scalar);
        for (int h = 0; h < 2; h++) begin
          if (op == OP_DOT)  o.exp_acc[k][h] = fma32(x[32*h +: 32], y[32*h +: 32], o.exp_acc[k][h]);
          if (op == OP_NRM2) o.exp_acc[k][h] = fma32(x[32*h +: 32], x[32*h +: 32], o.exp_acc[k][h]);
        end
      end
      if (outk >= 0 && spm[outk])
        for (int i = 0; i < n; i++) spm_ref[c][r][k][i] = o.exp_out[k][i];
    end
    return o;
  endfunction

  task automatic post(op_rec o);
    @(negedge clk);
    req_valid[o.c] = 1;
    req_rank[o.c]  = 2'(o.r);
    req_pkt[o.c]   = o.p;
    #1;
    while (!req_ready[o.c]) begin @(negedge clk); #1; end
    if (nda_busy[o.c][o.r]) n_queued++;
    pend[o.c][o.r].push_back(o);
    if (o.p.spm != 0) n_spm++;
    @(posedge clk);
    #1 req_valid[o.c] = 0;
  endtask

  // check results when a rank reports done
  always @(negedge clk) begin
    for (int c = 0; c < NCH; c++)
      for (int r = 0; r < NRANKS; r++)
        if (rst_n && nda_done[c][r]) begin
          op_rec o;
          int outk;
          checks++;
          if (pend[c][r].size() == 0) begin
            failures++;
            $display("unexpected done on %0d.%0d", c, r);
            continue;
          end
          o = pend[c][r].pop_front();
          n_ops++;
          if (o.p.op == OP_GEMV) n_gemv++;
          if (nda_err[c][r] !== o.bad) begin
            failures++;
            $display("err %b expected %b", nda_err[c][r], o.bad);
          end
          if (o.bad) begin n_err++; continue; end
          outk = out_opnd(o.p.op);
          for (int k = 0; k < NCHIPS; k++) begin
            if (outk < 0) begin
              checks++;
              if (pe_acc[c][r][k] !== o.exp_acc[k]) begin
                failures++;
                $display("%s acc chip %0d.%0d.%0d: %h exp %h", o.p.op.name(), c, r, k,
                         pe_acc[c][r][k], o.exp_acc[k]);
              end
            end else if (!o.p.spm[outk]) begin
              for (int i = 0; i < int'(o.p.nbeats); i++) begin
                logic [63:0] got;
                got = dpeek(c, r, k, loc_of(o.p.base[outk], i));
                checks++;
                if (got !== o.exp_out[k][i]) begin
                  failures++;
                  if (failures < 10) $display("%s chip %0d.%0d.%0d beat %0d: %h exp %h",
                    o.p.op.name(), c, r, k, i, got, o.exp_out[k][i]);
                end
              end
            end
          end
        end
  end

  // per-cycle observation: replica agreement and mechanism counters
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++) begin
      if (launch_valid[c] && launch_grant[c]) begin
        if (last_launch_rank[c] >= 0 && int'(lrank[c]) != last_launch_rank[c]) n_rr++;
        last_launch_rank[c] = int'(lrank[c]);
      end
      for (int r = 0; r < NRANKS; r++) begin
        if (nda_yield[c][r]) n_yield++;
        if (nda_throttled[c][r] && mode == THR_STOCH) n_stoch++;
        if (nda_throttled[c][r] && mode == THR_NRP && wr_inhibit[c][r]) n_nrp++;
        if (replica_cmd[c][r].cmd != CMD_NOP) begin
          n_nda_cmd++;
          if (hq[c].size() != 0) n_concurrent++;
        end
        for (int k = 0; k < NCHIPS; k++) begin
          checks++;
          if (nda_dram_cmd[c][r][k] !== replica_cmd[c][r]) begin
            failures++;
            $display("chip %0d.%0d.%0d command differs from the replica", c, r, k);
          end
        end
      end
    end
  end

  task automatic phase(thr_mode_e m, bit bp, bit ronly, int rate);
    op_rec o;
    wait_idle();
    mode = m; bp_en = bp; host_reads_only = ronly; host_rate = rate;
    for (int c = 0; c < NCH; c++)
      for (int r = 0; r < NRANKS; r++) begin
        next_row[c][r] = 64 * int'(m) + 300 * int'(!bp);
        // three queued element-wise / reduction operations per rank
        for (int j = 0; j < 3; j++) begin
          o = make_op(c, r, nda_op_e'($urandom % 8), 1 + int'($urandom % 260), 4'b0, 0);
          post(o);
        end
      end
    // scratchpad round trip and a rejected operation on one rank per channel
    for (int c = 0; c < NCH; c++) begin
      o = make_op(c, int'(m) % NRANKS, OP_COPY, 64, 4'b0010, 0); post(o);
      o = make_op(c, int'(m) % NRANKS, OP_DOT, 64, 4'b0001, 0);  post(o);
      o = make_op(c, int'(m) % NRANKS, OP_AXPY, 200, 4'b0000, 1); post(o);
      o = make_op(c, 1 - int'(m) % NRANKS, OP_GEMV, 60, 4'b0000, 0); post(o);
      o = make_op(c, 1 - int'(m) % NRANKS, OP_COPY, 5, 4'b0001, 0);  post(o);
    end
    wait_idle();
  endtask

  task automatic wait_idle();
    bit idle;
    do begin
      @(negedge clk);
      idle = 1;
      for (int c = 0; c < NCH; c++)
        for (int r = 0; r < NRANKS; r++)
          if (pend[c][r].size() != 0 || nda_busy[c][r]) idle = 0;
    end while (!idle);
  endtask

  initial begin
    req_valid = '0; req_rank = '0; req_pkt = '0; host_cmd = '0; launch_grant = '0;
    oldest_valid = '0; oldest_is_read = '0; oldest_rank = '0; map_pa = '0; host_wdata = '0;
    for (int c = 0; c < NCH; c++) begin
      last_launch_rank[c] = -1;
      for (int r = 0; r < NRANKS; r++) begin
        next_row[c][r] = 0;
        for (int k = 0; k < NCHIPS; k++)
          for (int i = 0; i < 128; i++) spm_ref[c][r][k][i] = '0;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    phase(THR_NONE,  1, 0, 4);
    phase(THR_STOCH, 1, 0, 6);
    phase(THR_NRP,   1, 0, 6);
    phase(THR_NONE,  0, 1, 6);
    host_on = 0;
    repeat (200) @(negedge clk);

    $display("ops %0d, host cmds %0d, NDA cmds %0d (%0d while host requests pending)",
             n_ops, n_host, n_nda_cmd, n_concurrent);
    $display("yield %0d, stochastic hold %0d, NRP hold %0d, host closed NDA row %0d",
             n_yield, n_stoch, n_nrp, n_conflict);
    $display("queued %0d, rank switches %0d, remaps %0d, spm ops %0d, rejected %0d, GEMV %0d",
             n_queued, n_rr, n_remap, n_spm, n_err, n_gemv);
    checks += 11;
    if (n_gemv == 0)       begin failures++; $display("no GEMV"); end
    if (n_yield == 0)      begin failures++; $display("no NDA yield"); end
    if (n_stoch == 0)      begin failures++; $display("no stochastic hold"); end
    if (n_nrp == 0)        begin failures++; $display("no NRP hold"); end
    if (n_conflict == 0)   begin failures++; $display("no host/NDA row conflict"); end
    if (n_queued == 0)     begin failures++; $display("no queued launch"); end
    if (n_rr == 0)         begin failures++; $display("no round-robin switch"); end
    if (n_remap == 0)      begin failures++; $display("no bank-partition remap"); end
    if (n_spm == 0)        begin failures++; $display("no scratchpad op"); end
    if (n_err == 0)        begin failures++; $display("no rejected op"); end
    if (n_concurrent == 0) begin failures++; $display("no concurrent access"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
