// tb_nda_controller: host-side NDA controller with four ranks. Software posts
// random short operations to random ranks while the host memory controller grants
// launches at random and issues commands to random ranks. Checked against a model
// kept in the testbench: queue-full back-pressure, per-rank FIFO order of launched
// packets, round-robin choice among ranks that have work and idle NDAs, one done per
// launched operation, the inhibit pins (next-rank prediction, one cycle after the
// oldest-request report), and that a host ACT reaches the addressed rank's
// table.
module tb_nda_controller;
  import chopim_pkg::*;
  localparam int NR = 4, QD = 4;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, launch_valid, launch_grant = 0;
  logic [1:0] req_rank = '0, launch_rank, oldest_rank = '0;
  nda_pkt_t req_pkt, launch_pkt;
  host_cmd_t host_cmd;
  logic oldest_valid = 0, oldest_is_read = 0;
  thr_mode_e mode = THR_NRP;
  logic [2:0] log2_inv_p = 3'd2;
  logic [NR-1:0] inhibit, busy, done, err, yield, throttled, in_write;
  rank_view_t [NR-1:0] rank_st;
  ddr_cmd_t [NR-1:0] replica_cmd;
  int checks = 0, failures = 0, n_launch = 0, n_done = 0, n_full = 0, n_rr = 0, n_post = 0;

  nda_controller #(.NRANKS(NR), .QDEPTH(QD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  nda_pkt_t q [NR][$];
  int last = NR - 1;
  logic [NR-1:0] held = '0;
  logic [NR-1:0] exp_inh = '0;

  function automatic nda_pkt_t mk(int tag);
    nda_pkt_t p;
    p = '0;
    p.op = OP_NRM2;
    p.nbeats = LEN_W'(1 + $urandom % 20);
    p.base[0] = '{bank: 4'($urandom), row: 16'($urandom % 4), col: '0};
    p.bound[0] = 16'hFFFF;
    p.scalar[0] = 32'(tag);
    return p;
  endfunction

  // software and host stimulus
  int tag = 0;
  always @(negedge clk) if (rst_n) begin
    int b, r;
    rank_view_t st;
    req_valid = $urandom % 3 == 0;
    req_rank  = 2'($urandom % NR);
    req_pkt   = mk(tag);
    launch_grant = 0;
    host_cmd = '0;
    r = int'($urandom % NR);
    b = int'($urandom % NBANKS);
    st = rank_st[r];
    if ($urandom % 3 == 0) begin
      host_cmd.rank = 2'(r);
      if (!st.open[b] && st.act_ok[b]) host_cmd.c = '{CMD_ACT, 4'(b), 16'($urandom % 4), '0};
      else if (st.open[b] && st.pre_ok[b]) host_cmd.c = '{CMD_PRE, 4'(b), st.row[b], '0};
    end
    if (host_cmd.c.cmd == CMD_NOP) launch_grant = launch_valid && ($urandom % 2 == 0);
    oldest_valid = $urandom % 2; oldest_is_read = $urandom % 2; oldest_rank = 2'($urandom % NR);
  end

  always @(posedge clk) if (rst_n) begin
    logic [NR-1:0] elig, ninh;
    int exp_r;
    // inhibit: registered NRP rule
    checks++;
    if (inhibit !== exp_inh) begin failures++; $display("inhibit %b exp %b", inhibit, exp_inh); end
    for (int r = 0; r < NR; r++) ninh[r] = oldest_valid && oldest_is_read && oldest_rank == 2'(r);
    // queue back-pressure (count before this cycle's launch)
    checks++;
    if (req_ready !== (q[req_rank].size() < QD)) begin failures++; $display("req_ready wrong"); end
    if (!req_ready) n_full++;
    // round robin
    for (int r = 0; r < NR; r++) elig[r] = q[r].size() != 0 && !busy[r] && !held[r];
    exp_r = -1;
    for (int k = 1; k <= NR; k++) if (exp_r < 0 && elig[(last + k) % NR]) exp_r = (last + k) % NR;
    checks++;
    if (launch_valid !== (exp_r >= 0) || (exp_r >= 0 && launch_rank !== 2'(exp_r))) begin
      failures++; $display("launch_valid %b rank %0d, expected rank %0d", launch_valid, launch_rank, exp_r);
    end
    held = '0;
    if (launch_valid && launch_grant && exp_r >= 0) begin
      checks++;
      if (launch_pkt !== q[exp_r][0]) begin failures++; $display("wrong packet launched"); end
      void'(q[exp_r].pop_front());
      held[exp_r] = 1;
      if (exp_r != last) n_rr++;
      last = exp_r;
      n_launch++;
    end
    // host command effect: only the addressed rank's table changes
    for (int r = 0; r < NR; r++) if (done[r]) n_done++;
    // queue
    if (req_valid && req_ready) begin q[req_rank].push_back(req_pkt); tag++; n_post++; end
    exp_inh = ninh;
  end

  // a host ACT shows up in the addressed rank's table and in no other
  always @(posedge clk) if (rst_n && host_cmd.c.cmd == CMD_ACT) begin
    int r, b;
    r = int'(host_cmd.rank); b = int'(host_cmd.c.bank);
    #1;
    for (int k = 0; k < NR; k++) begin
      checks++;
      if (k == r && !(rank_st[k].open[b] && rank_st[k].row[b] == host_cmd.c.row)) begin
        failures++; $display("ACT not seen by rank %0d", k);
      end
    end
  end

  initial begin
    host_cmd = '0; req_pkt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (60000) @(posedge clk);
    checks += 3;
    if (n_full == 0) failures++;
    if (n_rr == 0) failures++;
    if (n_done < n_launch - NR || n_launch < 100) failures++;
    $display("posted %0d launched %0d done %0d, full %0d, rank switches %0d", n_post, n_launch, n_done, n_full, n_rr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
