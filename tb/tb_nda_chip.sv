// tb_nda_chip: one chip's logic die (sequencer, NDA memory controller, rank table,
// coin, PE) against a behavioural model of the DRAM dice, with a random host
// sharing the rank. Every NDA operation is run on random binary32 vectors (lengths
// up to 2.5 batches, operands crossing rows, sometimes sharing a bank) and the
// memory, scratchpad and accumulator results are compared with the reference model.
// GEMV is checked through the scratchpad rows it writes. Also checked: bound violations are rejected, all three write-throttling modes
// finish correctly, the model never sees a column command to a closed row, and
// with an idle host a COPY streams one column access per tCCD.
module tb_nda_chip;
  import chopim_pkg::*;
  import fp_ref_pkg::*;
  import nda_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  ddr_cmd_t host_cmd, dram_cmd, mcmd;
  logic launch = 0, wr_inhibit = 0, dram_rvalid, busy, done, err;
  nda_pkt_t pkt;
  thr_mode_e mode = THR_NONE;
  logic [2:0] log2_inv_p = 3'd2;
  logic [BEAT_W-1:0] dram_wdata, dram_rdata, host_wdata, mwdata;
  logic [1:0][31:0] acc;
  int checks = 0, failures = 0;
  int host_rate = 0;                 // host issues with probability host_rate/8
  int n_host = 0, n_yield = 0, n_thr = 0, n_conflict = 0;
  logic [63:0] spm_ref [128];
  logic [63:0] gemv_exp [128];

  nda_chip dut (.clk, .rst_n, .host_cmd, .launch, .pkt, .wr_inhibit, .mode, .log2_inv_p,
                .dram_cmd, .dram_wdata, .dram_rvalid, .dram_rdata, .busy, .done, .err, .acc);

  assign mcmd   = (host_cmd.cmd != CMD_NOP) ? host_cmd : dram_cmd;
  assign mwdata = (host_cmd.cmd != CMD_NOP) ? host_wdata : dram_wdata;
  dram_chip_model mem (.clk, .cmd(mcmd), .nda(host_cmd.cmd == CMD_NOP), .wdata(mwdata),
                       .rvalid(dram_rvalid), .rdata(dram_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- random host: legal commands from the rank table; RD/WR only to banks 0-7
  always @(negedge clk) begin
    rank_view_t st;
    int b;
    st = dut.u_sched.st;
    host_cmd   = '{cmd: CMD_NOP, bank: '0, row: '0, col: '0};
    host_wdata = {$urandom, $urandom};
    wr_inhibit = (mode == THR_NRP) ? ($urandom % 2 == 0) : 1'b0;
    if (rst_n && !launch && host_rate > 0 && int'($urandom % 8) < host_rate) begin
      b = int'($urandom % NBANKS);
      if (st.open[b]) begin
        if (b < 8 && $urandom % 4 != 0) begin
          if ($urandom % 2 == 0 && st.rd_ok[b]) host_cmd = '{CMD_RD, 4'(b), st.row[b], 7'($urandom)};
          else if (st.wr_ok[b])                 host_cmd = '{CMD_WR, 4'(b), st.row[b], 7'($urandom)};
        end else if (st.pre_ok[b] && (b < 8 || $urandom % 8 == 0)) begin
          host_cmd = '{CMD_PRE, 4'(b), st.row[b], '0};
        end
      end else if (st.act_ok[b] && (b < 8 || $urandom % 8 == 0)) begin
        host_cmd = '{CMD_ACT, 4'(b), 16'($urandom % 4096), '0};
      end
    end
    if (host_cmd.cmd != CMD_NOP) n_host++;
    if (host_cmd.cmd == CMD_PRE && b >= 8) n_conflict++;
  end
  always @(posedge clk) begin
    if (dut.u_sched.yield) n_yield++;
    if (dut.u_sched.throttled) n_thr++;
  end

  function automatic logic [63:0] get(nda_pkt_t p, int k, int i);
    dram_loc_t l;
    if (p.spm[k]) return spm_ref[i];
    l = loc_of(p.base[k], i);
    return mem.peek(l.bank, l.row, l.col);
  endfunction

  function automatic logic [63:0] rbeat();
    return {rand_f32(125, 129, 6), rand_f32(125, 129, 6)};
  endfunction

  // run one packet; returns cycles from launch to done
  task automatic run(nda_pkt_t p, bit expect_err, output int cycles);
    logic [63:0] exp_out [];
    logic [1:0][31:0] exp_acc;
    int n, o;
    dram_loc_t l;
    n = int'(p.nbeats);
    o = out_opnd(p.op);
    exp_out = new[n];
    exp_acc = '0;
    if (!expect_err && p.op == OP_GEMV) begin
      for (int r = 0; r < int'(p.nrows); r++) begin
        logic [1:0][31:0] s2;
        s2 = '0;
        for (int i = 0; i < n; i++) begin
          logic [63:0] x, a;
          x = get(p, 0, i); a = get(p, 1, r * n + i);
          for (int h = 0; h < 2; h++) s2[h] = fma32(x[32*h +: 32], a[32*h +: 32], s2[h]);
        end
        gemv_exp[r] = s2;
      end
    end
    if (!expect_err && p.op != OP_GEMV) begin
      for (int i = 0; i < n; i++) begin
        logic [63:0] x, y, z;
        x = get(p, 0, i); y = get(p, 1, i); z = get(p, 2, i);
        exp_out[i] = ref_beat(p.op, x, y, z, p.scalar);
        if (p.op == OP_DOT)
          for (int h = 0; h < 2; h++) exp_acc[h] = fma32(x[32*h +: 32], y[32*h +: 32], exp_acc[h]);
        if (p.op == OP_NRM2)
          for (int h = 0; h < 2; h++) exp_acc[h] = fma32(x[32*h +: 32], x[32*h +: 32], exp_acc[h]);
      end
    end
    @(negedge clk);
    while (host_cmd.cmd != CMD_NOP) @(negedge clk);
    // host stops for the launch cycle (the launch uses the C/A slot)
    pkt = p;
    launch = 1;
    @(negedge clk);
    launch = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (err !== expect_err) begin
      failures++;
      $display("op %s n=%0d: err=%b expected %b", p.op.name(), n, err, expect_err);
    end
    if (!expect_err && p.op == OP_GEMV) begin
      for (int r = 0; r < int'(p.nrows); r++) begin
        checks++;
        spm_ref[r] = gemv_exp[r];
        if (dut.u_pe.u_spm.mem[r] !== gemv_exp[r]) begin
          failures++;
          $display("GEMV row %0d: %h exp %h", r, dut.u_pe.u_spm.mem[r], gemv_exp[r]);
        end
      end
      checks++;
      if (acc !== '0) failures++;
    end else if (!expect_err) begin
      if (o >= 0) begin
        for (int i = 0; i < n; i++) begin
          logic [63:0] got;
          if (p.spm[o]) begin
            got = dut.u_pe.u_spm.mem[i];
            spm_ref[i] = exp_out[i];
          end else begin
            l = loc_of(p.base[o], i);
            got = mem.peek(l.bank, l.row, l.col);
          end
          checks++;
          if (got !== exp_out[i]) begin
            failures++;
            if (failures < 10) $display("op %s beat %0d: got %h exp %h", p.op.name(), i, got, exp_out[i]);
          end
        end
      end else begin
        checks++;
        if (acc !== exp_acc) begin
          failures++;
          $display("op %s acc %h exp %h", p.op.name(), acc, exp_acc);
        end
      end
    end
  endtask

  function automatic nda_pkt_t rand_pkt(nda_op_e op, int n);
    nda_pkt_t p;
    p = '0;
    p.op = op;
    p.nbeats = LEN_W'(n);
    p.nrows  = 8'(1 + $urandom % 4);
    for (int k = 0; k < 4; k++) begin
      p.base[k].bank = 4'(8 + $urandom % 8);
      p.base[k].row  = 16'(100 * k + $urandom % 50);
      p.base[k].col  = 7'($urandom);
      p.bound[k]     = p.base[k].row + 16'd12;
      for (int i = 0; i < ((op == OP_GEMV && k == 1) ? n * int'(p.nrows) : n); i++) begin
        dram_loc_t l;
        l = loc_of(p.base[k], i);
        mem.poke(l.bank, l.row, l.col, rbeat());
      end
    end
    for (int s = 0; s < 3; s++) p.scalar[s] = rand_f32(125, 129, 6);
    return p;
  endfunction

  initial begin
    nda_pkt_t p;
    int cyc;
    host_cmd = '0; pkt = '0; host_wdata = '0;
    for (int i = 0; i < 128; i++) spm_ref[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. streaming rate, idle host: COPY of one batch between two banks
    p = rand_pkt(OP_COPY, 128);
    p.base[0].bank = 4'd8; p.base[0].col = '0;
    p.base[1].bank = 4'd9; p.base[1].col = '0;
    run(p, 0, cyc);
    checks++;
    // 2 x 128 column accesses, one per tCCD, plus ACTs, tRCD and the read drain
    if (cyc < 2 * 127 * T_CCD || cyc > 2 * 128 * T_CCD + 2 * T_RCD + T_CL + 20) begin
      failures++;
      $display("COPY of 128 beats took %0d cycles", cyc);
    end
    $display("COPY 128 beats idle host: %0d cycles (%0d per access)", cyc, cyc / 256);

    // 2. every operation, every throttling mode, with host traffic
    for (int m = 0; m < 3; m++) begin
      mode = thr_mode_e'(m);
      for (int it = 0; it < 16; it++) begin
        host_rate = it % 5;
        p = rand_pkt(nda_op_e'(it % NUM_OPS), 1 + int'($urandom % 300));
        run(p, 0, cyc);
      end
    end

    // 3. scratchpad: COPY into the scratchpad, DOT against it, COPY back out
    mode = THR_STOCH; host_rate = 3;
    p = rand_pkt(OP_COPY, 100); p.spm[1] = 1; run(p, 0, cyc);
    p = rand_pkt(OP_DOT, 100);  p.spm[0] = 1; run(p, 0, cyc);
    p = rand_pkt(OP_SCAL, 100); p.spm[0] = 1; run(p, 0, cyc);
    p = rand_pkt(OP_COPY, 100); p.spm[0] = 1; run(p, 0, cyc);
    // GEMV rows into the scratchpad, then copied out to DRAM
    p = rand_pkt(OP_GEMV, 150); p.nrows = 8'd7; run(p, 0, cyc);
    p = rand_pkt(OP_COPY, 7);   p.spm[0] = 1; run(p, 0, cyc);
    p = rand_pkt(OP_GEMV, 10);  p.nrows = 8'd0; run(p, 1, cyc);

    // 4. rejected operations: past a bound, zero length, scratchpad too long
    p = rand_pkt(OP_AXPY, 200); p.bound[1] = p.base[1].row; run(p, 1, cyc);
    p = rand_pkt(OP_DOT, 0);   run(p, 1, cyc);
    p = rand_pkt(OP_COPY, 200); p.spm[1] = 1; run(p, 1, cyc);
    checks++;
    if (busy) failures++;

    checks++;
    if (mem.errors != 0) begin failures++; $display("column command to a closed row"); end
    $display("host cmds %0d, host closed an NDA row %0d, NDA yields %0d, throttled writes %0d",
             n_host, n_conflict, n_yield, n_thr);
    checks += 3;
    if (n_yield == 0) failures++;
    if (n_thr == 0) failures++;
    if (n_conflict == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
