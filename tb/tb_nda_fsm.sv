// tb_nda_fsm: microcode sequencer. Launches random operations (every opcode,
// lengths 1..400 beats, operands in DRAM or in the scratchpad) and acknowledges
// accesses after random delays. Every acknowledged access is compared with the
// sequence expected from the operation's phase list (written out here
// independently of the microcode store): batches of 128 beats, phases in order,
// operand k's beat i at linear column base+i of its bank. Also checked: the drain
// after each DRAM read phase lasts at least DRAIN cycles, done comes exactly DRAIN
// cycles after the last DRAM read (or one cycle after a final write), and bad
// packets (bound, zero length, long scratchpad operand) give done+err after one
// cycle with no access. GEMV repeats the DOT phases for every matrix row (row r of
// operand 1 at r*nbeats) and presents one accumulator flush to scratchpad entry r
// at each row end.
module tb_nda_fsm;
  import chopim_pkg::*;
  import nda_ref_pkg::*;
  localparam int DRAIN = T_CL + 2;

  logic clk = 0, rst_n = 0, launch = 0, req_done = 0, busy, in_write, done, err;
  nda_pkt_t pkt;
  nda_req_t req;
  int checks = 0, failures = 0;
  longint cyc = 0;

  nda_fsm dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { bit wr; int opnd; pe_act_e act; int ssel; } ph_t;

  function automatic int phases(nda_op_e op, output ph_t ph [4]);
    case (op)
      OP_AXPBY: begin ph[0] = '{0,0,PA_SCALE,0}; ph[1] = '{0,1,PA_FMA,1}; ph[2] = '{1,2,PA_LOAD,0}; return 3; end
      OP_AXPBYPCZ: begin ph[0] = '{0,0,PA_SCALE,0}; ph[1] = '{0,1,PA_FMA,1}; ph[2] = '{0,2,PA_FMA,2};
                         ph[3] = '{1,3,PA_LOAD,0}; return 4; end
      OP_AXPY: begin ph[0] = '{0,0,PA_LOAD,0}; ph[1] = '{0,1,PA_FMA,0}; ph[2] = '{1,1,PA_LOAD,0}; return 3; end
      OP_COPY: begin ph[0] = '{0,0,PA_LOAD,0}; ph[1] = '{1,1,PA_LOAD,0}; return 2; end
      OP_XMY:  begin ph[0] = '{0,0,PA_LOAD,0}; ph[1] = '{0,1,PA_MUL,0}; ph[2] = '{1,2,PA_LOAD,0}; return 3; end
      OP_DOT:  begin ph[0] = '{0,0,PA_LOAD,0}; ph[1] = '{0,1,PA_DOT,0}; return 2; end
      OP_NRM2: begin ph[0] = '{0,0,PA_SQ,0}; return 1; end
      OP_GEMV: begin ph[0] = '{0,0,PA_LOAD,0}; ph[1] = '{0,1,PA_DOT,0}; return 2; end
      default: begin ph[0] = '{0,0,PA_SCALE,0}; ph[1] = '{1,0,PA_LOAD,0}; return 2; end
    endcase
  endfunction

  task automatic run(nda_pkt_t p, bit bad);
    ph_t ph [4];
    int np, n;
    longint last_t, launch_t;
    bit last_rd_dram;
    np = phases(p.op, ph);
    n = int'(p.nbeats);
    @(negedge clk);
    pkt = p; launch = 1;
    @(negedge clk);
    launch = 0;
    launch_t = cyc;
    if (bad) begin
      checks++;
      if (!(done && err) || busy) begin failures++; $display("bad packet not rejected"); end
      return;
    end
    last_t = cyc; last_rd_dram = 0;
    for (int row = 0; row < ((p.op == OP_GEMV) ? int'(p.nrows) : 1); row++) begin
    for (int b = 0; b < n; b += 128) begin
      int bl;
      bl = (n - b > 128) ? 128 : n - b;
      for (int k = 0; k < np; k++) begin
        for (int j = 0; j < bl; j++) begin
          dram_loc_t l;
          // wait for the access, then acknowledge after a random delay
          while (!req.valid) begin
            if (done) begin failures++; $display("early done"); return; end
            @(negedge clk);
          end
          if (j == 0 && last_rd_dram) begin
            checks++;
            if (cyc - last_t < DRAIN) begin failures++; $display("drain too short %0d", cyc - last_t); end
          end
          repeat ($urandom % 3) @(negedge clk);
          l = loc_of(p.base[ph[k].opnd], b + j + ((p.op == OP_GEMV && ph[k].opnd == 1) ? row * n : 0));
          checks++;
          if (req.wr !== ph[k].wr || req.flush !== 1'b0 || req.spm !== p.spm[ph[k].opnd] || req.idx !== 7'(j) ||
              (!req.wr && (req.act !== ph[k].act || (ph[k].act != PA_LOAD && req.ssel !== 2'(ph[k].ssel)))) ||
              (!req.spm && (req.bank !== l.bank || req.row !== l.row || req.col !== l.col)) ||
              in_write !== ph[k].wr) begin
            failures++;
            if (failures < 10) $display("%s batch %0d phase %0d beat %0d: req %p", p.op.name(), b, k, j, req);
          end
          req_done = 1;
          @(negedge clk);
          req_done = 0;
          last_t = cyc;
          last_rd_dram = !ph[k].wr && !p.spm[ph[k].opnd];
        end
      end
    end
    if (p.op == OP_GEMV) begin
      while (!req.valid) @(negedge clk);
      checks++;
      if (last_rd_dram && cyc - last_t != DRAIN) begin failures++; $display("flush after %0d", cyc - last_t); end
      if (!(req.flush && req.spm && req.wr && req.idx == 7'(row))) begin
        failures++; $display("GEMV row %0d: flush expected, req %p", row, req);
      end
      req_done = 1;
      @(negedge clk);
      req_done = 0;
      last_t = cyc;
      last_rd_dram = 0;
    end
    end
    while (!done) @(negedge clk);
    checks++;
    if (err || (cyc - last_t) != (last_rd_dram ? DRAIN : 0)) begin
      failures++;
      $display("%s: done %0d cycles after last access, err %b", p.op.name(), cyc - last_t, err);
    end
  endtask

  initial begin
    nda_pkt_t p;
    pkt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      p = '0;
      p.op = nda_op_e'(it % NUM_OPS);
      p.nbeats = LEN_W'(1 + $urandom % 400);
      p.nrows  = 8'(1 + $urandom % 3);
      for (int k = 0; k < 4; k++) begin
        p.base[k] = '{bank: 4'($urandom), row: 16'($urandom), col: 7'($urandom)};
        p.bound[k] = p.base[k].row + 16'd16;
      end
      if (it % 5 == 4) begin
        p.nbeats = LEN_W'(1 + $urandom % 128);
        p.spm = 4'($urandom);
      end
      run(p, 0);
      // rejected variants
      if (it % 6 == 0) begin p.spm = '0; p.bound[0] = p.base[0].row - 16'd1; run(p, 1); end
      if (it % 6 == 1) begin p.spm = '0; p.nbeats = '0; run(p, 1); end
      if (it % 6 == 2) begin p.spm[0] = 1; p.nbeats = LEN_W'(129); run(p, 1); end
      if (it % 9 == 8) begin p.spm = '0; p.nrows = 8'd0; run(p, 1); end
      if (it % 9 == 8) begin p.spm = '0; p.nrows = 8'd129; run(p, 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
