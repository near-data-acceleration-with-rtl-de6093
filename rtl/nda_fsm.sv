// nda_fsm: microcoded sequencer of one NDA (one rank).
//
// A launched operation is processed in batches of 128 beats (1KB per chip, one
// DRAM row). Within a batch the microcode lists up to four phases; each phase
// streams the batch of one operand either from memory into the PE (a read phase,
// with a PE action such as LOAD or FMA) or from the PE buffer back to memory (a
// write phase). For AXPY, for example: read X into the buffer, read Y and compute
// buf = alpha*Y + buf, write the buffer to Y. The sequencer presents one access at a
// time on `req` and moves on when `req_done` says it has been issued.
//
// Operand k of batch b, beat j lives at linear column {row,col} = base + 128*b + j of
// the operand's bank: operands are contiguous in a bank, crossing into the next row
// after column 127. An operand flagged `spm` lives in the scratchpad instead (its
// accesses make no DRAM command); it may be at most one batch long.
//
// Bound check: at launch every operand used by the microcode is checked against the
// last row it may touch; an operation that would pass a bound (or an unknown opcode,
// zero length, or a too-long scratchpad operand) is rejected: `err` pulses with
// `done` and no access is made.
//
// GEMV repeats the DOT microcode for each of `nrows` matrix rows; row r of A
// (operand 1) starts r*nbeats beats after A's base. At the end of each row (after
// the drain) the sequencer presents one `flush` access: the PE copies its two lane
// accumulators into scratchpad entry r and clears them.
//
// After a phase that read DRAM, the sequencer waits DRAIN cycles (read latency plus
// the PE's register) so that every result is in the buffer before the next phase
// reads or drains it, and so that the accumulators are final when `done` pulses.
// Everything here depends only on the launch packet and on `req_done`; the host-side
// replica, which sees the same inputs, steps through the same accesses in the same
// cycles. Batch size, the microcode and the bound follow the paper; the linear
// operand layout, launch-time bound check, fixed drain and the GEMV result placement
// in the scratchpad are this design's choices.
module nda_fsm
  import chopim_pkg::*;
#(
  parameter int BATCH_BEATS = 128,
  parameter int DRAIN       = T_CL + 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      launch,
  input  nda_pkt_t  pkt,
  output nda_req_t  req,
  input  logic      req_done,
  output logic      busy,
  output logic      in_write,   // a write phase is draining the buffer
  output logic      done,       // one-cycle pulse at the end of an operation
  output logic      err         // with done: operation rejected
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_FLUSH} state_e;
  localparam int LIN_W = ROW_W + COL_W;

  state_e           state;
  nda_pkt_t         p;
  logic [LEN_W-1:0] bstart;     // first beat of the current batch
  logic [1:0]       phase;
  logic [6:0]       beat;
  logic [5:0]       dcnt;
  logic             fin_after;  // operation ends after the drain
  ucode_t           u;
  logic [LEN_W-1:0] blen;
  logic [LIN_W:0]   lin;
  logic             last_beat, batch_last;
  logic [7:0]       row;        // GEMV row
  logic [LIN_W:0]   roff;       // GEMV: row * nbeats
  logic             gemv;

  // ---- launch check -------------------------------------------------------------
  logic       bad;
  ucode_t     uc;
  logic [LEN_W+8:0] endl, olen;
  logic       stop, lgemv;
  always_comb begin
    lgemv = (pkt.op == OP_GEMV);
    bad  = (pkt.nbeats == '0) || (int'(pkt.op) >= NUM_OPS) ||
           (lgemv && ((pkt.nrows == '0) || (int'(pkt.nrows) > MAX_ROWS)));
    stop = 1'b0;
    endl = '0;
    olen = '0;
    for (int ph = 0; ph < 4; ph++) begin
      uc = ucode_rom(pkt.op, 2'(ph));
      // length of the operand: GEMV's matrix holds nrows vectors
      olen = (lgemv && (uc.opnd == 2'd1)) ? (LEN_W+9)'(pkt.nbeats * pkt.nrows)
                                          : (LEN_W+9)'(pkt.nbeats);
      if (!stop) begin
        if (pkt.spm[uc.opnd]) begin
          if (olen > (LEN_W+9)'(BATCH_BEATS)) bad = 1'b1;
        end else begin
          endl = (LEN_W+9)'({pkt.base[uc.opnd].row, pkt.base[uc.opnd].col}) + olen - 1'b1;
          if ((endl >= (LEN_W+9)'(1 << LIN_W)) ||
              (endl[LIN_W-1:COL_W] > pkt.bound[uc.opnd])) bad = 1'b1;
        end
      end
      if (uc.last) stop = 1'b1;
    end
  end

  // ---- current access -------------------------------------------------------------
  always_comb begin
    gemv = (p.op == OP_GEMV);
    u    = ucode_rom(p.op, phase);
    blen = ((p.nbeats - bstart) > LEN_W'(BATCH_BEATS)) ? LEN_W'(BATCH_BEATS)
                                                       : (p.nbeats - bstart);
    lin  = {1'b0, p.base[u.opnd].row, p.base[u.opnd].col} +
           (LIN_W+1)'(bstart) + (LIN_W+1)'(beat) +
           ((gemv && (u.opnd == 2'd1)) ? roff : '0);
    req.valid = (state == S_RUN) || (state == S_FLUSH);
    req.wr    = u.wr;
    req.spm   = p.spm[u.opnd];
    req.bank  = p.base[u.opnd].bank;
    req.row   = lin[LIN_W-1:COL_W];
    req.col   = lin[COL_W-1:0];
    req.act   = u.act;
    req.ssel  = u.ssel;
    req.idx   = beat;
    req.flush = 1'b0;
    if (state == S_FLUSH) begin
      req.wr    = 1'b1;
      req.spm   = 1'b1;
      req.idx   = row[6:0];
      req.flush = 1'b1;
    end
    last_beat  = (LEN_W'(beat) == blen - 1'b1);
    batch_last = ((bstart + LEN_W'(BATCH_BEATS)) >= p.nbeats);
  end

  assign busy     = (state != S_IDLE);
  assign in_write = (state == S_RUN) && u.wr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      p         <= '0;
      bstart    <= '0;
      phase     <= '0;
      beat      <= '0;
      dcnt      <= '0;
      fin_after <= 1'b0;
      row       <= '0;
      roff      <= '0;
      done      <= 1'b0;
      err       <= 1'b0;
    end else begin
      done <= 1'b0;
      err  <= 1'b0;
      unique case (state)
        S_IDLE: if (launch) begin
          if (bad) begin
            done <= 1'b1;
            err  <= 1'b1;
          end else begin
            p      <= pkt;
            bstart <= '0;
            phase  <= '0;
            beat   <= '0;
            row    <= '0;
            roff   <= '0;
            state  <= S_RUN;
          end
        end
        S_RUN: if (req_done) begin
          if (!last_beat) begin
            beat <= beat + 1'b1;
          end else begin
            beat <= '0;
            fin_after <= u.last && batch_last;
            if (u.last) begin
              phase  <= '0;
              bstart <= bstart + LEN_W'(BATCH_BEATS);
            end else begin
              phase  <= phase + 1'b1;
            end
            if (!u.wr && !req.spm) begin
              state <= S_DRAIN;
              dcnt  <= 6'(DRAIN);
            end else if (u.last && batch_last) begin
              if (gemv) begin
                state <= S_FLUSH;
              end else begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end
          end
        end
        S_DRAIN: begin
          if (dcnt > 6'd1) begin
            dcnt <= dcnt - 1'b1;
          end else if (fin_after) begin
            if (gemv) begin
              state <= S_FLUSH;
            end else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end else begin
            state <= S_RUN;
          end
        end
        S_FLUSH: if (req_done) begin
          if (row == p.nrows - 1'b1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            row    <= row + 1'b1;
            roff   <= roff + (LIN_W+1)'(p.nbeats);
            bstart <= '0;
            phase  <= '0;
            beat   <= '0;
            state  <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) req_done |-> req.valid);
endmodule
