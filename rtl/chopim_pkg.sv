// chopim_pkg: types and constants shared by the host-side NDA controller and the
// NDA logic dies of a DDR4 channel in which host and near-data accelerators (NDAs)
// access the same ranks concurrently.
//
// Geometry and timing follow the evaluated system: DDR4 8Gb x8 devices, 16 banks,
// 64K rows of 1KB per chip, 8B per column access (one burst of a x8 chip), and the
// DDR4 timing set in DRAM clock cycles. The NDA operations are those of the case
// study (AXPBY, AXPBYPCZ, AXPY, COPY, XMY, DOT, NRM2, SCAL, GEMV). GEMV runs a DOT
// of every matrix row with x and leaves the two lane sums of row r in scratchpad
// entry r (up to 128 rows). The microcode word format, the launch packet
// layout and the command encoding are this design's own choices.
package chopim_pkg;

  // ---- DRAM geometry (per chip) -------------------------------------------------
  localparam int NBANKS    = 16;        // 4 bank groups x 4 banks
  localparam int BANK_W    = 4;
  localparam int ROW_W     = 16;        // 64K rows
  localparam int COL_W     = 7;         // 128 bursts of 8B = 1KB row per chip
  localparam int NCOLS     = 1 << COL_W;
  localparam int BEAT_W    = 64;        // 8B per chip per column access
  localparam int LEN_W     = 24;        // vector length in beats

  // ---- DDR4 timing in DRAM clock cycles (1.2 GHz) --------------------------------
  localparam int T_BL   = 4;
  localparam int T_CCD  = 6;            // tCCD_L (bank groups not modelled)
  localparam int T_RTRS = 2;
  localparam int T_CL   = 16;
  localparam int T_RCD  = 16;
  localparam int T_RP   = 16;
  localparam int T_CWL  = 12;
  localparam int T_RAS  = 39;
  localparam int T_RC   = 55;
  localparam int T_RTP  = 9;
  localparam int T_WTR  = 9;            // tWTR_L
  localparam int T_WR   = 18;
  localparam int T_RRD  = 6;            // tRRD_L

  // ---- DRAM commands --------------------------------------------------------------
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4
  } ddr_cmd_e;

  typedef struct packed {
    ddr_cmd_e              cmd;
    logic [BANK_W-1:0]     bank;
    logic [ROW_W-1:0]      row;
    logic [COL_W-1:0]      col;
  } ddr_cmd_t;

  // A host command on a channel's C/A bus, with its target rank.
  typedef struct packed {
    logic [1:0]            rank;   // up to 4 ranks per channel
    ddr_cmd_t              c;
  } host_cmd_t;

  // What a memory controller needs to know about a rank: which rows are open and
  // which commands each bank may take this cycle.
  typedef struct packed {
    logic [NBANKS-1:0]             open;
    logic [NBANKS-1:0][ROW_W-1:0]  row;
    logic [NBANKS-1:0]             act_ok;
    logic [NBANKS-1:0]             pre_ok;
    logic [NBANKS-1:0]             rd_ok;
    logic [NBANKS-1:0]             wr_ok;
  } rank_view_t;

  // ---- NDA operations and microcode ---------------------------------------------
  typedef enum logic [3:0] {
    OP_AXPBY    = 4'd0,   // z = a*x + b*y
    OP_AXPBYPCZ = 4'd1,   // w = a*x + b*y + g*z
    OP_AXPY     = 4'd2,   // y = a*y + x
    OP_COPY     = 4'd3,   // y = x
    OP_XMY      = 4'd4,   // z = x .* y
    OP_DOT      = 4'd5,   // c = x . y   (two lane partial sums)
    OP_NRM2     = 4'd6,   // c = x . x   (sqrt by software)
    OP_SCAL     = 4'd7,   // x = a*x
    OP_GEMV     = 4'd8    // spm[r] = A[r,:] . x   (rows of A contiguous, operand 1)
  } nda_op_e;
  localparam int NUM_OPS = 9;
  localparam int MAX_ROWS = 128;        // GEMV rows per launch (scratchpad entries)

  // PE action applied to each 8B beat of a read phase, per 32-bit lane.
  typedef enum logic [2:0] {
    PA_LOAD  = 3'd0,      // buf = d
    PA_SCALE = 3'd1,      // buf = s*d
    PA_FMA   = 3'd2,      // buf = s*d + buf
    PA_MUL   = 3'd3,      // buf = buf*d
    PA_DOT   = 3'd4,      // acc = buf*d + acc
    PA_SQ    = 3'd5       // acc = d*d + acc
  } pe_act_e;

  // One microcode word = one phase of a batch: read or write one operand.
  typedef struct packed {
    logic        last;    // last phase of the batch
    logic        wr;      // write phase (buffer -> operand)
    logic [1:0]  opnd;    // operand index 0..3
    logic [1:0]  ssel;    // scalar register used by the action
    pe_act_e     act;     // action on read data
  } ucode_t;

  // Microcode store: 4 words per operation.
  function automatic ucode_t ucode_rom(nda_op_e op, logic [1:0] ph);
    ucode_t u;
    u = '{last: 1'b1, wr: 1'b0, opnd: 2'd0, ssel: 2'd0, act: PA_LOAD};
    unique case (op)
      OP_AXPBY: unique case (ph)
        2'd0:    u = '{1'b0, 1'b0, 2'd0, 2'd0, PA_SCALE};
        2'd1:    u = '{1'b0, 1'b0, 2'd1, 2'd1, PA_FMA};
        default: u = '{1'b1, 1'b1, 2'd2, 2'd0, PA_LOAD};
      endcase
      OP_AXPBYPCZ: unique case (ph)
        2'd0:    u = '{1'b0, 1'b0, 2'd0, 2'd0, PA_SCALE};
        2'd1:    u = '{1'b0, 1'b0, 2'd1, 2'd1, PA_FMA};
        2'd2:    u = '{1'b0, 1'b0, 2'd2, 2'd2, PA_FMA};
        default: u = '{1'b1, 1'b1, 2'd3, 2'd0, PA_LOAD};
      endcase
      OP_AXPY: unique case (ph)
        2'd0:    u = '{1'b0, 1'b0, 2'd0, 2'd0, PA_LOAD};
        2'd1:    u = '{1'b0, 1'b0, 2'd1, 2'd0, PA_FMA};
        default: u = '{1'b1, 1'b1, 2'd1, 2'd0, PA_LOAD};
      endcase
      OP_COPY: unique case (ph)
        2'd0:    u = '{1'b0, 1'b0, 2'd0, 2'd0, PA_LOAD};
        default: u = '{1'b1, 1'b1, 2'd1, 2'd0, PA_LOAD};
      endcase
      OP_XMY: unique case (ph)
        2'd0:    u = '{1'b0, 1'b0, 2'd0, 2'd0, PA_LOAD};
        2'd1:    u = '{1'b0, 1'b0, 2'd1, 2'd0, PA_MUL};
        default: u = '{1'b1, 1'b1, 2'd2, 2'd0, PA_LOAD};
      endcase
      OP_DOT: unique case (ph)
        2'd0:    u = '{1'b0, 1'b0, 2'd0, 2'd0, PA_LOAD};
        default: u = '{1'b1, 1'b0, 2'd1, 2'd0, PA_DOT};
      endcase
      OP_NRM2:   u = '{1'b1, 1'b0, 2'd0, 2'd0, PA_SQ};
      OP_GEMV: unique case (ph)
        2'd0:    u = '{1'b0, 1'b0, 2'd0, 2'd0, PA_LOAD};
        default: u = '{1'b1, 1'b0, 2'd1, 2'd0, PA_DOT};
      endcase
      OP_SCAL: unique case (ph)
        2'd0:    u = '{1'b0, 1'b0, 2'd0, 2'd0, PA_SCALE};
        default: u = '{1'b1, 1'b1, 2'd0, 2'd0, PA_LOAD};
      endcase
      default:   u = '{1'b1, 1'b0, 2'd0, 2'd0, PA_LOAD};
    endcase
    return u;
  endfunction

  // Location of an operand's first beat inside a rank (same in every chip).
  typedef struct packed {
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
  } dram_loc_t;

  // Launch packet written to an NDA's control registers.
  typedef struct packed {
    nda_op_e                  op;
    logic [LEN_W-1:0]         nbeats;   // vector length in 8B beats per chip
    logic [7:0]               nrows;    // GEMV: rows of A (1..128), else ignored
    dram_loc_t [3:0]          base;     // operand origins
    logic [3:0][ROW_W-1:0]    bound;    // last row each operand may touch
    logic [3:0]               spm;      // operand lives in the scratchpad
    logic [2:0][31:0]         scalar;   // alpha, beta, gamma (binary32)
  } nda_pkt_t;

  // One access produced by the NDA sequencer.
  typedef struct packed {
    logic              valid;
    logic              wr;
    logic              spm;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
    pe_act_e           act;
    logic [1:0]        ssel;
    logic [6:0]        idx;    // buffer / scratchpad entry
    logic              flush;  // GEMV row end: accumulators -> scratchpad[idx], cleared
  } nda_req_t;

  // Write throttling mode of the NDA memory controllers.
  typedef enum logic [1:0] {
    THR_NONE  = 2'd0,
    THR_STOCH = 2'd1,   // stochastic issue
    THR_NRP   = 2'd2    // next-rank prediction
  } thr_mode_e;

endpackage
