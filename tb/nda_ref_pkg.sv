// nda_ref_pkg: reference model of the NDA operations for the testbenches.
// Each lane result is computed in double precision and rounded once to binary32,
// step by step as the PE does (one rounding per FMA). The testbenches use operands
// with short mantissas and a narrow exponent range, so every double-precision step
// is exact and the reference rounds exactly as a fused multiply-add does.
package nda_ref_pkg;
  import chopim_pkg::*;
  import fp_ref_pkg::*;

  function automatic logic [31:0] fma32(logic [31:0] a, logic [31:0] b, logic [31:0] c);
    return to_f32(to_real(a) * to_real(b) + to_real(c));
  endfunction

  // element-wise result of one lane: x, y, z are operands 0, 1, 2
  function automatic logic [31:0] ref_lane(nda_op_e op, logic [31:0] x, logic [31:0] y,
                                           logic [31:0] z, logic [2:0][31:0] s);
    logic [31:0] t;
    case (op)
      OP_AXPBY:    begin t = fma32(s[0], x, 0); t = fma32(s[1], y, t); end
      OP_AXPBYPCZ: begin t = fma32(s[0], x, 0); t = fma32(s[1], y, t); t = fma32(s[2], z, t); end
      OP_AXPY:     t = fma32(s[0], y, x);
      OP_COPY:     t = x;
      OP_XMY:      t = fma32(x, y, 0);
      OP_SCAL:     t = fma32(s[0], x, 0);
      default:     t = '0;
    endcase
    return t;
  endfunction

  function automatic logic [63:0] ref_beat(nda_op_e op, logic [63:0] x, logic [63:0] y,
                                           logic [63:0] z, logic [2:0][31:0] s);
    return {ref_lane(op, x[63:32], y[63:32], z[63:32], s), ref_lane(op, x[31:0], y[31:0], z[31:0], s)};
  endfunction

  // operand written by each element-wise operation
  function automatic int out_opnd(nda_op_e op);
    case (op)
      OP_AXPBY, OP_XMY: return 2;
      OP_AXPBYPCZ:      return 3;
      OP_AXPY, OP_COPY: return 1;
      OP_SCAL:          return 0;
      default:          return -1;
    endcase
  endfunction

  // number of operands each operation uses
  function automatic int n_opnds(nda_op_e op);
    case (op)
      OP_AXPBY, OP_XMY: return 3;
      OP_AXPBYPCZ:      return 4;
      OP_AXPY, OP_COPY, OP_DOT, OP_GEMV: return 2;
      default:          return 1;
    endcase
  endfunction

  // location of beat i of an operand laid out linearly from base
  function automatic dram_loc_t loc_of(dram_loc_t base, int i);
    dram_loc_t l;
    logic [ROW_W+COL_W-1:0] lin;
    lin = {base.row, base.col} + (ROW_W+COL_W)'(i);
    l.bank = base.bank;
    l.row  = lin[ROW_W+COL_W-1:COL_W];
    l.col  = lin[COL_W-1:0];
    return l;
  endfunction
endpackage
