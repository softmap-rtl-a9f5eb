// ap_pkg: shared constants, types and the Softmax microprogram of the
// associative processor (AP).
//
// The AP stores one vocabulary word per CAM row and processes all rows at
// once, one bit column at a time. Every row holds a fixed set of bit fields
// (the column map below). The precisions follow the selected configuration
// of the integer-only Softmax: word precision M = 6, v_corr = M and N = 16
// extra bits for the sum (Table I column M = 6). The remaining widths are
// derived from M as printed in the mapping figure (mu: 1.5M+1 bits, the
// quotient q: 0.5M+1 bits, the result column R: 2M+12 bits) or taken from
// Table I (v_ln2: 4 bits, polynomial: 2M+3 bits, v_approx: M+6 bits).
//
// The paper packs the intermediate values into three columns A, B and R that
// are overwritten step by step. This design gives every intermediate value a
// field of its own, and adds a carry/borrow column, a flag column and a
// valid column that the bit-serial look-up tables need; the remainder of
// the final division gets its own field as well.
//
// softmax_prog() is the microprogram: the 16 steps of the Softmax dataflow,
// each expanded into one or more bit-serial AP operations (see ap_pass_gen
// for how an operation becomes compare/write passes).
package ap_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int M        = 6;             // word precision
  localparam int N        = 16;            // extra bits of the sum
  localparam int W_V      = M;             // v, max(v), x = max(v) - v
  localparam int W_MU     = M + M/2 + 1;   // mu = floor(2^(2M) / v_ln2)
  localparam int W_P1     = M + W_MU;      // x * mu
  localparam int W_Q      = W_P1 - 2*M;    // q = floor(x * mu / 2^(2M))
  localparam int W_LN2    = 4;             // v_ln2
  localparam int W_P2     = W_Q + W_LN2;   // q * v_ln2
  localparam int W_VB     = M;             // v_b, later t = v_b - r
  localparam int W_POLY   = 2*M + 3;       // (v_corr + v_b)^2 + v_c
  localparam int W_VC     = 2*M;           // v_c
  localparam int W_APPROX = M + 6;         // v_approx
  localparam int W_SUM    = W_APPROX + N;  // sum of v_approx
  localparam int W_REM    = W_SUM + 1;     // division remainder
  localparam int W_QUO    = 2*M + 12;      // v_sm, the result column R
  localparam int F_FRAC   = W_QUO - 1;     // v_sm = floor(v_approx * 2^F_FRAC / sum)

  // ----------------------------------------------------------- column map
  localparam int C_VAL   = 0;              // row holds a word of the vector
  localparam int C_CARRY = 1;              // carry / borrow of add, sub, mul
  localparam int C_FLAG  = 2;              // restore flag of the division
  localparam int C_V     = 3;
  localparam int C_MX    = C_V   + W_V;    // max(v), then x, then r
  localparam int C_MU    = C_MX  + W_V;
  localparam int C_P1    = C_MU  + W_MU;
  localparam int C_QF    = C_P1  + 2*M;    // q, the upper bits of P1
  localparam int C_LN2   = C_P1  + W_P1;
  localparam int C_P2    = C_LN2 + W_LN2;
  localparam int C_VB    = C_P2  + W_P2;   // v_b, then t = v_b - r
  localparam int C_T2    = C_VB  + W_VB;   // copy of t
  localparam int C_SQ    = C_T2  + W_VB;   // t^2, then polynomial, then v_approx
  localparam int C_VC    = C_SQ  + W_POLY;
  localparam int C_SUM   = C_VC  + W_VC;
  localparam int C_REM   = C_SUM + W_SUM;
  localparam int C_QUO   = C_REM + W_REM;
  localparam int COLS    = C_QUO + W_QUO;

  localparam int CW = $clog2(COLS + 1);    // width of a column index
  localparam int IW = 6;                   // width of a loop index / field width

  typedef logic [COLS-1:0] row_t;
  typedef logic [CW-1:0]   col_t;

  // ------------------------------------------------------------ operations
  typedef enum logic [3:0] {
    OP_BCAST,   // write a constant into field d of every row
    OP_ADD,     // d += s            (optionally only rows with column t = 1)
    OP_SUB,     // d -= s            borrow left in C_CARRY
    OP_MUL,     // d  = s * t        d cleared beforehand
    OP_COPY,    // d |= s            (optionally only rows with column t = 1)
    OP_SHR,     // d >>= field t     per-row variable shift
    OP_SHL1,    // d <<= 1           skipped in the first division iteration
    OP_REDUCE,  // d of row 0 = sum of d over all rows (2D row-pair tree)
    OP_ROWBC,   // d of every row = d of row 0
    OP_QBIT,    // d[k] = 1 in rows with flag t = 0 (k = division counter)
    OP_XOR,     // d = s ^ t         out of place, d cleared beforehand
    OP_LOOP,    // if k != 0: k--, jump to d
    OP_END
  } op_e;

  typedef enum logic [2:0] {
    IMM_ZERO, IMM_MAX, IMM_MU, IMM_LN2, IMM_VB, IMM_VC
  } imm_e;

  typedef struct packed {
    op_e           op;
    logic [CW-1:0] d;
    logic [IW-1:0] dw;
    logic [CW-1:0] s;
    logic [IW-1:0] sw;
    logic [CW-1:0] t;
    logic [IW-1:0] tw;
    logic          cond;   // ADD / COPY: only rows with column t = 1
    imm_e          imm;
  } uop_t;

  // One compare/write pass as seen by the CAM.
  typedef struct packed {
    row_t          ckey;      // compare key register
    row_t          cmask;     // compare mask register (1 = column searched)
    row_t          wkey;      // write key
    row_t          wmask;     // write mask (1 = column written)
    logic          pair_en;   // 2D mode: compare a bit of the partner row too
    logic [CW-1:0] pair_col;  // column of the partner bit
    logic          pair_val;  // value the partner bit must have
    logic          row0_src;  // write data comes from row 0 instead of wkey
  } pass_t;

  typedef enum logic [1:0] {
    CAM_NOP, CAM_CMP, CAM_WR, CAM_ROWWR
  } cam_cmd_e;

  localparam int PROG_LEN = 34;
  localparam int PC_W     = 6;
  localparam int PC_DIV   = 25;            // first micro-op of the division loop

  function automatic uop_t mk(op_e op, int d, int dw, int s = 0, int sw = 0,
                              int t = 0, int tw = 0, bit cond = 1'b0,
                              imm_e imm = IMM_ZERO);
    uop_t u;
    u.op   = op;
    u.d    = CW'(d);
    u.dw   = IW'(dw);
    u.s    = CW'(s);
    u.sw   = IW'(sw);
    u.t    = CW'(t);
    u.tw   = IW'(tw);
    u.cond = cond;
    u.imm  = imm;
    return u;
  endfunction

  // The Softmax dataflow. Step numbers refer to the 16-step dataflow.
  function automatic uop_t softmax_prog(logic [PC_W-1:0] pc);
    case (pc)
      // 1: v is loaded row by row before start; max(v) is broadcast
      6'd0:  return mk(OP_BCAST, C_MX, W_V, .imm(IMM_MAX));
      // 2: x = max(v) - v = -v_stable
      6'd1:  return mk(OP_SUB,   C_MX, W_V, C_V, W_V);
      // 3: write mu
      6'd2:  return mk(OP_BCAST, C_MU, W_MU, .imm(IMM_MU));
      // 4: x * mu, q = upper W_Q bits (the shift by 2M is a column offset)
      6'd3:  return mk(OP_BCAST, C_P1, W_P1);
      6'd4:  return mk(OP_MUL,   C_P1, W_P1, C_MX, W_V, C_MU, W_MU);
      // 5: write v_ln2
      6'd5:  return mk(OP_BCAST, C_LN2, W_LN2, .imm(IMM_LN2));
      // 6: q * v_ln2
      6'd6:  return mk(OP_BCAST, C_P2, W_P2);
      6'd7:  return mk(OP_MUL,   C_P2, W_P2, C_QF, W_Q, C_LN2, W_LN2);
      // 7: r = x - q * v_ln2  (v_corr = -r)
      6'd8:  return mk(OP_SUB,   C_MX, W_V, C_P2, W_V);
      // 8: write v_b
      6'd9:  return mk(OP_BCAST, C_VB, W_VB, .imm(IMM_VB));
      // 9: t = v_b - r = v_corr + v_b
      6'd10: return mk(OP_SUB,   C_VB, W_VB, C_MX, W_V);
      // 10: copy t
      6'd11: return mk(OP_BCAST, C_T2, W_VB);
      6'd12: return mk(OP_COPY,  C_T2, W_VB, C_VB, W_VB);
      // 11: t^2
      6'd13: return mk(OP_BCAST, C_SQ, W_POLY);
      6'd14: return mk(OP_MUL,   C_SQ, W_POLY, C_VB, W_VB, C_T2, W_VB);
      // 12: write v_c
      6'd15: return mk(OP_BCAST, C_VC, W_VC, .imm(IMM_VC));
      // 13: t^2 + v_c, then shift right by q
      6'd16: return mk(OP_ADD,   C_SQ, W_POLY, C_VC, W_VC);
      6'd17: return mk(OP_SHR,   C_SQ, W_POLY, 0, 0, C_QF, W_Q);
      // 14: sum of v_approx over the valid rows
      6'd18: return mk(OP_BCAST, C_SUM, W_SUM);
      6'd19: return mk(OP_COPY,  C_SUM, W_SUM, C_SQ, W_APPROX, C_VAL, 1, 1'b1);
      6'd20: return mk(OP_REDUCE, C_SUM, W_SUM);
      // 15: copy the sum into every row
      6'd21: return mk(OP_ROWBC, C_SUM, W_SUM);
      // 16: v_sm = floor(v_approx * 2^F_FRAC / sum), restoring division
      6'd22: return mk(OP_BCAST, C_REM, W_REM);
      6'd23: return mk(OP_COPY,  C_REM, W_REM, C_SQ, W_APPROX);
      6'd24: return mk(OP_BCAST, C_QUO, W_QUO);
      6'd25: return mk(OP_SHL1,  C_REM, W_REM);
      6'd26: return mk(OP_SUB,   C_REM, W_REM, C_SUM, W_SUM);
      6'd27: return mk(OP_BCAST, C_FLAG, 1);
      6'd28: return mk(OP_COPY,  C_FLAG, 1, C_CARRY, 1);
      6'd29: return mk(OP_ADD,   C_REM, W_REM, C_SUM, W_SUM, C_FLAG, 1, 1'b1);
      6'd30: return mk(OP_QBIT,  C_QUO, W_QUO, 0, 0, C_FLAG, 1);
      6'd31: return mk(OP_LOOP,  PC_DIV, 0);
      // the vector is consumed: clear the valid column for the next one
      6'd32: return mk(OP_BCAST, C_VAL, 1);
      default: return mk(OP_END, 0, 0);
    endcase
  endfunction

endpackage
