// ap_pass_gen: the look-up tables of the associative processor.
//
// An AP operation on a field is carried out bit column by bit column; for
// every bit it applies a short list of passes, and each pass is one compare
// (search the rows whose selected columns match a pattern, setting their
// tag) followed by one write (write a pattern into selected columns of the
// tagged rows). This block holds those lists. For the micro-op `uop` and the
// loop position (j, i, p) it returns the compare key/mask and the write
// key/mask of the pass, together with the loop bounds nj, ni(j) and np(i)
// the controller iterates over. It is purely combinational.
//
// Loop structure per operation (b is a bit index of field d):
//   BCAST   ni=1, np=1               write imm into d of every row
//   ADD/SUB ni=dw+1: slot 0 clears the carry column, slot b+1 runs the
//           full-adder (subtractor) table on bit b: 4 passes, 2 once the
//           source is exhausted
//   MUL     nj=tw multiplier bits, ni=sw+2: carry clear, sw conditional
//           full-adder bits (4 passes each), one carry-out pass
//   COPY    ni=sw, np=1              d[b] = 1 where s[b] = 1 (d cleared)
//   SHR     nj=tw, ni=dw, np=2|1     conditional shift by 2^j where t[j] = 1
//   SHL1    ni=dw, np=2|1            from the MSB down: d[b] = d[b-1]
//   REDUCE  nj=log2(ROWS), ni=dw+1   full-adder table with the source bit
//           taken from the partner row r + 2^j (2D row-pair mode)
//   ROWBC, QBIT: one pass
//   XOR     ni=dw, np=2              the out-of-place XOR table of the AP
//           example: rows with (t, s) = (0, 1), then (1, 0), get d = 1
// The pass orders of the in-place add and subtract tables are chosen so that
// no row rewritten by a pass matches a later pass of the same bit (the
// "no change" entries of a table are never searched). Add keeps the sum in d
// (4 passes per bit, the 8 cycles per bit of the addition row of Table II);
// subtract d - s leaves the borrow in the carry column.
// The tables follow the compare/write scheme of the paper; the concrete
// tables and their pass orders are this design's own.
module ap_pass_gen
  import ap_pkg::*;
#(
  parameter int LOG_ROWS = 11
) (
  input  uop_t          uop,
  input  logic [IW-1:0] j,
  input  logic [IW-1:0] i,
  input  logic [2:0]    p,
  input  logic [IW-1:0] k,        // division loop counter (QBIT)
  input  logic [31:0]   imm_val,  // value selected by uop.imm
  output pass_t         pass,
  output logic [IW-1:0] nj,
  output logic [IW-1:0] ni,
  output logic [2:0]    np
);

  // Tables of the 3-column in-place operations, columns (d, s, c).
  // Each entry: {compare d, compare s, compare c, write d, write c}.
  typedef logic [4:0] lut_e;
  localparam lut_e ADD_LUT [4] = '{5'b001_10, 5'b101_01, 5'b110_01, 5'b010_10};
  localparam lut_e SUB_LUT [4] = '{5'b101_00, 5'b001_11, 5'b010_11, 5'b110_00};

  logic [IW-1:0] b;         // bit index of d for this slot
  lut_e          e;
  int unsigned   sh;

  always_comb begin
    pass     = '0;
    nj       = IW'(1);
    ni       = IW'(1);
    np       = 3'd1;
    b        = '0;
    e        = '0;
    sh       = 0;
    unique case (uop.op)
      OP_BCAST: begin
        for (int c = 0; c < COLS; c++)
          if (c >= int'(uop.d) && c < int'(uop.d) + int'(uop.dw)) begin
            pass.wmask[c] = 1'b1;
            pass.wkey[c]  = imm_val[c - int'(uop.d)];
          end
      end

      OP_ADD, OP_SUB, OP_REDUCE: begin
        ni = uop.dw + IW'(1);
        if (uop.op == OP_REDUCE) nj = IW'(LOG_ROWS);
        if (i == '0) begin
          // slot 0: clear the carry / borrow column in every row
          pass.wmask[C_CARRY] = 1'b1;
        end else begin
          b  = i - IW'(1);
          np = (uop.op == OP_REDUCE || b < uop.sw) ? 3'd4 : 3'd2;
          e  = (uop.op == OP_SUB) ? SUB_LUT[p[1:0]] : ADD_LUT[p[1:0]];
          pass.cmask[uop.d + CW'(b)] = 1'b1;
          pass.ckey [uop.d + CW'(b)] = e[4];
          if (uop.op == OP_REDUCE) begin
            pass.pair_en  = 1'b1;
            pass.pair_col = uop.d + CW'(b);
            pass.pair_val = e[3];
          end else if (b < uop.sw) begin
            pass.cmask[uop.s + CW'(b)] = 1'b1;
            pass.ckey [uop.s + CW'(b)] = e[3];
          end
          // else: source exhausted, only the s = 0 entries (the first two) run
          pass.cmask[C_CARRY] = 1'b1;
          pass.ckey [C_CARRY] = e[2];
          pass.wmask[uop.d + CW'(b)] = 1'b1;
          pass.wkey [uop.d + CW'(b)] = e[1];
          pass.wmask[C_CARRY] = 1'b1;
          pass.wkey [C_CARRY] = e[0];
          if (uop.cond) begin
            pass.cmask[uop.t] = 1'b1;
            pass.ckey [uop.t] = 1'b1;
          end
        end
      end

      OP_MUL: begin
        // d (cleared) += s << j in the rows whose multiplier bit t[j] is 1
        nj = uop.tw;
        ni = uop.sw + IW'(2);
        if (i == '0) begin
          pass.wmask[C_CARRY] = 1'b1;
        end else if (i == uop.sw + IW'(1)) begin
          // carry out into bit sw + j, which is still zero
          pass.cmask[C_CARRY] = 1'b1;
          pass.ckey [C_CARRY] = 1'b1;
          pass.wmask[uop.d + CW'(uop.sw) + CW'(j)] = 1'b1;
          pass.wkey [uop.d + CW'(uop.sw) + CW'(j)] = 1'b1;
          pass.wmask[C_CARRY] = 1'b1;
        end else begin
          b  = i - IW'(1);
          np = 3'd4;
          e  = ADD_LUT[p[1:0]];
          pass.cmask[uop.t + CW'(j)] = 1'b1;
          pass.ckey [uop.t + CW'(j)] = 1'b1;
          pass.cmask[uop.d + CW'(b) + CW'(j)] = 1'b1;
          pass.ckey [uop.d + CW'(b) + CW'(j)] = e[4];
          pass.cmask[uop.s + CW'(b)] = 1'b1;
          pass.ckey [uop.s + CW'(b)] = e[3];
          pass.cmask[C_CARRY] = 1'b1;
          pass.ckey [C_CARRY] = e[2];
          pass.wmask[uop.d + CW'(b) + CW'(j)] = 1'b1;
          pass.wkey [uop.d + CW'(b) + CW'(j)] = e[1];
          pass.wmask[C_CARRY] = 1'b1;
          pass.wkey [C_CARRY] = e[0];
        end
      end

      OP_COPY: begin
        ni = uop.sw;
        pass.cmask[uop.s + CW'(i)] = 1'b1;
        pass.ckey [uop.s + CW'(i)] = 1'b1;
        if (uop.cond) begin
          pass.cmask[uop.t] = 1'b1;
          pass.ckey [uop.t] = 1'b1;
        end
        pass.wmask[uop.d + CW'(i)] = 1'b1;
        pass.wkey [uop.d + CW'(i)] = 1'b1;
      end

      OP_SHR: begin
        // rows with shift bit t[j] = 1: d[i] = d[i + 2^j], ascending i
        nj = uop.tw;
        ni = uop.dw;
        sh = 1 << j;
        pass.cmask[uop.t + CW'(j)] = 1'b1;
        pass.ckey [uop.t + CW'(j)] = 1'b1;
        pass.wmask[uop.d + CW'(i)] = 1'b1;
        if (int'(i) + sh < int'(uop.dw)) begin
          np = 3'd2;
          pass.cmask[uop.d + CW'(int'(i) + sh)] = 1'b1;
          pass.ckey [uop.d + CW'(int'(i) + sh)] = ~p[0];
          pass.wkey [uop.d + CW'(i)]            = ~p[0];
        end
      end

      OP_SHL1: begin
        // from the MSB down: d[b] = d[b-1]; d[0] = 0
        ni = uop.dw;
        b  = uop.dw - IW'(1) - i;
        pass.wmask[uop.d + CW'(b)] = 1'b1;
        if (b != '0) begin
          np = 3'd2;
          pass.cmask[uop.d + CW'(b) - CW'(1)] = 1'b1;
          pass.ckey [uop.d + CW'(b) - CW'(1)] = ~p[0];
          pass.wkey [uop.d + CW'(b)]          = ~p[0];
        end
      end

      OP_ROWBC: begin
        pass.row0_src = 1'b1;
        for (int c = 0; c < COLS; c++)
          if (c >= int'(uop.d) && c < int'(uop.d) + int'(uop.dw))
            pass.wmask[c] = 1'b1;
      end

      OP_QBIT: begin
        pass.cmask[uop.t] = 1'b1;
        pass.ckey [uop.t] = 1'b0;
        pass.wmask[uop.d + CW'(k)] = 1'b1;
        pass.wkey [uop.d + CW'(k)] = 1'b1;
      end

      OP_XOR: begin
        // the printed XOR table: compare (t, s) = (0, 1), then (1, 0); write d = 1
        ni = uop.dw;
        np = 3'd2;
        pass.cmask[uop.t + CW'(i)] = 1'b1;
        pass.ckey [uop.t + CW'(i)] = p[0];
        pass.cmask[uop.s + CW'(i)] = 1'b1;
        pass.ckey [uop.s + CW'(i)] = ~p[0];
        pass.wmask[uop.d + CW'(i)] = 1'b1;
        pass.wkey [uop.d + CW'(i)] = 1'b1;
      end

      default: ;  // LOOP, END: no pass
    endcase
  end

endmodule
