// tb_ap_pass_gen: checks the AP look-up tables by running them.
//
// A small array of 8 rows is modelled here with the plain compare/write
// semantics of the AP (tag = masked match, write the key into tagged rows,
// 2D mode reading one bit of the partner row). For each operation the
// testbench walks the loop bounds that ap_pass_gen reports, applies every
// pass to the model and then checks the arithmetic result of every row
// against ordinary integer arithmetic: add, subtract with borrow, multiply,
// copy, variable right shift, left shift, broadcast, quotient bit and the
// row-pair reduction, and the XOR table on the four-row example of the
// AP's description (A = 11,00,10,11, B = 01,01,10,10). It also checks the pass count of an addition
// (4 passes per bit, 2 once the source is exhausted).
module tb_ap_pass_gen;
  import ap_pkg::*;

  localparam int R = 8;
  localparam int LR = 3;

  uop_t          uop;
  logic [IW-1:0] j, i, k;
  logic [2:0]    p;
  logic [31:0]   imm_val;
  pass_t         pass;
  logic [IW-1:0] nj, ni;
  logic [2:0]    np;

  ap_pass_gen #(.LOG_ROWS(LR)) dut (.*);

  int checks = 0, failures = 0;
  row_t rows [R];
  int   npasses;

  initial begin : watchdog
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic longint field(row_t rw, int lo, int w);
    longint v = 0;
    for (int b = 0; b < w; b++) v[b] = rw[lo + b];
    return v;
  endfunction

  function automatic row_t setf(row_t rw, int lo, int w, longint v);
    for (int b = 0; b < w; b++) rw[lo + b] = v[b];
    return rw;
  endfunction

  // run one micro-op on the row model
  task automatic run(input uop_t u);
    bit tg [R];
    uop = u;
    npasses = 0;
    j = '0; i = '0; p = '0;
    #1;
    for (int jj = 0; jj < int'(nj); jj++) begin
      j = IW'(jj); #1;
      for (int ii = 0; ii < int'(ni); ii++) begin
        i = IW'(ii); p = '0; #1;
        for (int pp = 0; pp < int'(np); pp++) begin
          p = 3'(pp); #1;
          npasses++;
          for (int r = 0; r < R; r++) begin
            bit sel = 1'b1;
            if (pass.pair_en) begin
              int pr = r + (1 << jj);
              sel = (r % (2 << jj) == 0) && pr < R;
              if (sel) sel = rows[pr][pass.pair_col] == pass.pair_val;
            end
            tg[r] = sel && (((rows[r] ^ pass.ckey) & pass.cmask) == '0);
          end
          for (int r = 0; r < R; r++)
            if (tg[r]) rows[r] = (rows[r] & ~pass.wmask) |
                                 ((pass.row0_src ? rows[0] : pass.wkey) & pass.wmask);
        end
      end
    end
  endtask

  initial begin
    longint a [R], bb [R], c [R], s;
    k = '0; imm_val = '0;
    repeat (20) begin
      for (int r = 0; r < R; r++)
        for (int w = 0; w < COLS; w += 32) rows[r][w +: 32] = $urandom;

      // ADD: SQ (15 bits) += VC (12 bits)
      for (int r = 0; r < R; r++) begin a[r] = field(rows[r], C_SQ, W_POLY); bb[r] = field(rows[r], C_VC, W_VC); end
      run(mk(OP_ADD, C_SQ, W_POLY, C_VC, W_VC));
      check(npasses == 1 + 4 * W_VC + 2 * (W_POLY - W_VC), $sformatf("add passes %0d", npasses));
      for (int r = 0; r < R; r++)
        check(field(rows[r], C_SQ, W_POLY) == ((a[r] + bb[r]) & ((1 << W_POLY) - 1)), "add");

      // SUB: REM (29 bits) -= SUM (28 bits), borrow out
      for (int r = 0; r < R; r++) begin a[r] = field(rows[r], C_REM, W_REM); bb[r] = field(rows[r], C_SUM, W_SUM); end
      run(mk(OP_SUB, C_REM, W_REM, C_SUM, W_SUM));
      for (int r = 0; r < R; r++) begin
        check(field(rows[r], C_REM, W_REM) == ((a[r] - bb[r]) & ((64'd1 << W_REM) - 1)), "sub");
        check(rows[r][C_CARRY] == (a[r] < bb[r]), "sub borrow");
      end

      // conditional ADD (only rows with FLAG = 1)
      for (int r = 0; r < R; r++) begin a[r] = field(rows[r], C_REM, W_REM); bb[r] = field(rows[r], C_SUM, W_SUM); c[r] = rows[r][C_FLAG]; end
      run(mk(OP_ADD, C_REM, W_REM, C_SUM, W_SUM, C_FLAG, 1, 1'b1));
      for (int r = 0; r < R; r++)
        check(field(rows[r], C_REM, W_REM) == (c[r] ? ((a[r] + bb[r]) & ((64'd1 << W_REM) - 1)) : a[r]), "cond add");

      // MUL: P1 = MX * MU
      for (int r = 0; r < R; r++) begin
        rows[r] = setf(rows[r], C_P1, W_P1, 0);
        a[r] = field(rows[r], C_MX, W_V); bb[r] = field(rows[r], C_MU, W_MU);
      end
      run(mk(OP_MUL, C_P1, W_P1, C_MX, W_V, C_MU, W_MU));
      for (int r = 0; r < R; r++)
        check(field(rows[r], C_P1, W_P1) == a[r] * bb[r], $sformatf("mul %0d*%0d got %0d", a[r], bb[r], field(rows[r], C_P1, W_P1)));

      // SHR: SQ >>= QF
      for (int r = 0; r < R; r++) begin a[r] = field(rows[r], C_SQ, W_POLY); bb[r] = field(rows[r], C_QF, W_Q); end
      run(mk(OP_SHR, C_SQ, W_POLY, 0, 0, C_QF, W_Q));
      for (int r = 0; r < R; r++)
        check(field(rows[r], C_SQ, W_POLY) == (a[r] >> bb[r]), "shr");

      // SHL1: REM <<= 1
      for (int r = 0; r < R; r++) a[r] = field(rows[r], C_REM, W_REM);
      run(mk(OP_SHL1, C_REM, W_REM));
      for (int r = 0; r < R; r++)
        check(field(rows[r], C_REM, W_REM) == ((a[r] << 1) & ((64'd1 << W_REM) - 1)), "shl1");

      // BCAST + COPY (conditional on VAL)
      imm_val = 32'(0);
      run(mk(OP_BCAST, C_SUM, W_SUM));
      for (int r = 0; r < R; r++) begin a[r] = field(rows[r], C_SQ, W_APPROX); c[r] = rows[r][C_VAL]; end
      run(mk(OP_COPY, C_SUM, W_SUM, C_SQ, W_APPROX, C_VAL, 1, 1'b1));
      for (int r = 0; r < R; r++)
        check(field(rows[r], C_SUM, W_SUM) == (c[r] ? a[r] : 0), "copy");

      // REDUCE: row 0 gets the sum of all rows
      s = 0;
      for (int r = 0; r < R; r++) s += field(rows[r], C_SUM, W_SUM);
      run(mk(OP_REDUCE, C_SUM, W_SUM));
      check(field(rows[0], C_SUM, W_SUM) == s, $sformatf("reduce %0d exp %0d", field(rows[0], C_SUM, W_SUM), s));

      // ROWBC: every row gets row 0's sum
      run(mk(OP_ROWBC, C_SUM, W_SUM));
      for (int r = 0; r < R; r++) check(field(rows[r], C_SUM, W_SUM) == s, "rowbc");

      // BCAST of a constant
      imm_val = $urandom;
      run(mk(OP_BCAST, C_MU, W_MU, .imm(IMM_MU)));
      for (int r = 0; r < R; r++) check(field(rows[r], C_MU, W_MU) == longint'(imm_val[W_MU-1:0]), "bcast");

      // QBIT k
      k = IW'($urandom_range(W_QUO - 1));
      for (int r = 0; r < R; r++) begin a[r] = field(rows[r], C_QUO, W_QUO); c[r] = rows[r][C_FLAG]; end
      run(mk(OP_QBIT, C_QUO, W_QUO, 0, 0, C_FLAG, 1));
      for (int r = 0; r < R; r++)
        check(field(rows[r], C_QUO, W_QUO) == (c[r] ? a[r] : (a[r] | (64'd1 << k))), "qbit");
    end
    // the XOR example: A = [11, 00, 10, 11], B = [01, 01, 10, 10]
    // must give A XOR B = [10, 01, 00, 01] in two passes per bit
    begin
      int ea [4] = '{3, 0, 2, 3};
      int eb [4] = '{1, 1, 2, 2};
      int ex [4] = '{2, 1, 0, 1};
      for (int r = 0; r < R; r++) begin
        rows[r] = setf(rows[r], C_V, 2, (r < 4) ? ea[r] : $urandom_range(3));
        rows[r] = setf(rows[r], C_MX, 2, (r < 4) ? eb[r] : $urandom_range(3));
        rows[r] = setf(rows[r], C_QUO, 2, 0);
      end
      run(mk(OP_XOR, C_QUO, 2, C_V, 2, C_MX, 2));
      check(npasses == 4, "xor takes two passes per bit");
      for (int r = 0; r < R; r++)
        check(field(rows[r], C_QUO, 2) == (field(rows[r], C_V, 2) ^ field(rows[r], C_MX, 2)), "xor");
      for (int r = 0; r < 4; r++)
        check(field(rows[r], C_QUO, 2) == longint'(ex[r]), $sformatf("xor example row %0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
