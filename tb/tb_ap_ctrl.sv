// tb_ap_ctrl: checks the controller's sequence of CAM commands without a
// CAM attached.
//
// After reset the controller must clear the valid column (one compare with
// an empty mask, one write of column 0) and become ready. A run started
// with random constants must then: take exactly the closed-form number of
// cycles of the microprogram; alternate compare and write cycles; open with
// the broadcast of max(v) into the max field; write the quotient bits from
// the MSB down, one per division iteration; use the row-pair mode on every
// reduction level; end by clearing the valid column; and keep busy high
// and ready low until the one-cycle done pulse.
module tb_ap_ctrl;
  import ap_pkg::*;

  localparam int L = 6;

  logic         clk = 1'b0;
  logic         rst_n, start, ready, busy, done;
  logic [W_V-1:0]   max_v;
  logic [W_MU-1:0]  mu;
  logic [W_LN2-1:0] vln2;
  logic [W_VB-1:0]  vb;
  logic [W_VC-1:0]  vc;
  cam_cmd_e     cmd;
  pass_t        pass;
  logic [L-1:0] pair_lvl;

  ap_ctrl #(.LOG_ROWS(L)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  function automatic int expected_cycles();
    int c;
    c  = 13 * 2;
    c += 3 * (2 + 8 * M);
    c += W_MU * (2 + 8 * M + 2);
    c += W_LN2 * (2 + 8 * W_Q + 2);
    c += 2 * M;
    c += M * (2 + 8 * M + 2);
    c += 2 + 8 * W_VC + 4 * (W_POLY - W_VC);
    for (int sh = 1; sh < (1 << W_Q); sh <<= 1)
      c += 2 * (2 * (W_POLY - sh) + sh);
    c += 2 * W_APPROX;
    c += L * (2 + 8 * W_SUM);
    c += 2;
    c += 2 * W_APPROX;
    for (int it = 0; it < W_QUO; it++) begin
      c += (it == 0) ? 1 : 2 * (2 * (W_REM - 1) + 1);
      c += 2 * (2 + 8 * W_SUM + 4 * (W_REM - W_SUM));
      c += 2 + 2 + 2 + 1;
    end
    c += 2;
    return c;
  endfunction

  row_t quo_mask;
  assign quo_mask = {{(COLS-W_QUO){1'b0}}, {W_QUO{1'b1}}} << C_QUO;

  initial begin
    int cyc, qexp, first_seen, last_wmask_val;
    bit lvl_seen [L];
    cam_cmd_e prev;
    row_t last_wmask;
    rst_n = 1'b0; start = 1'b0;
    max_v = '0; mu = '0; vln2 = '0; vb = '0; vc = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // post-reset clear of the valid column
    cyc = 0;
    while (!ready) begin
      if (cmd == CAM_WR)
        check(pass.wmask == row_t'(1) << C_VAL && pass.wkey == '0, "init clears valid");
      @(negedge clk); cyc++;
    end
    check(cyc == 3, $sformatf("init took %0d cycles", cyc));
    check(!busy && !done, "idle after init");
    repeat (2) begin
      max_v = W_V'($urandom); mu = W_MU'($urandom); vln2 = W_LN2'($urandom);
      vb = W_VB'($urandom); vc = W_VC'($urandom);
      foreach (lvl_seen[l]) lvl_seen[l] = 1'b0;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1; qexp = W_QUO - 1; first_seen = 0; prev = CAM_NOP;
      while (!done) begin
        check(busy && !ready, "busy while running");
        if (prev == CAM_CMP) check(cmd == CAM_WR, "write follows compare");
        if (cmd == CAM_WR && prev != CAM_CMP) check(1'b0, "write without compare");
        if (cmd == CAM_WR && first_seen == 0) begin
          first_seen = 1;
          check(pass.cmask == '0, "first pass searches all rows");
          check(pass.wmask == ({{(COLS-W_V){1'b0}}, {W_V{1'b1}}} << C_MX), "first pass writes max field");
          check(pass.wkey[C_MX +: W_V] == max_v, "first pass writes max(v)");
        end
        if (cmd == CAM_WR && (pass.wmask & ~quo_mask) == '0 && $countones(pass.wmask) == 1) begin
          check(pass.wmask[C_QUO + qexp], $sformatf("quotient bit %0d in order", qexp));
          check(pass.cmask == row_t'(1) << C_FLAG && !pass.ckey[C_FLAG], "quotient bit where flag = 0");
          qexp--;
        end
        if (cmd == CAM_CMP && pass.pair_en) lvl_seen[pair_lvl] = 1'b1;
        if (cmd == CAM_WR) last_wmask = pass.wmask;
        prev = cmd;
        @(negedge clk); cyc++;
      end
      check(cyc == expected_cycles(), $sformatf("run took %0d cycles, expected %0d", cyc, expected_cycles()));
      check(qexp == -1, "all quotient bits written");
      foreach (lvl_seen[l]) check(lvl_seen[l], $sformatf("reduction level %0d", l));
      check(last_wmask == row_t'(1) << C_VAL, "run ends by clearing valid");
      @(negedge clk);
      check(!done && ready && !busy, "done is one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
