// tb_ap_cam: checks the CAM array against a shadow copy kept here.
//
// 16 rows. Random row loads, then random masked compares (the tag register
// must equal the rows whose masked bits equal the key), masked writes into
// the tagged rows, row-0 broadcast writes and 2D row-pair compares (only
// rows r = 0 mod 2^(lvl+1) with a partner, and the partner's bit must
// match). Every row is read back through the registered read port and
// compared with the shadow copy; the read latency of one cycle is checked.
module tb_ap_cam;
  import ap_pkg::*;

  localparam int ROWS = 16;
  localparam int L = 4;

  logic            clk = 1'b0;
  cam_cmd_e        cmd;
  pass_t           pass;
  logic [L-1:0]    pair_lvl, row_addr, rd_addr;
  row_t            rd_data;
  logic [ROWS-1:0] tag;

  ap_cam #(.ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  row_t shadow [ROWS];
  logic [ROWS-1:0] etag;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
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

  function automatic row_t rnd_row();
    row_t rw;
    for (int w = 0; w < COLS; w += 32) rw[w +: 32] = $urandom;
    return rw;
  endfunction

  // sparse mask: a few random columns
  function automatic row_t rnd_mask(int n);
    row_t m = '0;
    for (int c = 0; c < n; c++) m[$urandom_range(COLS - 1)] = 1'b1;
    return m;
  endfunction

  task automatic readback();
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      rd_addr = L'(r);
      @(negedge clk);
      check(rd_data == shadow[r], $sformatf("row %0d readback", r));
    end
  endtask

  initial begin
    cmd = CAM_NOP; pass = '0; pair_lvl = '0; row_addr = '0; rd_addr = '0;
    // load every row fully
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      cmd = CAM_ROWWR; row_addr = L'(r);
      pass = '0; pass.wkey = rnd_row(); pass.wmask = '1;
      shadow[r] = pass.wkey;
    end
    @(negedge clk); cmd = CAM_NOP;
    readback();
    repeat (300) begin
      int kind;
      kind = $urandom_range(3);
      @(negedge clk);
      pass = '0;
      pass.cmask = rnd_mask($urandom_range(3));
      // key taken from a random row so that some rows match
      pass.ckey  = shadow[$urandom_range(ROWS - 1)] ^ (($urandom_range(3) == 0) ? rnd_row() : '0);
      pass.wkey  = rnd_row();
      pass.wmask = rnd_mask($urandom_range(1, 4));
      pair_lvl   = '0;
      if (kind == 1) begin
        pass.pair_en  = 1'b1;
        pass.pair_col = CW'($urandom_range(COLS - 1));
        pass.pair_val = 1'($urandom);
        pair_lvl      = L'($urandom_range(L - 1));
      end
      pass.row0_src = (kind == 2);
      for (int r = 0; r < ROWS; r++) begin
        bit sel;
        int pr;
        sel = 1'b1;
        if (pass.pair_en) begin
          pr  = r + (1 << pair_lvl);
          sel = (r % (2 << pair_lvl) == 0) && pr < ROWS;
          if (sel) sel = shadow[pr][pass.pair_col] == pass.pair_val;
        end
        etag[r] = sel && (((shadow[r] ^ pass.ckey) & pass.cmask) == '0);
      end
      cmd = CAM_CMP;
      @(negedge clk);
      check(tag == etag, $sformatf("tag %h exp %h", tag, etag));
      cmd = CAM_WR;
      begin
        row_t src;
        src = pass.row0_src ? shadow[0] : pass.wkey;
        for (int r = 0; r < ROWS; r++)
          if (etag[r]) shadow[r] = (shadow[r] & ~pass.wmask) | (src & pass.wmask);
      end
      @(negedge clk);
      cmd = CAM_NOP;
      if (kind == 3) readback();
    end
    readback();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
