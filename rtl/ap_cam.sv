// ap_cam: the content addressable memory of the associative processor,
// with its tag register and the row-pair selection of the 2D AP.
//
// ROWS words of COLS bits each. The array is not reset: like the SRAM it
// models, it holds whatever was last written.
//
// Commands (one per cycle):
//   CAM_CMP    every row compares the columns selected by cmask with ckey;
//              the match lines are stored in the tag register. In 2D
//              row-pair mode (pair_en) only rows r with r mod 2^(lvl+1) = 0
//              that have a partner r + 2^lvl take part, and the partner's bit
//              in column pair_col must also equal pair_val.
//   CAM_WR     every tagged row takes wkey (or, with row0_src, the content
//              of row 0) in the columns selected by wmask.
//   CAM_ROWWR  row row_addr takes wkey in the columns selected by wmask
//              (the host's row-by-row load port).
// rd_data is row rd_addr, registered: one cycle of latency.
//
// The compare and write follow the AP of the paper (mask, key and tag
// registers, compare/write cycles). The key and mask are held stable by the
// controller for a whole pass and enter here as inputs. The row-pair mode,
// which reads one bit of a neighbouring row, is this design's reading of
// the 2D AP's inter-row operations; the row-0 broadcast write is its way
// of copying the sum into every row.
module ap_cam
  import ap_pkg::*;
#(
  parameter int ROWS     = 2048,
  parameter int LOG_ROWS = $clog2(ROWS)
) (
  input  logic                clk,
  input  cam_cmd_e            cmd,
  input  pass_t               pass,
  input  logic [LOG_ROWS-1:0] pair_lvl,
  input  logic [LOG_ROWS-1:0] row_addr,
  input  logic [LOG_ROWS-1:0] rd_addr,
  output row_t                rd_data,
  output logic [ROWS-1:0]     tag
);

  row_t mem [ROWS];

  // match lines, all rows in parallel
  logic [ROWS-1:0] match;
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      logic sel;
      logic pbit;
      int   partner;
      partner  = r + (1 << pair_lvl);
      sel      = 1'b1;
      pbit     = 1'b0;
      if (pass.pair_en) begin
        sel = ((r & ((2 << pair_lvl) - 1)) == 0) && (partner < ROWS);
        if (partner < ROWS) pbit = mem[partner][pass.pair_col];
        sel = sel && (pbit == pass.pair_val);
      end
      match[r] = sel && (((mem[r] ^ pass.ckey) & pass.cmask) == '0);
    end
  end

  always_ff @(posedge clk) begin
    if (cmd == CAM_CMP) tag <= match;
  end

  row_t wsrc;
  assign wsrc = pass.row0_src ? mem[0] : pass.wkey;

  always_ff @(posedge clk) begin
    if (cmd == CAM_WR) begin
      for (int r = 0; r < ROWS; r++)
        if (tag[r]) mem[r] <= (mem[r] & ~pass.wmask) | (wsrc & pass.wmask);
    end else if (cmd == CAM_ROWWR) begin
      mem[row_addr] <= (mem[row_addr] & ~pass.wmask) | (pass.wkey & pass.wmask);
    end
    rd_data <= mem[rd_addr];
  end

endmodule
