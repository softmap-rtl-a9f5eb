// softmap_ap: one attention head's associative processor computing the
// integer-only Softmax of a vector of up to ROWS words.
//
// One word v (M-bit two's complement) is stored per CAM row. The host
// loads the words row by row, then starts the AP with max(v) and the four
// constants worked out offline from the scaling factor S:
//   mu = floor(2^(2M) / v_ln2), v_ln2 = floor(ln2 / S),
//   v_b = floor(b / S), v_c = floor(c / (a S^2)),  a, b, c = 0.3585, 1.353, 0.344.
// All rows then run the same bit-serial program (ap_ctrl, ap_pass_gen on the
// CAM ap_cam):
//   x = max(v) - v, q = floor(x mu / 2^(2M)), r = x - q v_ln2,
//   v_approx = ((v_b - r)^2 + v_c) >> q,
//   sum = sum of v_approx over the loaded rows (2D row-pair reduction),
//   v_sm = floor(v_approx 2^(W_QUO-1) / sum).
// v_sm / 2^(W_QUO-1) approximates Softmax(S v). (The method's output scale
// S_sm = floor(a S^2) would be applied by the host if wanted.)
//
// Interface:
//   ld_en/ld_addr/ld_data  write word ld_data into row ld_addr (only while
//                          ready); the row is marked valid
//   start                  one-cycle pulse while ready
//   busy, done             done pulses once when the results are ready
//   rd_addr -> rd_sm, rd_approx, rd_sum   row contents, one cycle later
// Rows that were not loaded take no part in the sum; their outputs are
// meaningless. Loading all rows again is needed for the next vector.
//
// Timing: a fixed number of cycles per vector, independent of ROWS except
// for the log2(ROWS) levels of the reduction (see the README for the
// count). ROWS = SequenceLength / 2 = 2048 by default, the paper's largest
// sequence length of 4096.
module softmap_ap
  import ap_pkg::*;
#(
  parameter int ROWS     = 2048,
  parameter int LOG_ROWS = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // load port
  input  logic                ld_en,
  input  logic [LOG_ROWS-1:0] ld_addr,
  input  logic [W_V-1:0]      ld_data,
  // constants, stable from start to done
  input  logic [W_V-1:0]      max_v,
  input  logic [W_MU-1:0]     mu,
  input  logic [W_LN2-1:0]    vln2,
  input  logic [W_VB-1:0]     vb,
  input  logic [W_VC-1:0]     vc,
  // control
  input  logic                start,
  output logic                ready,
  output logic                busy,
  output logic                done,
  // result read port
  input  logic [LOG_ROWS-1:0] rd_addr,
  output logic [W_QUO-1:0]    rd_sm,
  output logic [W_APPROX-1:0] rd_approx,
  output logic [W_SUM-1:0]    rd_sum
);

  cam_cmd_e            ctrl_cmd, cmd;
  pass_t               ctrl_pass, pass;
  logic [LOG_ROWS-1:0] pair_lvl;
  row_t                rd_row;
  logic [ROWS-1:0]     tag;

  ap_ctrl #(.LOG_ROWS(LOG_ROWS)) u_ctrl (
    .clk, .rst_n, .start, .max_v, .mu, .vln2, .vb, .vc,
    .cmd(ctrl_cmd), .pass(ctrl_pass), .pair_lvl, .ready, .busy, .done
  );

  // The load port drives the CAM while the controller is idle.
  always_comb begin
    cmd  = ctrl_cmd;
    pass = ctrl_pass;
    if (ready && ld_en) begin
      cmd  = CAM_ROWWR;
      pass = '0;
      pass.wmask[C_VAL]         = 1'b1;
      pass.wkey [C_VAL]         = 1'b1;
      pass.wmask[C_V +: W_V]    = '1;
      pass.wkey [C_V +: W_V]    = ld_data;
    end
  end

  ap_cam #(.ROWS(ROWS), .LOG_ROWS(LOG_ROWS)) u_cam (
    .clk, .cmd, .pass, .pair_lvl, .row_addr(ld_addr), .rd_addr,
    .rd_data(rd_row), .tag
  );

  assign rd_sm     = rd_row[C_QUO +: W_QUO];
  assign rd_approx = rd_row[C_SQ  +: W_APPROX];
  assign rd_sum    = rd_row[C_SUM +: W_SUM];

  // the host may only load or start while the AP is idle
  property p_no_load_when_busy;
    @(posedge clk) disable iff (!rst_n) ld_en |-> ready;
  endproperty
  a_no_load_when_busy: assert property (p_no_load_when_busy);

  property p_no_start_when_busy;
    @(posedge clk) disable iff (!rst_n) start |-> ready;
  endproperty
  a_no_start_when_busy: assert property (p_no_start_when_busy);

endmodule
