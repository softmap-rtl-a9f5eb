// ap_ctrl: the controller of the associative processor.
//
// It steps through the Softmax microprogram (ap_pkg::softmax_prog) and, for
// every micro-op, through the bit loops that ap_pass_gen defines. Each pass
// takes two cycles: a compare cycle (CAM_CMP) and a write cycle (CAM_WR),
// with the pass held stable across both. LOOP, END and a skipped SHL1 take
// one cycle each and issue nothing to the CAM.
//
// The division loop (micro-ops PC_DIV..LOOP) runs W_QUO times with counter k
// going from W_QUO-1 down to 0; k is the quotient bit written by QBIT. The
// first iteration skips the left shift, so the remainder starts as v_approx.
//
// Interface: `start` (one cycle, while `ready`) runs the program with the
// constants max_v, mu, vln2, vb, vc, which must stay stable until `done`.
// `done` pulses for one cycle at the end; `busy` is high while running.
// After reset the controller first clears the valid column of the CAM
// (ready is low during those 3 cycles). The host loads words only while
// `ready` is high.
//
// The sequencing of compare/write cycles follows the AP of the paper; the
// microprogram, the loop structure and the handshake are this design's own.
module ap_ctrl
  import ap_pkg::*;
#(
  parameter int LOG_ROWS = 11
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [W_V-1:0]      max_v,
  input  logic [W_MU-1:0]     mu,
  input  logic [W_LN2-1:0]    vln2,
  input  logic [W_VB-1:0]     vb,
  input  logic [W_VC-1:0]     vc,
  output cam_cmd_e            cmd,
  output pass_t               pass,
  output logic [LOG_ROWS-1:0] pair_lvl,
  output logic                ready,
  output logic                busy,
  output logic                done
);

  typedef enum logic [1:0] {S_IDLE, S_CMP, S_WR} state_e;

  localparam logic [PC_W-1:0] PC_CLRVAL = PC_W'(PROG_LEN - 2);

  state_e          state;
  logic [PC_W-1:0] pc;
  logic [IW-1:0]   j, i, k;
  logic [2:0]      p;
  logic            init;      // running the post-reset clear, no done pulse

  uop_t            uop;
  logic [31:0]     imm_val;
  logic [IW-1:0]   nj, ni;
  logic [2:0]      np;

  assign uop = softmax_prog(pc);

  always_comb begin
    unique case (uop.imm)
      IMM_MAX: imm_val = 32'(max_v);
      IMM_MU:  imm_val = 32'(mu);
      IMM_LN2: imm_val = 32'(vln2);
      IMM_VB:  imm_val = 32'(vb);
      IMM_VC:  imm_val = 32'(vc);
      default: imm_val = '0;
    endcase
  end

  ap_pass_gen #(.LOG_ROWS(LOG_ROWS)) u_lut (
    .uop, .j, .i, .p, .k, .imm_val, .pass, .nj, .ni, .np
  );

  logic is_ctl;   // micro-op that issues no pass this cycle
  assign is_ctl = (uop.op == OP_LOOP) || (uop.op == OP_END) ||
                  (uop.op == OP_SHL1 && k == IW'(W_QUO - 1));

  always_comb begin
    cmd = CAM_NOP;
    if (state == S_CMP && !is_ctl) cmd = CAM_CMP;
    if (state == S_WR)             cmd = CAM_WR;
  end

  assign pair_lvl = LOG_ROWS'(j);
  assign ready    = (state == S_IDLE);
  assign busy     = (state != S_IDLE) && !init;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CMP;
      pc    <= PC_CLRVAL;
      init  <= 1'b1;
      j <= '0; i <= '0; p <= '0; k <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_CMP;
            pc    <= '0;
            k     <= IW'(W_QUO - 1);
            j <= '0; i <= '0; p <= '0;
          end
        end
        S_CMP: begin
          if (uop.op == OP_END) begin
            state <= S_IDLE;
            done  <= !init;
            init  <= 1'b0;
          end else if (uop.op == OP_LOOP) begin
            if (k != '0) begin
              k  <= k - IW'(1);
              pc <= uop.d[PC_W-1:0];
            end else begin
              pc <= pc + PC_W'(1);
            end
          end else if (is_ctl) begin
            pc <= pc + PC_W'(1);
          end else begin
            state <= S_WR;
          end
        end
        S_WR: begin
          state <= S_CMP;
          if (p + 3'd1 < np) begin
            p <= p + 3'd1;
          end else begin
            p <= '0;
            if (i + IW'(1) < ni) begin
              i <= i + IW'(1);
            end else begin
              i <= '0;
              if (j + IW'(1) < nj) begin
                j <= j + IW'(1);
              end else begin
                j  <= '0;
                pc <= pc + PC_W'(1);
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
