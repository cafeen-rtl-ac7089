// q_table: the Q-value table of one CAFEEN routing agent (Table 1 of the
// method): one state per destination row and per destination column
// (ROWS + COLS = 16 states for an 8x8 mesh), two actions (XY, YX), Q_W = 4
// bits per value, held in registers.
//
// Reads: q_xy = Q(column state rd_col, XY) and q_yx = Q(row state rd_row, YX),
// combinational; these are the two values the agent compares for a
// destination (rd_row, rd_col), because an XY packet turns in the
// destination's column and a YX packet in the destination's row.
// Updates: up to four per cycle (one per reward-channel direction), each
// applying the single-step Q-learning rule Q <- (1 - alpha) Q + alpha r.
// A 4-bit value cannot hold a change of alpha (r - Q) with alpha = 0.01, so
// the rule is applied with stochastic rounding: Q moves one step toward r
// when upd_rand < ALPHA_Q16 * |r - Q| (alpha = ALPHA_Q16 / 65536), which gives
// the same expected update. Updates land at the clock edge and are ignored
// while enable (table powered, coarse mode) is low; values are kept. Values
// reset to 0. Simultaneous updates must target distinct entries.
// Table shape, widths, alpha and Eq. 2 follow the paper; the stochastic
// rounding, reset value and state numbering (rows first) are this design's.
module q_table
  import cafeen_pkg::*;
#(
  parameter int unsigned ROWS      = 8,
  parameter int unsigned COLS      = 8,
  parameter int unsigned QW        = cafeen_pkg::Q_W,
  parameter int unsigned ALPHA_Q16 = 655,
  parameter int unsigned NUPD      = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               enable,
  input  logic [COORD_W-1:0] rd_row,
  input  logic [COORD_W-1:0] rd_col,
  output logic [QW-1:0]      q_xy,
  output logic [QW-1:0]      q_yx,
  input  logic [NUPD-1:0]    upd_valid,
  input  logic [4:0]         upd_state  [NUPD],
  input  logic [NUPD-1:0]    upd_action,
  input  logic [QW-1:0]      upd_reward [NUPD],
  input  logic [15:0]        upd_rand   [NUPD]
);
  localparam int unsigned NS = ROWS + COLS;

  logic [QW-1:0] q [NS][2];

  assign q_xy = q[ROWS + int'(rd_col)][0];
  assign q_yx = q[int'(rd_row)][1];

  // Per-update step decision.
  logic [NUPD-1:0] step, up;
  always_comb begin
    for (int u = 0; u < NUPD; u++) begin
      logic [QW-1:0] cur;
      logic [QW-1:0] mag;
      logic [31:0]   prob;
      cur     = q[int'(upd_state[u])][upd_action[u]];
      up[u]   = upd_reward[u] > cur;
      mag     = up[u] ? upd_reward[u] - cur : cur - upd_reward[u];
      prob    = 32'(ALPHA_Q16) * 32'(mag);
      step[u] = upd_valid[u] && enable && (mag != '0) && (32'(upd_rand[u]) < prob);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NS; s++) begin
        q[s][0] <= '0;
        q[s][1] <= '0;
      end
    end else begin
      for (int u = 0; u < NUPD; u++) begin
        if (step[u]) begin
          q[int'(upd_state[u])][upd_action[u]] <=
            up[u] ? q[int'(upd_state[u])][upd_action[u]] + 1'b1
                  : q[int'(upd_state[u])][upd_action[u]] - 1'b1;
        end
      end
    end
  end
endmodule
