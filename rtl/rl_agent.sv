// rl_agent: the CAFEEN routing agent of one router, sitting between the
// processing element (PE) and the router's local input buffer.
//
// Routing decision: a packet from the PE is taken into a one-entry injection
// register (inj_ready while it is empty). At that moment the agent fills in
// the source coordinates and chooses the path. In fine-grained mode, or when
// source and destination share a row or a column (no turn is needed), the
// path is XY. In coarse-grained mode the agent is epsilon-greedy: with
// probability EPS_Q16/65536 (0.05) it picks XY or YX at random, otherwise the
// action with the larger Q-value, Q(destination column, XY) against
// Q(destination row, YX); a tie picks XY. The VC is taken from the partition
// of the chosen path (XY: VCs 0-1, YX: VCs 2-3, alternating within the
// pair), so XY and YX packets never share a VC and cannot form a cyclic
// dependency. The register drains into the local buffer (loc_wr_*) when that
// buffer is on and the VC has room; demand asks the power controller to wake
// the local buffer meanwhile.
// Learning: a reward flit arriving from the E or W neighbour comes from a
// turning router in this row and updates Q(its column, XY); one arriving from
// N or S updates Q(its row, YX). Updates only happen in coarse mode, when the
// Q-table is powered.
// What follows the paper: the XY/YX action set, the state encoding, the
// update targets, epsilon-greedy selection and the VC partitioning. This
// design's own: the injection register, the tie rule, the LFSR random
// source and the exact VC split.
module rl_agent
  import cafeen_pkg::*;
#(
  parameter int unsigned ROWS      = 8,
  parameter int unsigned COLS      = 8,
  parameter int unsigned EPS_Q16   = 3277,
  parameter int unsigned ALPHA_Q16 = 655,
  parameter logic [15:0] SEED      = 16'hACE1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] cur_row,
  input  logic [COORD_W-1:0] cur_col,
  input  pg_mode_e           mode,
  // PE injection
  input  logic               inj_valid,
  input  flit_t              inj_flit,
  output logic               inj_ready,
  // local input buffer
  input  logic               loc_on,
  input  logic [NUM_VC-1:0]  loc_room,
  output logic               loc_wr_en,
  output logic [VC_W-1:0]    loc_wr_vc,
  output flit_t              loc_wr_flit,
  output logic               demand,
  // reward channel, index = direction the flit arrives from (N, E, S, W)
  input  reward_flit_t       rwd_in [NUM_DIRS],
  // observation
  output logic               chose_yx,
  output logic               explored
);
  logic            reg_valid;
  flit_t           reg_flit;
  logic [VC_W-1:0] reg_vc;
  logic            tog;
  logic [15:0]     rnd_a, rnd_b;
  logic [Q_W-1:0]  q_xy, q_yx;

  lfsr16 #(.SEED(SEED))          u_lfsr_a (.clk, .rst_n, .value(rnd_a));
  lfsr16 #(.SEED(SEED ^ 16'h5A5A)) u_lfsr_b (.clk, .rst_n, .value(rnd_b));

  // Q-table updates from the reward channel.
  logic [NUM_DIRS-1:0] upd_valid, upd_action;
  logic [4:0]          upd_state  [NUM_DIRS];
  logic [Q_W-1:0]      upd_reward [NUM_DIRS];
  logic [15:0]         upd_rand   [NUM_DIRS];

  always_comb begin
    for (int d = 0; d < NUM_DIRS; d++) begin
      logic horiz;
      horiz         = (d == int'(PORT_E)) || (d == int'(PORT_W));
      upd_valid[d]  = rwd_in[d].valid;
      upd_action[d] = !horiz;                                   // E/W: XY, N/S: YX
      upd_state[d]  = horiz ? 5'(ROWS) + 5'(rwd_in[d].coord) : 5'(rwd_in[d].coord);
      upd_reward[d] = rwd_in[d].reward;
      upd_rand[d]   = ((rnd_b >> (4*d)) | (rnd_b << (16-4*d))) ^ (rnd_a >> d);
    end
  end

  q_table #(.ROWS(ROWS), .COLS(COLS), .ALPHA_Q16(ALPHA_Q16)) u_qt (
    .clk, .rst_n,
    .enable    (mode == PG_COARSE),
    .rd_row    (inj_flit.dst_row),
    .rd_col    (inj_flit.dst_col),
    .q_xy, .q_yx,
    .upd_valid, .upd_state, .upd_action, .upd_reward, .upd_rand
  );

  // Action selection.
  logic needs_turn;
  always_comb begin
    needs_turn = (inj_flit.dst_row != cur_row) && (inj_flit.dst_col != cur_col);
    explored   = (mode == PG_COARSE) && needs_turn && (32'(rnd_a) < 32'(EPS_Q16));
    if (mode != PG_COARSE || !needs_turn) chose_yx = 1'b0;
    else if (explored)                     chose_yx = rnd_a[0];
    else                                   chose_yx = q_yx > q_xy;
  end

  assign inj_ready   = !reg_valid;
  assign demand      = reg_valid;
  assign loc_wr_en   = reg_valid && loc_on && loc_room[reg_vc];
  assign loc_wr_vc   = reg_vc;
  assign loc_wr_flit = reg_flit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_valid <= 1'b0;
      reg_vc    <= '0;
      tog       <= 1'b0;
    end else begin
      if (loc_wr_en) reg_valid <= 1'b0;
      if (inj_valid && inj_ready) begin
        reg_valid <= 1'b1;
        reg_vc    <= {chose_yx, tog};
        tog       <= !tog;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (inj_valid && inj_ready) begin
      reg_flit          <= inj_flit;
      reg_flit.src_row  <= cur_row;
      reg_flit.src_col  <= cur_col;
      reg_flit.route_yx <= chose_yx;
    end
  end

  a_vc_class: assert property (@(posedge clk) disable iff (!rst_n)
    loc_wr_en |-> (loc_wr_vc[VC_W-1] == loc_wr_flit.route_yx));
endmodule
