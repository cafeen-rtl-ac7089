// cafeen_router: one router of the CAFEEN mesh: a 5-port input-buffered
// virtual-channel router with TooT bypasses, fine/coarse power gating of its
// input buffers and a multi-agent reinforcement-learning (MARL) routing agent.
//
// Datapath. Each mesh input (N, E, S, W) has a toot_bypass and a vc_buffer
// (4 VCs x 4 flits x 128 bits); the local input has the rl_agent and a
// vc_buffer. Flits in powered buffers compute their output with
// route_compute (XY or YX, as marked by the source agent) and compete in the
// switch_allocator, which also serves the bypass latches. The crossbar is the
// output multiplexer driven by the allocator. A flit written into a buffer in
// cycle t can leave on a link in cycle t+1 and is written into the next
// router's buffer or latch at the end of that cycle, so one hop takes one
// cycle when the path is powered. Links use per-VC ready/valid; a flit keeps
// its VC, and the agent's VC partitioning (XY: 0-1, YX: 2-3) keeps the two
// path classes apart.
// Power. pg_controller keeps one OFF/WAKE/ON state per input buffer;
// pg_mode_selector chooses fine-grained (one buffer at a time, t_idle = t_on
// = 2) or coarse-grained (whole router, t_idle = 4, t_on = 8) gating. Straight
// packets pass gated buffers through the bypass; turning and ejecting packets
// wake the buffer they need. The Q-table is powered (qtab_pwr_en) only in
// coarse mode. pwr_en goes to each buffer's power switch.
// Learning. In coarse mode a turning packet reaching the router (waking it,
// or turning in it while powered) starts a reward epoch in reward_unit; the packets turned in it are
// broadcast along the row and column on the dedicated reward channel and
// update the agents there.
// The crossbar, allocator and route logic are treated as always powered:
// only the input buffers and the Q-table are separate power domains here.
// Single-flit packets, the one-cycle pipeline and the mode-switch rule are
// this design's choices; the rest follows the paper's description.
module cafeen_router
  import cafeen_pkg::*;
#(
  parameter int unsigned ROWS          = 8,
  parameter int unsigned COLS          = 8,
  parameter int unsigned T_IDLE_FINE   = 2,
  parameter int unsigned T_ON_FINE     = 2,
  parameter int unsigned T_IDLE_COARSE = 4,
  parameter int unsigned T_ON_COARSE   = 8,
  parameter int unsigned T_EPOCH       = 16,
  parameter int unsigned EPS_Q16       = 3277,
  parameter int unsigned ALPHA_Q16     = 655,
  parameter int unsigned MODE_WINDOW   = 64,
  parameter int unsigned MODE_HI_THR   = 8,
  parameter int unsigned MODE_LO_THR   = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] cur_row,
  input  logic [COORD_W-1:0] cur_col,
  // mesh links, index N, E, S, W
  input  link_t              in_link   [NUM_DIRS],
  output logic [NUM_VC-1:0]  in_ready  [NUM_DIRS],
  output link_t              out_link  [NUM_DIRS],
  input  logic [NUM_VC-1:0]  out_ready [NUM_DIRS],
  // processing element
  input  logic               inj_valid,
  input  flit_t              inj_flit,
  output logic               inj_ready,
  output logic               ej_valid,
  output flit_t              ej_flit,
  input  logic               ej_ready,
  // reward channel, index = side (N, E, S, W)
  input  reward_flit_t       rwd_in  [NUM_DIRS],
  output reward_flit_t       rwd_out [NUM_DIRS],
  // power state
  output pg_mode_e           mode,
  output pwr_state_e         pwr_state [NUM_PORTS],
  output logic [NUM_PORTS-1:0] pwr_en,
  output logic               qtab_pwr_en,
  // event strobes (one per occurrence in the cycle they happen)
  output logic [NUM_DIRS-1:0] ev_bypass,
  output logic [2:0]         ev_turns,
  output logic               ev_epoch_start,
  output logic               ev_reward_sent,
  output logic               ev_inject_yx,
  output logic               ev_explore
);
  // ---------------------------------------------------------------- buffers
  logic [NUM_PORTS-1:0] buf_on;
  logic                 buf_wr_en   [NUM_PORTS];
  logic [VC_W-1:0]      buf_wr_vc   [NUM_PORTS];
  flit_t                buf_wr_flit [NUM_PORTS];
  logic [NUM_VC-1:0]    buf_rd      [NUM_PORTS];
  logic [NUM_VC-1:0]    head_valid  [NUM_PORTS];
  flit_t                head_flit   [NUM_PORTS][NUM_VC];
  logic [NUM_VC-1:0]    buf_room    [NUM_PORTS];

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_buf
    vc_buffer u_buf (
      .clk, .rst_n,
      .pwr_on    (buf_on[p]),
      .wr_en     (buf_wr_en[p]),
      .wr_vc     (buf_wr_vc[p]),
      .wr_flit   (buf_wr_flit[p]),
      .rd_en     (buf_rd[p]),
      .head_valid(head_valid[p]),
      .head_flit (head_flit[p]),
      .room      (buf_room[p])
    );
  end

  // ---------------------------------------------------------------- bypasses
  logic [NUM_DIRS-1:0] byp_req, byp_grant, wake_req, wake_turn, latch_busy;
  logic [VC_W-1:0]     byp_vc   [NUM_DIRS];
  flit_t               byp_flit [NUM_DIRS];

  for (genvar d = 0; d < NUM_DIRS; d++) begin : g_byp
    toot_bypass #(.IN_PORT(port_e'(d))) u_byp (
      .clk, .rst_n, .cur_row, .cur_col,
      .in_link    (in_link[d]),
      .in_ready   (in_ready[d]),
      .buf_on     (buf_on[d]),
      .buf_room   (buf_room[d]),
      .buf_wr_en  (buf_wr_en[d]),
      .buf_wr_vc  (buf_wr_vc[d]),
      .buf_wr_flit(buf_wr_flit[d]),
      .out_ready  (out_ready[2'(opposite(port_e'(d)))]),
      .byp_req    (byp_req[d]),
      .byp_vc     (byp_vc[d]),
      .byp_flit   (byp_flit[d]),
      .byp_grant  (byp_grant[d]),
      .wake_req   (wake_req[d]),
      .wake_turn  (wake_turn[d]),
      .latch_busy (latch_busy[d])
    );
  end

  // ---------------------------------------------------------------- agent
  logic         agent_demand, agent_yx, agent_explore;

  rl_agent #(
    .ROWS(ROWS), .COLS(COLS), .EPS_Q16(EPS_Q16), .ALPHA_Q16(ALPHA_Q16)
  ) u_agent (
    .clk, .rst_n, .cur_row, .cur_col, .mode,
    .inj_valid, .inj_flit, .inj_ready,
    .loc_on     (buf_on[PORT_L]),
    .loc_room   (buf_room[PORT_L]),
    .loc_wr_en  (buf_wr_en[PORT_L]),
    .loc_wr_vc  (buf_wr_vc[PORT_L]),
    .loc_wr_flit(buf_wr_flit[PORT_L]),
    .demand     (agent_demand),
    .rwd_in     (rwd_in),
    .chose_yx   (agent_yx),
    .explored   (agent_explore)
  );

  assign ev_inject_yx = buf_wr_en[PORT_L] && buf_wr_flit[PORT_L].route_yx;
  assign ev_explore   = inj_valid && inj_ready && agent_explore;

  // ---------------------------------------------------------------- power
  logic [NUM_PORTS-1:0] demand, busy;
  logic                 all_off;

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      busy[p] = (head_valid[p] != '0) || buf_wr_en[p];
    end
    demand = {agent_demand, wake_req};
  end

  pg_controller #(
    .T_IDLE_FINE(T_IDLE_FINE), .T_ON_FINE(T_ON_FINE),
    .T_IDLE_COARSE(T_IDLE_COARSE), .T_ON_COARSE(T_ON_COARSE)
  ) u_pg (
    .clk, .rst_n, .mode,
    .demand, .busy,
    .state         (pwr_state),
    .pwr_en,
    .buf_on,
    .all_off
  );

  pg_mode_selector #(
    .WINDOW(MODE_WINDOW), .HI_THR(MODE_HI_THR), .LO_THR(MODE_LO_THR)
  ) u_mode (
    .clk, .rst_n,
    .need(demand | busy),
    .mode
  );

  assign qtab_pwr_en = (mode == PG_COARSE);

  // ---------------------------------------------------------------- switch
  logic [NUM_VC-1:0]  sa_req   [NUM_PORTS];
  port_e              sa_port  [NUM_PORTS][NUM_VC];
  logic [NUM_PORTS-1:0] out_valid;
  logic [2:0]         out_src  [NUM_PORTS];
  logic [VC_W-1:0]    out_vc   [NUM_PORTS];

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_rc
    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      route_compute u_rc (
        .cur_row, .cur_col,
        .dst_row (head_flit[p][v].dst_row),
        .dst_col (head_flit[p][v].dst_col),
        .route_yx(head_flit[p][v].route_yx),
        .out_port(sa_port[p][v])
      );
      assign sa_req[p][v] = buf_on[p] && head_valid[p][v] &&
        ((sa_port[p][v] == PORT_L) ? ej_ready : out_ready[2'(sa_port[p][v])][v]);
    end
  end

  switch_allocator u_sa (
    .clk, .rst_n,
    .req      (sa_req),
    .req_port (sa_port),
    .byp_req,
    .vc_grant (buf_rd),
    .out_valid,
    .out_src,
    .out_vc,
    .byp_grant
  );

  // Crossbar / output multiplexers.
  always_comb begin
    for (int o = 0; o < NUM_DIRS; o++) begin
      out_link[o].valid = out_valid[o];
      if (out_src[o] == 3'(NUM_PORTS)) begin
        out_link[o].vc   = byp_vc[2'(opposite(port_e'(o)))];
        out_link[o].flit = byp_flit[2'(opposite(port_e'(o)))];
      end else begin
        out_link[o].vc   = out_vc[o];
        out_link[o].flit = head_flit[out_src[o]][out_vc[o]];
      end
    end
    ej_valid = out_valid[PORT_L];
    ej_flit  = head_flit[out_src[PORT_L]][out_vc[PORT_L]];
  end

  // Turns made by the crossbar this cycle (the reward of an epoch).
  always_comb begin
    ev_turns = '0;
    for (int o = 0; o < NUM_DIRS; o++) begin
      if (out_valid[o] && out_src[o] < 3'(NUM_DIRS) && is_turn(port_e'(out_src[o]), port_e'(o)))
        ev_turns = ev_turns + 1'b1;
    end
  end
  assign ev_bypass = byp_grant;

  // ---------------------------------------------------------------- reward
  // An epoch starts, in coarse mode, when a turning packet reaches this
  // router: it waits in a bypass latch for the router to wake, or it turns
  // through the crossbar of the powered router.
  logic epoch_active, epoch_done, epoch_start;
  assign epoch_start = (mode == PG_COARSE) && ((wake_turn != '0) || (ev_turns != '0));

  reward_unit #(.T_EPOCH(T_EPOCH)) u_rwd (
    .clk, .rst_n, .cur_row, .cur_col,
    .epoch_start (epoch_start),
    .all_off,
    .turns       (ev_turns),
    .rwd_in,
    .rwd_out,
    .epoch_active,
    .epoch_done
  );

  assign ev_epoch_start = epoch_start && !epoch_active;
  assign ev_reward_sent = epoch_done;

  for (genvar d = 0; d < NUM_DIRS; d++) begin : g_chk
    a_link_ready: assert property (@(posedge clk) disable iff (!rst_n)
      out_link[d].valid |-> out_ready[d][out_link[d].vc]);
  end
endmodule
