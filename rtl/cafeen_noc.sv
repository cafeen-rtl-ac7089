// cafeen_noc: the CAFEEN network-on-chip, a ROWS x COLS (8 x 8) 2D mesh of
// cafeen_router instances. This is the top of the design.
//
// Neighbouring routers are joined by a data link in each direction (valid,
// VC and a 128-bit flit forward, a per-VC ready backward) and by the
// dedicated reward channel, which carries the MARL reward flits straight
// along rows and columns. Node n = row * COLS + col; row 0 is the northern
// edge, column 0 the western edge. Every node's processing element (not part
// of this RTL) connects through inj_* (a packet enters when inj_valid and
// inj_ready are both high; the router fills in the source and the path) and
// ej_* (a packet for this node leaves when ej_valid and ej_ready are high).
// Links leaving the mesh are tied off: nothing enters from outside, and an
// edge output never receives ready, which is harmless because XY and YX
// paths between mesh nodes never leave the mesh.
// Status per node: the power-gating mode, the state and power-switch enable
// of each of the 5 input buffers, and the Q-table power enable.
module cafeen_noc
  import cafeen_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8,
  localparam int unsigned N   = ROWS * COLS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         inj_valid,
  input  flit_t                inj_flit [N],
  output logic [N-1:0]         inj_ready,
  output logic [N-1:0]         ej_valid,
  output flit_t                ej_flit [N],
  input  logic [N-1:0]         ej_ready,
  output pg_mode_e             mode [N],
  output logic [NUM_PORTS-1:0] pwr_en [N],
  output logic [N-1:0]         qtab_pwr_en
);
  link_t             out_link  [N][NUM_DIRS];
  logic [NUM_VC-1:0] in_ready  [N][NUM_DIRS];
  reward_flit_t      rwd_out   [N][NUM_DIRS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned ID = r * COLS + c;
      link_t             nb_link  [NUM_DIRS];
      logic [NUM_VC-1:0] nb_ready [NUM_DIRS];
      reward_flit_t      nb_rwd   [NUM_DIRS];
      pwr_state_e        pstate   [NUM_PORTS];

      // Neighbour across side d: N = (r-1, c), E = (r, c+1), S = (r+1, c), W = (r, c-1).
      // What arrives on side d is what that neighbour sends out of opposite(d).
      if (r > 0) begin : g_n
        assign nb_link[DIR_N]  = out_link[ID - COLS][DIR_S];
        assign nb_ready[DIR_N] = in_ready[ID - COLS][DIR_S];
        assign nb_rwd[DIR_N]   = rwd_out[ID - COLS][DIR_S];
      end else begin : g_n0
        assign nb_link[DIR_N]  = '0;
        assign nb_ready[DIR_N] = '0;
        assign nb_rwd[DIR_N]   = '0;
      end
      if (c < COLS - 1) begin : g_e
        assign nb_link[DIR_E]  = out_link[ID + 1][DIR_W];
        assign nb_ready[DIR_E] = in_ready[ID + 1][DIR_W];
        assign nb_rwd[DIR_E]   = rwd_out[ID + 1][DIR_W];
      end else begin : g_e0
        assign nb_link[DIR_E]  = '0;
        assign nb_ready[DIR_E] = '0;
        assign nb_rwd[DIR_E]   = '0;
      end
      if (r < ROWS - 1) begin : g_s
        assign nb_link[DIR_S]  = out_link[ID + COLS][DIR_N];
        assign nb_ready[DIR_S] = in_ready[ID + COLS][DIR_N];
        assign nb_rwd[DIR_S]   = rwd_out[ID + COLS][DIR_N];
      end else begin : g_s0
        assign nb_link[DIR_S]  = '0;
        assign nb_ready[DIR_S] = '0;
        assign nb_rwd[DIR_S]   = '0;
      end
      if (c > 0) begin : g_w
        assign nb_link[DIR_W]  = out_link[ID - 1][DIR_E];
        assign nb_ready[DIR_W] = in_ready[ID - 1][DIR_E];
        assign nb_rwd[DIR_W]   = rwd_out[ID - 1][DIR_E];
      end else begin : g_w0
        assign nb_link[DIR_W]  = '0;
        assign nb_ready[DIR_W] = '0;
        assign nb_rwd[DIR_W]   = '0;
      end

      cafeen_router #(.ROWS(ROWS), .COLS(COLS)) u_router (
        .clk, .rst_n,
        .cur_row       (COORD_W'(r)),
        .cur_col       (COORD_W'(c)),
        .in_link       (nb_link),
        .in_ready      (in_ready[ID]),
        .out_link      (out_link[ID]),
        .out_ready     (nb_ready),
        .inj_valid     (inj_valid[ID]),
        .inj_flit      (inj_flit[ID]),
        .inj_ready     (inj_ready[ID]),
        .ej_valid      (ej_valid[ID]),
        .ej_flit       (ej_flit[ID]),
        .ej_ready      (ej_ready[ID]),
        .rwd_in        (nb_rwd),
        .rwd_out       (rwd_out[ID]),
        .mode          (mode[ID]),
        .pwr_state     (pstate),
        .pwr_en        (pwr_en[ID]),
        .qtab_pwr_en   (qtab_pwr_en[ID]),
        .ev_bypass     (),
        .ev_turns      (),
        .ev_epoch_start(),
        .ev_reward_sent(),
        .ev_inject_yx  (),
        .ev_explore    ()
      );
    end
  end
endmodule
