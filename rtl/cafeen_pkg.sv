// cafeen_pkg: types and constants shared by the CAFEEN router and mesh.
//
// The sizes follow the evaluated configuration: an 8x8 mesh, 5-port routers
// with 4 virtual channels per port, 4 flit buffers per VC, 128-bit flits, and
// a 4-bit Q-value table. A packet is a single flit whose low bits hold the
// routing header (destination, source and the XY/YX route chosen by the
// source agent); the packet length and header layout are this design's own
// choice. Row indices grow southward, column indices grow eastward.
package cafeen_pkg;

  localparam int unsigned FLIT_W    = 128;
  localparam int unsigned COORD_W   = 3;     // enough for an 8x8 mesh
  localparam int unsigned NUM_PORTS = 5;
  localparam int unsigned NUM_DIRS  = 4;
  localparam int unsigned NUM_VC    = 4;
  localparam int unsigned VC_W      = 2;
  localparam int unsigned BUF_DEPTH = 4;
  localparam int unsigned Q_W       = 4;
  localparam int unsigned HDR_W     = 4 * COORD_W + 1;
  localparam int unsigned PAY_W     = FLIT_W - HDR_W;

  // Port numbering: N, E, S, W are the mesh directions, L the local PE.
  typedef enum logic [2:0] {
    PORT_N = 3'd0,
    PORT_E = 3'd1,
    PORT_S = 3'd2,
    PORT_W = 3'd3,
    PORT_L = 3'd4
  } port_e;

  // The same numbering as plain indices into [NUM_DIRS] arrays.
  localparam int unsigned DIR_N = 0;
  localparam int unsigned DIR_E = 1;
  localparam int unsigned DIR_S = 2;
  localparam int unsigned DIR_W = 3;

  typedef struct packed {
    logic [PAY_W-1:0]   payload;
    logic               route_yx;   // 0: XY path, 1: YX path
    logic [COORD_W-1:0] src_row;
    logic [COORD_W-1:0] src_col;
    logic [COORD_W-1:0] dst_row;
    logic [COORD_W-1:0] dst_col;
  } flit_t;

  // One mesh link in one direction; the per-VC ready travels back.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
    flit_t           flit;
  } link_t;

  // Reward flit on the dedicated straight reward channel.
  typedef struct packed {
    logic               valid;
    logic [Q_W-1:0]     reward;
    logic [COORD_W-1:0] coord;      // turning router's column (E/W) or row (N/S)
  } reward_flit_t;

  typedef enum logic [1:0] {
    PWR_OFF  = 2'd0,
    PWR_WAKE = 2'd1,
    PWR_ON   = 2'd2
  } pwr_state_e;

  typedef enum logic {
    PG_FINE   = 1'b0,
    PG_COARSE = 1'b1
  } pg_mode_e;

  function automatic port_e opposite(port_e p);
    case (p)
      PORT_N:  return PORT_S;
      PORT_E:  return PORT_W;
      PORT_S:  return PORT_N;
      PORT_W:  return PORT_E;
      default: return PORT_L;
    endcase
  endfunction

  // A packet turns when it enters on one axis and leaves on the other.
  function automatic logic is_turn(port_e in_p, port_e out_p);
    logic in_v, out_v;
    if (in_p == PORT_L || out_p == PORT_L) return 1'b0;
    in_v  = (in_p == PORT_N) || (in_p == PORT_S);
    out_v = (out_p == PORT_N) || (out_p == PORT_S);
    return in_v != out_v;
  endfunction

endpackage
