// toot_bypass: the Turn-on-on-Turn (TooT) bypass latch and controller of one
// mesh input port.
//
// While the port's input buffer is not powered (fine-grained mode) or the
// whole router is gated (coarse-grained mode), an arriving flit is caught in a
// latch that holds one flit per VC. The TooT controller computes the flit's
// route: a straight packet (leaving by the opposite port) is sent on through
// the bypass without waking anything (byp_req, taken when byp_grant is high);
// a packet that must turn or eject raises wake_req (and wake_turn for a turn)
// and waits. Once the buffer is ON, latched flits are moved into it one per
// cycle, and only then are new arrivals accepted; with the buffer ON every
// arrival is written straight into it.
//
// Interface: in_link/in_ready face the upstream router (per-VC ready,
// computed from registered state only); buf_* write the port's vc_buffer;
// out_ready is the downstream ready of the opposite output. Timing: a flit
// latched in cycle t can leave through the bypass in cycle t+1.
// The bypass latch and turn check follow TooT as the paper describes it; the
// per-VC ready/valid flow control and the round-robin among latched straight
// flits are this design's choices.
module toot_bypass
  import cafeen_pkg::*;
#(
  parameter port_e IN_PORT = PORT_N
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] cur_row,
  input  logic [COORD_W-1:0] cur_col,
  // upstream link
  input  link_t              in_link,
  output logic [NUM_VC-1:0]  in_ready,
  // input buffer of this port
  input  logic               buf_on,
  input  logic [NUM_VC-1:0]  buf_room,
  output logic               buf_wr_en,
  output logic [VC_W-1:0]    buf_wr_vc,
  output flit_t              buf_wr_flit,
  // bypass toward the opposite output
  input  logic [NUM_VC-1:0]  out_ready,
  output logic               byp_req,
  output logic [VC_W-1:0]    byp_vc,
  output flit_t              byp_flit,
  input  logic               byp_grant,
  // TooT controller status
  output logic               wake_req,
  output logic               wake_turn,
  output logic               latch_busy
);
  flit_t             lat_flit [NUM_VC];
  logic [NUM_VC-1:0] lat_valid;
  logic [NUM_VC-1:0] lat_straight;
  logic [NUM_VC-1:0] lat_turn;
  logic [VC_W-1:0]   rr_ptr;
  logic [VC_W-1:0]   drain_vc;
  logic              drain;

  // TooT controller: route of each latched flit.
  for (genvar v = 0; v < NUM_VC; v++) begin : g_rc
    port_e op;
    route_compute u_rc (
      .cur_row (cur_row),
      .cur_col (cur_col),
      .dst_row (lat_flit[v].dst_row),
      .dst_col (lat_flit[v].dst_col),
      .route_yx(lat_flit[v].route_yx),
      .out_port(op)
    );
    assign lat_straight[v] = lat_valid[v] && (op == opposite(IN_PORT));
    assign lat_turn[v]     = lat_valid[v] && is_turn(IN_PORT, op);
  end

  assign wake_req   = |(lat_valid & ~lat_straight);
  assign wake_turn  = |lat_turn;
  assign latch_busy = |lat_valid;

  // Upstream ready: a free latch entry while gated; buffer room once on and
  // the latch has been emptied.
  always_comb begin
    for (int v = 0; v < NUM_VC; v++) begin
      in_ready[v] = buf_on ? (buf_room[v] && (lat_valid == '0)) : !lat_valid[v];
    end
  end

  // Bypass: round-robin among straight latched flits whose next hop is ready.
  always_comb begin
    byp_req = 1'b0;
    byp_vc  = '0;
    for (int k = NUM_VC - 1; k >= 0; k--) begin
      if (!buf_on && lat_straight[rr_ptr + VC_W'(k)] && out_ready[rr_ptr + VC_W'(k)]) begin
        byp_req = 1'b1;
        byp_vc  = rr_ptr + VC_W'(k);
      end
    end
    byp_flit = lat_flit[byp_vc];
  end

  // Drain latched flits into the buffer once it is on (lowest VC first).
  always_comb begin
    drain    = 1'b0;
    drain_vc = '0;
    for (int v = NUM_VC - 1; v >= 0; v--) begin
      if (lat_valid[v] && buf_room[v]) begin
        drain    = buf_on;
        drain_vc = VC_W'(v);
      end
    end
  end

  logic arrive;
  assign arrive = in_link.valid && in_ready[in_link.vc];

  always_comb begin
    if (drain) begin
      buf_wr_en   = 1'b1;
      buf_wr_vc   = drain_vc;
      buf_wr_flit = lat_flit[drain_vc];
    end else begin
      buf_wr_en   = arrive && buf_on;
      buf_wr_vc   = in_link.vc;
      buf_wr_flit = in_link.flit;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lat_valid <= '0;
      rr_ptr    <= '0;
    end else begin
      if (byp_req && byp_grant) begin
        lat_valid[byp_vc] <= 1'b0;
        rr_ptr            <= byp_vc + 1'b1;
      end
      if (drain) lat_valid[drain_vc] <= 1'b0;
      if (arrive && !buf_on) lat_valid[in_link.vc] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (arrive && !buf_on) lat_flit[in_link.vc] <= in_link.flit;
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (in_link.valid && !buf_on && !in_ready[in_link.vc]) |-> !arrive);
endmodule
