// tb_toot_bypass: directed checks of the TooT bypass latch and controller at
// the W input of router (3,3): a straight packet leaves through the bypass
// one cycle after it was latched, without a wake-up request, and waits while
// the next hop is not ready; a turning packet and an ejecting packet raise
// wake_req (wake_turn only for the turn) and block their VC; once the buffer
// is on the latched flit is moved into it before new arrivals are accepted;
// with the buffer on, arrivals are written straight into the buffer.
module tb_toot_bypass;
  import cafeen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  link_t in_link;
  logic [NUM_VC-1:0] in_ready, buf_room, out_ready;
  logic buf_on, buf_wr_en, byp_req, byp_grant, wake_req, wake_turn, latch_busy;
  logic [VC_W-1:0] buf_wr_vc, byp_vc;
  flit_t buf_wr_flit, byp_flit;
  int checks = 0, failures = 0;

  toot_bypass #(.IN_PORT(PORT_W)) dut (
    .clk, .rst_n, .cur_row(3'd3), .cur_col(3'd3), .in_link, .in_ready,
    .buf_on, .buf_room, .buf_wr_en, .buf_wr_vc, .buf_wr_flit,
    .out_ready, .byp_req, .byp_vc, .byp_flit, .byp_grant, .wake_req, .wake_turn, .latch_busy);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t %s", $time, m); end
  endtask

  function automatic flit_t mk(int r, int c, bit yx, int tag);
    flit_t f = '0;
    f.dst_row = 3'(r); f.dst_col = 3'(c); f.route_yx = yx; f.payload = PAY_W'(tag);
    return f;
  endfunction

  task automatic send(int vc, flit_t f);
    in_link = '{valid: 1'b1, vc: VC_W'(vc), flit: f};
    @(posedge clk); #1;
    in_link = '0;
  endtask

  assign byp_grant = byp_req;   // the allocator always grants here

  initial begin
    flit_t s, t, e;
    in_link = '0; buf_on = 0; buf_room = '1; out_ready = '1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk(in_ready == '1 && !byp_req && !wake_req, "idle after reset");
    // straight: W input, destination east in the same row
    s = mk(3, 6, 0, 11);
    out_ready = 4'b1101;   // VC1 of the next hop is full
    send(1, s);
    chk(!byp_req && !wake_req && latch_busy, "straight flit waits for the next hop");
    chk(in_ready == 4'b1101, "its VC is blocked, the others are free");
    out_ready = '1; #1;
    chk(byp_req && byp_vc == 1 && byp_flit == s, "straight flit is offered to the bypass");
    @(posedge clk); #1;
    chk(!byp_req && !latch_busy && in_ready == '1, "bypass freed the latch");
    // turning packet: XY to (5,3) turns south here
    t = mk(5, 3, 0, 22);
    send(2, t);
    chk(wake_req && wake_turn && !byp_req, "turning flit requests a wake-up");
    chk(in_ready == 4'b1011, "turning flit blocks its VC");
    // ejecting packet on another VC
    e = mk(3, 3, 0, 33);
    send(0, e);
    chk(wake_req && wake_turn, "two flits wait");
    // the buffer comes on: drain VC0 then VC2, arrivals held off
    buf_on = 1; #1;
    chk(in_ready == '0, "arrivals wait while the latch drains");
    chk(buf_wr_en && buf_wr_vc == 0 && buf_wr_flit == e, "ejecting flit moved into the buffer first");
    @(posedge clk); #1;
    chk(buf_wr_en && buf_wr_vc == 2 && buf_wr_flit == t, "turning flit moved next");
    chk(!wake_turn || wake_req, "wake flags follow the latch");
    @(posedge clk); #1;
    chk(!buf_wr_en && !latch_busy && !wake_req && in_ready == '1, "latch empty");
    // buffer on: arrivals go straight in, even straight ones
    in_link = '{valid: 1'b1, vc: 2'd3, flit: s}; #1;
    chk(buf_wr_en && buf_wr_vc == 3 && buf_wr_flit == s && !byp_req, "powered buffer takes the arrival");
    @(posedge clk); #1;
    in_link = '0;
    chk(!latch_busy, "nothing latched while the buffer is on");
    buf_room = 4'b0111; #1;
    chk(in_ready == 4'b0111, "ready follows buffer room");
    // ejection alone: wake without turn
    buf_on = 0; buf_room = '1;
    send(1, e);
    chk(wake_req && !wake_turn, "ejection requests a wake-up but is no turn");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
