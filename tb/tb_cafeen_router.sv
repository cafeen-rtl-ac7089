// tb_cafeen_router: one CAFEEN router at (1,1), driven through its links.
// Checks: a straight packet crosses the gated router through the bypass in
// one cycle without powering any buffer; a turning packet wakes only its
// input buffer (fine mode) and leaves T_ON_FINE + 2 = 4 cycles after it was
// latched; the buffer is gated again 2 idle cycles later; an ejecting packet
// reaches the PE; an injected packet leaves by its XY port with the source
// filled in; heavy turning traffic from all sides switches the router to
// coarse mode, after which a turn into the gated router wakes all five
// buffers for T_ON_COARSE = 8 cycles and starts a reward epoch that is
// broadcast on all four sides.
module tb_cafeen_router;
  import cafeen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  link_t in_link [4], out_link [4];
  logic [NUM_VC-1:0] in_ready [4], out_ready [4];
  logic inj_valid, inj_ready, ej_valid, ej_ready, qtab_pwr_en;
  flit_t inj_flit, ej_flit;
  reward_flit_t rwd_in [4], rwd_out [4];
  pg_mode_e mode;
  pwr_state_e pwr_state [5];
  logic [4:0] pwr_en;
  logic [3:0] ev_bypass;
  logic [2:0] ev_turns;
  logic ev_epoch_start, ev_reward_sent, ev_inject_yx, ev_explore;
  int checks = 0, failures = 0;

  cafeen_router dut (.clk, .rst_n, .cur_row(3'd1), .cur_col(3'd1), .in_link, .in_ready, .out_link, .out_ready,
    .inj_valid, .inj_flit, .inj_ready, .ej_valid, .ej_flit, .ej_ready, .rwd_in, .rwd_out,
    .mode, .pwr_state, .pwr_en, .qtab_pwr_en, .ev_bypass, .ev_turns, .ev_epoch_start, .ev_reward_sent,
    .ev_inject_yx, .ev_explore);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL t=%0t %s", $time, m); end
  endtask

  function automatic flit_t mk(int r, int c, bit yx, int tag);
    flit_t f = '0;
    f.dst_row = 3'(r); f.dst_col = 3'(c); f.route_yx = yx; f.payload = PAY_W'(tag);
    return f;
  endfunction

  // Present a flit on side d for one cycle (it is taken at the edge).
  task automatic send(int d, int vc, flit_t f);
    in_link[d] = '{valid: 1'b1, vc: VC_W'(vc), flit: f};
    @(posedge clk); #1;
    in_link[d] = '0;
  endtask

  // Cycles until side o (4 = PE) shows a valid flit; it is compared with f.
  task automatic wait_out(int o, flit_t f, output int n);
    n = 0;
    while (!((o == 4) ? ej_valid : out_link[o].valid) && n < 100) begin @(posedge clk); #1; n++; end
    chk(((o == 4) ? ej_flit : out_link[o].flit) == f, $sformatf("flit content on side %0d", o));
  endtask

  initial begin
    flit_t f;
    int n, eps;
    for (int d = 0; d < 4; d++) begin in_link[d] = '0; out_ready[d] = '1; rwd_in[d] = '0; end
    inj_valid = 0; inj_flit = '0; ej_ready = 1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk(pwr_en == 0 && mode == PG_FINE, "gated, fine mode after reset");
    // 1. straight W -> E through the bypass
    f = mk(1, 5, 0, 1);
    send(3, 1, f);
    chk(out_link[1].valid && out_link[1].flit == f && out_link[1].vc == 1, "bypass: out E one cycle later");
    chk(pwr_en == 0 && ev_bypass == 4'b1000, "bypass: no buffer woken");
    @(posedge clk); #1;
    // 2. turning: from W (travelling east) to (4,1) XY -> out S
    f = mk(4, 1, 0, 2);
    send(3, 0, f);
    wait_out(2, f, n);
    chk(n == 4, $sformatf("turn: leaves 4 cycles after latching (%0d)", n));
    chk(pwr_en == 5'b01000, "fine: only the W buffer is on");
    chk(ev_turns == 1, "turn counted");
    @(posedge clk); #1;
    @(posedge clk); #1;
    chk(pwr_en == 5'b01000, "W buffer on for 2 idle cycles");
    @(posedge clk); #1;
    chk(pwr_en == 0, "W buffer gated after 2 idle cycles");
    // 3. ejection from N
    f = mk(1, 1, 0, 3);
    send(0, 2, f);
    wait_out(4, f, n);
    chk(n == 4 && pwr_en == 5'b00001, "ejection wakes the N buffer only");
    repeat (4) @(posedge clk); #1;
    // 4. injection from the PE to (0,3): XY -> E
    inj_flit = mk(0, 3, 0, 4); inj_valid = 1;
    @(posedge clk); #1; inj_valid = 0;
    f = inj_flit; f.src_row = 1; f.src_col = 1;
    wait_out(1, f, n);
    chk(pwr_en[4], "injection wakes the local buffer");
    repeat (6) @(posedge clk); #1;
    // 5. heavy turning traffic: N and S packets turning E/W, E and W packets turning N/S
    for (int i = 0; i < 200 && mode != PG_COARSE; i++) begin
      in_link[0] = '{valid: in_ready[0][i % 2] , vc: VC_W'(i % 2), flit: mk(4, 6, 0, 100 + i)};   // from N, to E
      in_link[1] = '{valid: in_ready[1][i % 2] , vc: VC_W'(i % 2), flit: mk(6, 1, 0, 300 + i)};   // from E, to S
      @(posedge clk); #1;
    end
    in_link[0] = '0; in_link[1] = '0;
    chk(mode == PG_COARSE && qtab_pwr_en, "heavy traffic switches to coarse mode");
    // let the router go fully gated
    n = 0;
    while (pwr_en != 0 && n < 50) begin @(posedge clk); #1; n++; end
    chk(pwr_en == 0, "coarse: router gated when idle");
    // a turning packet wakes the whole router for 8 cycles
    f = mk(4, 1, 0, 5);
    send(3, 0, f);
    eps = ev_epoch_start;
    @(posedge clk); #1;
    chk(pwr_en == 5'b11111, "coarse: one turn wakes all buffers");
    wait_out(2, f, n);
    chk(n == 9, $sformatf("coarse: turn leaves T_ON_COARSE + 2 cycles after latching (%0d)", n + 1));
    // the epoch started at the turn and broadcasts its reward
    n = 0;
    while (!ev_reward_sent && n < 40) begin @(posedge clk); #1; n++; end
    chk(ev_reward_sent, "reward epoch ended");
    @(posedge clk); #1;
    chk(rwd_out[0].valid && rwd_out[1].valid && rwd_out[2].valid && rwd_out[3].valid &&
        rwd_out[0].coord == 1 && rwd_out[1].coord == 1 && rwd_out[0].reward >= 1, "reward broadcast on all sides");
    chk(eps == 1, "epoch started by the turning packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
