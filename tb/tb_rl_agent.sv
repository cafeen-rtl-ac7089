// tb_rl_agent: the routing agent of router (2,2) on an 8 x 8 mesh.
// Fine mode: every packet takes XY, VCs 0 and 1 alternate, the source is
// filled in, and the packet waits in the injection register (demand high,
// inj_ready low) until the local buffer is on and has room. Coarse mode:
// rewards arriving from N/S for row 5 train Q(row 5, YX) upward; then
// packets to row 5 mostly (allowing for epsilon = 0.05 exploration) take YX
// on VC 2/3, packets to other rows mostly XY, packets in the same row or
// column always XY. Rewards arriving from E/W train Q(column, XY). Rewards
// are ignored in fine mode.
module tb_rl_agent;
  import cafeen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pg_mode_e mode;
  logic inj_valid, inj_ready, loc_on, loc_wr_en, demand, chose_yx, explored;
  flit_t inj_flit, loc_wr_flit;
  logic [NUM_VC-1:0] loc_room;
  logic [VC_W-1:0] loc_wr_vc;
  reward_flit_t rwd_in [4];
  int checks = 0, failures = 0;

  rl_agent dut (.clk, .rst_n, .cur_row(3'd2), .cur_col(3'd2), .mode, .inj_valid, .inj_flit, .inj_ready,
                .loc_on, .loc_room, .loc_wr_en, .loc_wr_vc, .loc_wr_flit, .demand, .rwd_in, .chose_yx, .explored);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL t=%0t %s", $time, m); end
  endtask

  // Inject one packet and return the flit and VC written to the buffer.
  task automatic inject(int r, int c, output flit_t f, output logic [1:0] vc);
    inj_flit = '0; inj_flit.dst_row = 3'(r); inj_flit.dst_col = 3'(c); inj_flit.payload = PAY_W'($urandom);
    inj_flit.src_row = 3'd7; inj_flit.src_col = 3'd7;
    inj_valid = 1;
    @(posedge clk); #1;
    inj_valid = 0;
    #1;
    f = loc_wr_flit; vc = loc_wr_vc;
    @(posedge clk); #1;
  endtask

  initial begin
    flit_t f;
    logic [1:0] vc;
    int nyx, q0;
    mode = PG_FINE; inj_valid = 0; inj_flit = '0; loc_on = 1; loc_room = '1;
    for (int d = 0; d < 4; d++) rwd_in[d] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // injection register and buffer handshake
    loc_on = 0;
    inj_flit = '0; inj_flit.dst_row = 3'd6; inj_flit.dst_col = 3'd5; inj_valid = 1;
    @(posedge clk); #1; inj_valid = 0;
    chk(!inj_ready && demand && !loc_wr_en, "packet waits for the local buffer");
    loc_on = 1; loc_room = 4'b1110; #1;
    chk(!loc_wr_en, "waits for room in its VC");
    loc_room = '1; #1;
    chk(loc_wr_en && loc_wr_vc == 0 && !loc_wr_flit.route_yx, "fine mode: XY on VC 0");
    chk(loc_wr_flit.src_row == 2 && loc_wr_flit.src_col == 2 && loc_wr_flit.dst_row == 6, "source filled in");
    @(posedge clk); #1;
    chk(inj_ready && !demand, "register free again");
    inject(6, 5, f, vc);
    chk(vc == 1 && !f.route_yx, "fine mode: next XY packet on VC 1");
    // rewards ignored in fine mode
    for (int i = 0; i < 50; i++) begin
      rwd_in[0] = '{valid: 1'b1, reward: 4'd15, coord: 3'd5};
      @(posedge clk); #1;
    end
    rwd_in[0] = '0;
    chk(dut.u_qt.q[5][1] == 0, "fine mode: Q-table not updated");
    // coarse: train Q(row 5, YX) from N and S
    mode = PG_COARSE;
    for (int i = 0; i < 300; i++) begin
      rwd_in[0] = '{valid: 1'b1, reward: 4'd15, coord: 3'd5};
      rwd_in[2] = '{valid: 1'b1, reward: 4'd15, coord: 3'd5};
      @(posedge clk); #1;
    end
    rwd_in[0] = '0; rwd_in[2] = '0;
    q0 = dut.u_qt.q[5][1];
    chk(q0 >= 12, $sformatf("Q(row 5, YX) learned high: %0d", q0));
    chk(dut.u_qt.q[8 + 5][0] == 0, "Q(col 5, XY) untouched");
    // packets to row 5 mostly YX
    nyx = 0;
    for (int i = 0; i < 200; i++) begin
      inject(5, $urandom_range(1) ? 0 : 6, f, vc);
      if (f.route_yx) begin nyx++; chk(vc[1] == 1, "YX packet on VC 2/3"); end
      else chk(vc[1] == 0, "XY packet on VC 0/1");
    end
    chk(nyx >= 180 && nyx < 200, $sformatf("row-5 packets taking YX: %0d of 200", nyx));
    // packets to row 0: tie -> XY except exploration
    nyx = 0;
    for (int i = 0; i < 200; i++) begin inject(0, 6, f, vc); nyx += f.route_yx; end
    chk(nyx > 0 && nyx <= 20, $sformatf("row-0 packets taking YX (exploration only): %0d of 200", nyx));
    // same row / column: always XY
    nyx = 0;
    for (int i = 0; i < 100; i++) begin inject(5, 2, f, vc); nyx += f.route_yx; inject(2, 6, f, vc); nyx += f.route_yx; end
    chk(nyx == 0, "no turn needed: always XY");
    // train Q(col 6, XY) from E: now row-5, col-6 packets compare 15ish vs ~high
    for (int i = 0; i < 300; i++) begin
      rwd_in[1] = '{valid: 1'b1, reward: 4'd15, coord: 3'd6};
      @(posedge clk); #1;
    end
    rwd_in[1] = '0;
    chk(dut.u_qt.q[8 + 6][0] >= 12, "Q(col 6, XY) learned from E/W rewards");
    // fine mode again: XY regardless of Q
    mode = PG_FINE;
    nyx = 0;
    for (int i = 0; i < 50; i++) begin inject(5, 0, f, vc); nyx += f.route_yx; end
    chk(nyx == 0, "fine mode: always XY");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
