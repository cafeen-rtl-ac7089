// tb_q_table: checks the Q-table update rule. With a random draw of 0 a
// value steps one unit toward the reward on every update; with a draw at or
// above ALPHA_Q16 * |r - Q| it does not move, just below it it does (the
// stochastic form of Q <- (1 - alpha) Q + alpha r, alpha = 655/65536);
// nothing changes while the table is gated; four updates to distinct
// entries land in one cycle; reads return Q(column, XY) and Q(row, YX).
// Finally, with uniform random draws, the mean number of steps from Q = 0
// toward r = 15 over many updates matches alpha * 15 per update.
module tb_q_table;
  import cafeen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable;
  logic [2:0] rd_row, rd_col;
  logic [3:0] q_xy, q_yx;
  logic [3:0] upd_valid, upd_action;
  logic [4:0] upd_state [4];
  logic [3:0] upd_reward [4];
  logic [15:0] upd_rand [4];
  int checks = 0, failures = 0;
  int model [16][2];

  q_table dut (.clk, .rst_n, .enable, .rd_row, .rd_col, .q_xy, .q_yx,
               .upd_valid, .upd_state, .upd_action, .upd_reward, .upd_rand);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL t=%0t %s", $time, m); end
  endtask

  task automatic upd1(int s, int a, int r, int rnd);
    upd_valid = 4'b0001; upd_state[0] = 5'(s); upd_action[0] = a[0]; upd_reward[0] = 4'(r); upd_rand[0] = 16'(rnd);
    @(posedge clk); #1;
    upd_valid = 0;
  endtask

  // Q(col c, XY) is state 8 + c, action 0; Q(row r, YX) is state r, action 1.
  task automatic read(int r, int c);
    rd_row = 3'(r); rd_col = 3'(c); #1;
  endtask

  initial begin
    int steps;
    enable = 1; rd_row = 0; rd_col = 0; upd_valid = 0; upd_action = 0;
    for (int i = 0; i < 4; i++) begin upd_state[i] = 0; upd_reward[i] = 0; upd_rand[i] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    read(0, 0);
    chk(q_xy == 0 && q_yx == 0, "reset values");
    // deterministic steps (draw 0): Q(col 5, XY) toward 9
    for (int i = 1; i <= 12; i++) begin
      upd1(8 + 5, 0, 9, 0);
      read(0, 5);
      chk(int'(q_xy) == ((i < 9) ? i : 9), $sformatf("step %0d toward 9: %0d", i, q_xy));
    end
    // downward toward 4
    upd1(8 + 5, 0, 4, 0); read(0, 5);
    chk(q_xy == 8, "steps down");
    // threshold: |r - Q| = 4 (Q 8, r 12): step iff draw < 655 * 4
    upd1(8 + 5, 0, 12, 655 * 4); read(0, 5);
    chk(q_xy == 8, "draw at the threshold: no step");
    upd1(8 + 5, 0, 12, 655 * 4 - 1); read(0, 5);
    chk(q_xy == 9, "draw just below the threshold: step");
    upd1(8 + 5, 0, 12, 16'hFFFF); read(0, 5);
    chk(q_xy == 9, "large draw: no step");
    // gated table ignores updates
    enable = 0;
    upd1(8 + 5, 0, 0, 0); read(0, 5);
    chk(q_xy == 9, "gated: value kept, no update");
    enable = 1;
    // YX entry of row 2, other entries untouched
    upd1(2, 1, 7, 0); read(2, 5);
    chk(q_yx == 1 && q_xy == 9, "Q(row 2, YX) updated");
    read(3, 4);
    chk(q_yx == 0 && q_xy == 0, "other entries untouched");
    // four updates in one cycle
    upd_valid = 4'b1111;
    upd_state[0] = 5'd8 + 5'd1; upd_action[0] = 0; upd_reward[0] = 15; upd_rand[0] = 0;
    upd_state[1] = 5'd8 + 5'd6; upd_action[1] = 0; upd_reward[1] = 15; upd_rand[1] = 0;
    upd_state[2] = 5'd4;        upd_action[2] = 1; upd_reward[2] = 15; upd_rand[2] = 0;
    upd_state[3] = 5'd6;        upd_action[3] = 1; upd_reward[3] = 15; upd_rand[3] = 0;
    @(posedge clk); #1; upd_valid = 0;
    read(4, 1); chk(q_xy == 1 && q_yx == 1, "parallel updates 0, 2");
    read(6, 6); chk(q_xy == 1 && q_yx == 1, "parallel updates 1, 3");
    // statistics: from Q(row 7, YX) = 0 toward 15 with uniform draws
    steps = 0;
    for (int i = 0; i < 400; i++) begin
      int before_q;
      read(7, 0); before_q = q_yx;
      upd1(7, 1, 15, $urandom_range(65535));
      read(7, 0);
      steps += int'(q_yx) - before_q;
      // restore to 0 so the probability stays 655*15/65536 = 0.15
      if (q_yx != 0) upd1(7, 1, 0, 0);
    end
    // expected 60 steps; binomial sd ~7
    chk(steps > 35 && steps < 85, $sformatf("stochastic steps %0d of 400 (expected about 60)", steps));
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
