// tb_reward_unit: the reward epoch and the reward channel of router (2,3).
// An epoch of T_EPOCH = 16 cycles sums the turns and, in the next cycle,
// sends the sum on all four sides (row index toward N/S, column index
// toward E/W); a sum above 15 saturates; gating the router (all_off) ends
// the epoch early; a start while an epoch runs is ignored; flits from a
// neighbour are forwarded straight through in one cycle; a forwarded flit
// delays the router's own reward by one cycle on that side.
module tb_reward_unit;
  import cafeen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic epoch_start, all_off, epoch_active, epoch_done;
  logic [2:0] turns;
  reward_flit_t rwd_in [4], rwd_out [4];
  int checks = 0, failures = 0;

  reward_unit dut (.clk, .rst_n, .cur_row(3'd2), .cur_col(3'd3), .epoch_start, .all_off, .turns,
                   .rwd_in, .rwd_out, .epoch_active, .epoch_done);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t %s", $time, m); end
  endtask

  task automatic expect_bcast(int r, string m);
    for (int d = 0; d < 4; d++) begin
      chk(rwd_out[d].valid && rwd_out[d].reward == 4'(r) &&
          rwd_out[d].coord == ((d == 0 || d == 2) ? 3'd2 : 3'd3), $sformatf("%s side %0d", m, d));
    end
  endtask

  initial begin
    epoch_start = 0; all_off = 0; turns = 0;
    for (int d = 0; d < 4; d++) rwd_in[d] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // first epoch: turns = 1 on every third cycle: cycles 0,3,6,9,12,15 -> 6
    turns = 0;
    epoch_start = 1;
    @(posedge clk); #1; epoch_start = 0;
    for (int i = 0; i < 16; i++) begin
      turns = (i % 3 == 0) ? 3'd1 : 3'd0;
      #1;
      chk(epoch_done == (i == 15), $sformatf("epoch length 16, cycle %0d", i));
      @(posedge clk); #1;
    end
    turns = 0;
    expect_bcast(6, "reward 6 broadcast");
    @(posedge clk); #1;
    chk(!rwd_out[0].valid && !rwd_out[1].valid, "one flit per side");
    // saturating epoch: 3 turns every cycle -> 48 -> 15
    epoch_start = 1;
    @(posedge clk); #1; epoch_start = 0; turns = 3;
    while (!epoch_done) begin @(posedge clk); #1; end
    @(posedge clk); #1; turns = 0;
    expect_bcast(15, "saturated reward");
    // early end by gating after 5 cycles: turns 2 each cycle -> 10 (all_off cycle counts)
    epoch_start = 1;
    @(posedge clk); #1; epoch_start = 0; turns = 2;
    repeat (4) begin @(posedge clk); #1; end
    all_off = 1; #1;
    chk(epoch_done, "gating ends the epoch");
    @(posedge clk); #1; all_off = 0; turns = 0;
    expect_bcast(10, "early reward");
    // forwarding: a flit from the W leaves to the E one cycle later
    rwd_in[3] = '{valid: 1'b1, reward: 4'd9, coord: 3'd1}; #1;
    @(posedge clk); #1; rwd_in[3] = '0;
    chk(rwd_out[1].valid && rwd_out[1].reward == 9 && rwd_out[1].coord == 1 && !rwd_out[3].valid, "forwarded W -> E");
    // collision: own reward and a forwarded flit toward N in the same cycle
    epoch_start = 1;
    @(posedge clk); #1; epoch_start = 0; turns = 1;
    repeat (15) begin @(posedge clk); #1; end
    rwd_in[2] = '{valid: 1'b1, reward: 4'd3, coord: 3'd6}; #1;   // from S, leaves N
    chk(epoch_done, "epoch ends");
    @(posedge clk); #1; rwd_in[2] = '0; turns = 0;
    chk(rwd_out[0].reward == 3 && rwd_out[0].coord == 6, "forwarded flit first");
    chk(rwd_out[1].valid && rwd_out[1].reward == 15 && rwd_out[1].coord == 3, "own reward on free side (16 turns -> 15)");
    @(posedge clk); #1;
    chk(rwd_out[0].valid && rwd_out[0].reward == 15 && rwd_out[0].coord == 2, "own reward one cycle later");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
