// tb_pg_controller: directed checks of the buffer power state machines.
// Fine mode: a demand wakes only its own buffer, WAKE lasts T_ON_FINE = 2
// cycles, the buffer is gated after T_IDLE_FINE = 2 idle cycles, and a busy
// buffer is not gated. Coarse mode: one demand wakes all five buffers,
// WAKE lasts T_ON_COARSE = 8 cycles, and they are gated together only after
// T_IDLE_COARSE = 4 cycles in which no port was busy.
module tb_pg_controller;
  import cafeen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pg_mode_e mode;
  logic [4:0] demand, busy, pwr_en, buf_on;
  pwr_state_e state [5];
  logic all_off;
  int checks = 0, failures = 0;

  pg_controller dut (.clk, .rst_n, .mode, .demand, .busy, .state, .pwr_en, .buf_on, .all_off);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t %s", $time, m); end
  endtask

  // Cycles from the edge that sees a demand until buf_on[p] is high.
  task automatic wake_time(int p, output int n);
    n = 0;
    while (!buf_on[p]) begin @(posedge clk); #1; n++; end
  endtask

  initial begin
    int n;
    mode = PG_FINE; demand = 0; busy = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk(all_off && pwr_en == 0, "reset: all gated");
    // fine: port 2 demanded
    demand = 5'b00100;
    @(posedge clk); #1;
    chk(state[2] == PWR_WAKE && pwr_en == 5'b00100, "fine: only port 2 wakes");
    wake_time(2, n);
    chk(n == 2, $sformatf("fine: t_on 2 cycles (WAKE lasted %0d)", n));
    chk(pwr_en == 5'b00100, "fine: other ports stay gated");
    demand = 0; busy = 5'b00100;
    repeat (5) @(posedge clk); #1;
    chk(buf_on[2], "fine: busy buffer stays on");
    busy = 0;
    @(posedge clk); #1;
    chk(buf_on[2], "fine: on after 1 idle cycle");
    @(posedge clk); #1;
    chk(!pwr_en[2] && all_off, "fine: gated after 2 idle cycles");
    // coarse
    mode = PG_COARSE;
    demand = 5'b00001;
    @(posedge clk); #1;
    demand = 0; busy = 5'b00001;
    chk(pwr_en == 5'b11111, "coarse: all ports wake");
    n = 0;
    while (!buf_on[4]) begin @(posedge clk); #1; n++; end
    chk(n == 8, $sformatf("coarse: t_on 8 cycles (took %0d)", n));
    chk(buf_on == 5'b11111, "coarse: all ports on together");
    busy = 5'b00001;
    repeat (3) @(posedge clk);
    #1 busy = 0;
    repeat (3) @(posedge clk); #1;
    chk(buf_on == 5'b11111, "coarse: on after 3 idle cycles");
    @(posedge clk); #1;
    chk(all_off, "coarse: all gated after 4 idle cycles");
    // coarse: a port already on stays on while the others wake
    mode = PG_FINE; demand = 5'b00010;
    repeat (3) @(posedge clk); #1;
    chk(buf_on == 5'b00010, "fine: port 1 on");
    mode = PG_COARSE; demand = 5'b01000;
    @(posedge clk); #1;
    chk(buf_on[1] && state[3] == PWR_WAKE && state[0] == PWR_WAKE, "mode switch: on port stays, others wake");
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
