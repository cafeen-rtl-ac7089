// tb_pg_mode_selector: drives the number of cycles per 64-cycle window in
// which two or more buffers are needed and checks the mode chosen at each
// window boundary: coarse from 8 such cycles, fine at 2 or fewer, unchanged
// in between; the mode only changes at window boundaries.
module tb_pg_mode_selector;
  import cafeen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] need;
  pg_mode_e mode;
  int checks = 0, failures = 0;

  pg_mode_selector dut (.clk, .rst_n, .need, .mode);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t %s", $time, m); end
  endtask

  // One window with k multi-buffer cycles (and some single-buffer ones).
  task automatic window(int k, pg_mode_e expect_mode);
    pg_mode_e prev_mode;
    prev_mode = mode;
    for (int i = 0; i < 64; i++) begin
      need = (i < k) ? 5'b10010 : ((i % 3 == 0) ? 5'b00100 : 5'b0);
      @(posedge clk); #1;
      if (i < 63) chk(mode == prev_mode, "mode changes only at the window end");
    end
    chk(mode == expect_mode, $sformatf("after window with %0d multi cycles: mode %0d", k, mode));
  endtask

  initial begin
    need = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk(mode == PG_FINE, "reset to fine");
    window(7, PG_FINE);
    window(8, PG_COARSE);
    window(5, PG_COARSE);
    window(3, PG_COARSE);
    window(2, PG_FINE);
    window(40, PG_COARSE);
    window(0, PG_FINE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
