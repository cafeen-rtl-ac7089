// tb_vc_buffer: random writes and pops on the 4-VC, 4-deep input buffer,
// compared with a queue model per VC; checks room/head flags, FIFO order,
// that a written flit shows at the head one cycle later, and that gating the
// buffer empties it.
module tb_vc_buffer;
  import cafeen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pwr_on, wr_en;
  logic [VC_W-1:0] wr_vc;
  flit_t wr_flit;
  logic [NUM_VC-1:0] rd_en, head_valid, room;
  flit_t head_flit [NUM_VC];
  int checks = 0, failures = 0;
  flit_t model [NUM_VC][$];

  vc_buffer dut (.clk, .rst_n, .pwr_on, .wr_en, .wr_vc, .wr_flit, .rd_en, .head_valid, .head_flit, .room);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL t=%0t %s", $time, m); end
  endtask

  initial begin
    pwr_on = 0; wr_en = 0; wr_vc = 0; wr_flit = '0; rd_en = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(room == '0 && head_valid == '0, "gated buffer reports room");
    pwr_on = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // compare state
      for (int v = 0; v < NUM_VC; v++) begin
        chk(head_valid[v] == (model[v].size() != 0), $sformatf("head_valid vc%0d", v));
        chk(room[v] == (model[v].size() < BUF_DEPTH), $sformatf("room vc%0d", v));
        if (model[v].size() != 0) chk(head_flit[v] == model[v][0], $sformatf("order vc%0d", v));
      end
      if (cyc == 1500) begin
        // gate: contents are lost
        pwr_on = 0; wr_en = 0; rd_en = 0;
        @(negedge clk);
        for (int v = 0; v < NUM_VC; v++) model[v].delete();
        chk(head_valid == '0, "gating clears the buffer");
        pwr_on = 1;
        continue;
      end
      wr_vc   = VC_W'($urandom_range(NUM_VC - 1));
      wr_en   = room[wr_vc] && ($urandom_range(9) < 6);
      wr_flit = flit_t'({$urandom, $urandom, $urandom, $urandom});
      rd_en   = NUM_VC'($urandom) & head_valid;
      @(posedge clk);
      #1;
      for (int v = 0; v < NUM_VC; v++) if (rd_en[v]) void'(model[v].pop_front());
      if (wr_en) model[wr_vc].push_back(wr_flit);
      wr_en = 0; rd_en = 0;
    end
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
