// tb_switch_allocator: random request patterns checked against the rules a
// switch allocator must keep (every grant answers a request, at most one VC
// per input and one source per output, a bypass only to the opposite
// output), plus work conservation for a single request and round-robin
// fairness: with every VC of every input and the bypass asking for the same
// output, each requester is served within 6 x 4 cycles.
module tb_switch_allocator;
  import cafeen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NUM_VC-1:0] req [NUM_PORTS];
  port_e req_port [NUM_PORTS][NUM_VC];
  logic [NUM_DIRS-1:0] byp_req, byp_grant;
  logic [NUM_VC-1:0] vc_grant [NUM_PORTS];
  logic [NUM_PORTS-1:0] out_valid;
  logic [2:0] out_src [NUM_PORTS];
  logic [VC_W-1:0] out_vc [NUM_PORTS];
  int checks = 0, failures = 0;

  switch_allocator dut (.clk, .rst_n, .req, .req_port, .byp_req, .vc_grant, .out_valid, .out_src, .out_vc, .byp_grant);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL t=%0t %s", $time, m); end
  endtask

  task automatic check_rules();
    int ngr;
    for (int p = 0; p < NUM_PORTS; p++) begin
      chk($countones(vc_grant[p]) <= 1, "one VC per input");
      for (int v = 0; v < NUM_VC; v++) if (vc_grant[p][v]) begin
        chk(req[p][v], "grant without request");
        chk(out_valid[req_port[p][v]] && out_src[req_port[p][v]] == 3'(p) && out_vc[req_port[p][v]] == VC_W'(v),
            "grant not reflected on its output");
      end
    end
    for (int o = 0; o < NUM_PORTS; o++) if (out_valid[o]) begin
      if (out_src[o] == 3'(NUM_PORTS)) chk(o < 4 && byp_req[2'(opposite(port_e'(o)))] && byp_grant[2'(opposite(port_e'(o)))], "bypass grant rule");
      else chk(vc_grant[out_src[o]][out_vc[o]], "output source not granted");
    end
    for (int d = 0; d < 4; d++) if (byp_grant[d]) chk(byp_req[d], "bypass grant without request");
    // an output with a requesting input or bypass is not left idle
    for (int o = 0; o < NUM_PORTS; o++) begin
      bit any = 0;
      for (int p = 0; p < NUM_PORTS; p++) for (int v = 0; v < NUM_VC; v++) if (req[p][v] && req_port[p][v] == port_e'(o)) any = 1;
      if (o < 4 && byp_req[2'(opposite(port_e'(o)))]) any = 1;
      ngr = 0;
      if (any) begin
        // at least one input got some output, so the allocator is not idle
        for (int p = 0; p < NUM_PORTS; p++) ngr += $countones(vc_grant[p]);
        chk(ngr + $countones(byp_grant) > 0, "allocator idle with requests");
      end
    end
  endtask

  initial begin
    int served [6][4];
    for (int p = 0; p < NUM_PORTS; p++) begin req[p] = '0; for (int v = 0; v < NUM_VC; v++) req_port[p][v] = PORT_L; end
    byp_req = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // single request is served at once
    req[3][2] = 1; req_port[3][2] = PORT_N; #1;
    chk(out_valid[PORT_N] && out_src[PORT_N] == 3 && vc_grant[3] == 4'b0100, "single request granted");
    req[3][2] = 0;
    byp_req = 4'b0010; #1;   // bypass at E input -> W output
    chk(out_valid[PORT_W] && out_src[PORT_W] == 3'(NUM_PORTS) && byp_grant == 4'b0010, "single bypass granted");
    byp_req = 0;
    // random
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int p = 0; p < NUM_PORTS; p++) for (int v = 0; v < NUM_VC; v++) begin
        req[p][v] = ($urandom_range(3) == 0);
        req_port[p][v] = port_e'($urandom_range(4));
      end
      byp_req = 4'($urandom);
      #1;
      check_rules();
    end
    // fairness: all to output S, bypass from N
    @(negedge clk);
    for (int p = 0; p < NUM_PORTS; p++) begin req[p] = '1; for (int v = 0; v < NUM_VC; v++) req_port[p][v] = PORT_S; end
    byp_req = 4'b0001;
    foreach (served[i, j]) served[i][j] = 0;
    for (int i = 0; i < 24; i++) begin
      #1;
      check_rules();
      for (int p = 0; p < NUM_PORTS; p++) for (int v = 0; v < NUM_VC; v++) if (vc_grant[p][v]) served[p][v]++;
      if (byp_grant[0]) served[5][0]++;
      @(negedge clk);
    end
    for (int p = 0; p < NUM_PORTS; p++) for (int v = 0; v < NUM_VC; v++) chk(served[p][v] >= 1, $sformatf("input %0d vc %0d starved", p, v));
    chk(served[5][0] >= 4, "bypass starved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
