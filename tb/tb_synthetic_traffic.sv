// tb_synthetic_traffic: the synthetic traffic patterns used to evaluate the
// design (bit-reversal, transpose, shuffle, butterfly and uniform random) on
// the full 8 x 8 mesh at default parameters, each at a low and a high packet
// injection rate (PIR, packets per cycle over the whole network).
//
// Node ids are 6 bits, {row, col}. Destinations: bit-reversal reverses the
// id, transpose swaps row and column, shuffle rotates the id left by one,
// butterfly swaps its most and least significant bits, uniform random picks
// any other node. A node whose pattern maps it onto itself stays silent.
// Each run resets the mesh, injects for RUN_CYCLES cycles with Bernoulli
// sources and drains. It checks that every packet arrives once, at its
// destination, unchanged, and reports the mean latency, the buffer-powered
// cycles (a leakage proxy: sum over cycles of powered input buffers), the
// buffer wake-ups, the router-cycles spent in coarse mode and the share of
// YX paths. The run lengths are far shorter than the million-packet runs of
// the original evaluation; the point is functional coverage of each pattern.
module tb_synthetic_traffic;
  import cafeen_pkg::*;

  localparam int ROWS = 8;
  localparam int COLS = 8;
  localparam int N    = ROWS * COLS;
  localparam int RUN_CYCLES = 1500;
  localparam int MAXP = 1 << 14;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]         inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t                inj_flit [N];
  flit_t                ej_flit  [N];
  pg_mode_e             mode [N];
  logic [NUM_PORTS-1:0] pwr_en [N];
  logic [N-1:0]         qtab_pwr_en;

  cafeen_noc dut (
    .clk, .rst_n, .inj_valid, .inj_flit, .inj_ready, .ej_valid, .ej_flit, .ej_ready,
    .mode, .pwr_en, .qtab_pwr_en
  );

  typedef enum int {BITREV, TRANSPOSE, SHUFFLE, BUTTERFLY, URANDOM} pattern_e;

  int checks = 0, failures = 0;
  bit running = 0;
  pattern_e pat;
  int rate_ppm;                 // per node, parts per million per cycle
  int cycle = 0;
  int next_id, injected, delivered;
  longint lat_sum, on_cycles, wakeups, coarse_cycles, yx_count;
  bit          seen   [MAXP];
  logic [5:0]  exp_dst[MAXP];
  int          t_inj  [MAXP];
  logic [NUM_PORTS-1:0] prev_en [N];

  function automatic int dest(pattern_e p, int s);
    logic [5:0] id, d;
    id = 6'(s);
    case (p)
      BITREV:    d = {id[0], id[1], id[2], id[3], id[4], id[5]};
      TRANSPOSE: d = {id[2:0], id[5:3]};
      SHUFFLE:   d = {id[4:0], id[5]};
      BUTTERFLY: d = {id[0], id[4:1], id[5]};
      default: begin
        do d = 6'($urandom_range(N - 1)); while (d == id);
      end
    endcase
    return int'(d);
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL t=%0t %s", $time, msg);
  endtask

  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      for (int n = 0; n < N; n++) begin
        if (inj_valid[n] && inj_ready[n]) begin
          inj_valid[n] <= 1'b0;
          injected++;
        end
        if (running && (!inj_valid[n] || inj_ready[n]) && int'($urandom_range(999_999)) < rate_ppm) begin
          int d;
          d = dest(pat, n);
          if (d != n && next_id < MAXP) begin
            flit_t f;
            f = '0;
            f.dst_row = COORD_W'(d / COLS);
            f.dst_col = COORD_W'(d % COLS);
            f.payload = PAY_W'({32'(next_id), 32'(n)});
            exp_dst[next_id] = 6'(d);
            t_inj[next_id]   = cycle;
            seen[next_id]    = 1'b0;
            next_id++;
            inj_flit[n]  <= f;
            inj_valid[n] <= 1'b1;
          end
        end
      end
      for (int n = 0; n < N; n++) begin
        if (ej_valid[n]) begin
          int id;
          id = int'(ej_flit[n].payload[63:32]);
          checks++;
          delivered++;
          if (id >= next_id || seen[id]) fail($sformatf("unknown or duplicate packet %0d", id));
          else begin
            seen[id] = 1'b1;
            lat_sum += longint'(cycle - t_inj[id]);
            yx_count += longint'(ej_flit[n].route_yx);
            if (exp_dst[id] != 6'(n)) fail($sformatf("packet %0d at node %0d", id, n));
            if (int'(ej_flit[n].payload[31:0]) != int'(ej_flit[n].src_row) * COLS + int'(ej_flit[n].src_col))
              fail($sformatf("packet %0d corrupted", id));
          end
        end
        for (int p = 0; p < NUM_PORTS; p++) begin
          on_cycles += longint'(pwr_en[n][p]);
          if (pwr_en[n][p] && !prev_en[n][p]) wakeups++;
        end
        prev_en[n] <= pwr_en[n];
        coarse_cycles += longint'(mode[n] == PG_COARSE);
      end
    end
  end
  assign ej_ready = '1;

  task automatic run(pattern_e p, real pir, string name);
    int wait_cycles;
    // reset the mesh between runs
    rst_n = 1'b0;
    inj_valid = '0;
    for (int n = 0; n < N; n++) prev_en[n] = '0;
    next_id = 0; injected = 0; delivered = 0;
    lat_sum = 0; on_cycles = 0; wakeups = 0; coarse_cycles = 0; yx_count = 0;
    pat = p;
    rate_ppm = int'(pir / real'(N) * 1.0e6);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    running = 1'b1;
    repeat (RUN_CYCLES) @(posedge clk);
    running = 1'b0;
    wait_cycles = 0;
    while ((inj_valid != '0 || delivered != injected) && wait_cycles < 20000) begin
      @(posedge clk);
      wait_cycles++;
    end
    checks++;
    if (delivered != injected || injected == 0) fail($sformatf("%s: injected %0d delivered %0d", name, injected, delivered));
    $display("%-10s PIR %4.2f  packets %5d  mean latency %6.2f  buffer-on %7.4f  wake-ups %5d  coarse router-cycles %6d  YX %5.1f%%",
             name, pir, delivered, real'(lat_sum) / real'(delivered > 0 ? delivered : 1),
             real'(on_cycles) / real'(N * NUM_PORTS * (RUN_CYCLES + wait_cycles)),
             wakeups, coarse_cycles, 100.0 * real'(yx_count) / real'(delivered > 0 ? delivered : 1));
  endtask

  initial begin
    for (int n = 0; n < N; n++) inj_flit[n] = '0;
    inj_valid = '0;
    foreach (seen[i]) seen[i] = 1'b0;
    $display("buffer-on: share of input-buffer cycles powered; latency in cycles from offer to delivery");
    run(BITREV,    0.25, "bitrev");
    run(BITREV,    2.5,  "bitrev");
    run(TRANSPOSE, 0.25, "transpose");
    run(TRANSPOSE, 2.5,  "transpose");
    run(SHUFFLE,   0.25, "shuffle");
    run(SHUFFLE,   2.5,  "shuffle");
    run(BUTTERFLY, 0.25, "butterfly");
    run(BUTTERFLY, 2.5,  "butterfly");
    run(URANDOM,   0.25, "random");
    run(URANDOM,   2.5,  "random");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (250000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
