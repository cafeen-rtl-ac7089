// tb_cafeen_noc: end-to-end test of the CAFEEN mesh at its default size
// (8 x 8, all router parameters at their defaults).
//
// Every node runs a traffic source and a sink. Phase 1 is light uniform
// random traffic (fine-grained gating, TooT bypasses, single-buffer wake-ups).
// Phase 2 is heavy transpose traffic, which drives routers into coarse-grained
// mode, where the routing agents choose XY or YX paths and reward epochs are
// broadcast. Phase 3 drains the network. A scoreboard checks that every
// packet arrives exactly once, at its destination, unchanged, and that the
// source agent filled in the right source coordinates. The test also counts
// how often each mechanism of the design happened and fails if one never did.
module tb_cafeen_noc;
  import cafeen_pkg::*;

  localparam int ROWS = 8;
  localparam int COLS = 8;
  localparam int N    = ROWS * COLS;
  localparam int MAXP = 1 << 16;
  localparam int P1_CYCLES = 1500;
  localparam int P2_CYCLES = 2500;
  localparam int WATCHDOG  = 20000;

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

  int checks = 0, failures = 0;
  int phase = 0;
  int next_id = 0;
  int injected = 0, delivered = 0;
  bit          seen     [MAXP];
  logic [15:0] exp_dst  [MAXP];   // {row, col} in the low bits
  logic [15:0] exp_src  [MAXP];

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL t=%0t %s", $time, msg);
  endtask

  // ------------------------------------------------------------ sources
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < N; n++) begin
        if (inj_valid[n] && inj_ready[n]) begin
          inj_valid[n] <= 1'b0;
          injected++;
        end
        if (!inj_valid[n] || inj_ready[n]) begin
          int rate;
          rate = (phase == 1) ? 8 : (phase == 2) ? 300 : 0;   // per mille
          if (int'($urandom_range(999)) < rate && next_id < MAXP) begin
            int r, c, dr, dc, id;
            flit_t f;
            r = n / COLS; c = n % COLS;
            if (phase == 2 && r != c) begin
              dr = c; dc = r;
            end else begin
              do begin
                dr = $urandom_range(ROWS - 1);
                dc = $urandom_range(COLS - 1);
              end while (dr == r && dc == c);
            end
            id = next_id;
            next_id++;
            f = '0;
            f.dst_row = COORD_W'(dr);
            f.dst_col = COORD_W'(dc);
            f.payload = PAY_W'({32'(id), 32'hCAFE_0000 | 32'(n)});
            exp_dst[id] = 16'(dr * 8 + dc);
            exp_src[id] = 16'(r * 8 + c);
            inj_flit[n]  <= f;
            inj_valid[n] <= 1'b1;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ sinks
  assign ej_ready = '1;
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < N; n++) begin
        if (ej_valid[n]) begin
          int id;
          id = int'(ej_flit[n].payload[63:32]);
          checks++;
          delivered++;
          if (id >= next_id || seen[id]) fail($sformatf("node %0d: unknown or duplicate packet %0d", n, id));
          else begin
            seen[id] = 1'b1;
            if (exp_dst[id] != 16'(n / COLS * 8 + n % COLS) ||
                int'(ej_flit[n].dst_row) * COLS + int'(ej_flit[n].dst_col) != n)
              fail($sformatf("packet %0d delivered at node %0d", id, n));
            if (16'(int'(ej_flit[n].src_row) * 8 + int'(ej_flit[n].src_col)) != exp_src[id] ||
                ej_flit[n].payload[31:0] != (32'hCAFE_0000 | 32'(exp_src[id] / 8 * COLS + exp_src[id] % 8)))
              fail($sformatf("packet %0d corrupted", id));
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ mechanism counters
  int c_bypass[N], c_turns[N], c_epoch[N], c_reward[N], c_yx[N], c_explore[N];
  int c_fine_wake[N], c_coarse_wake[N], c_coarse_mode[N], c_fine_back[N], c_gate[N], c_qupd[N];

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      localparam int n = r * COLS + c;
      pg_mode_e prev_mode = PG_FINE;
      always @(posedge clk) if (rst_n) begin
        c_bypass[n]  += $countones(dut.g_row[r].g_col[c].u_router.ev_bypass);
        c_turns[n]   += int'(dut.g_row[r].g_col[c].u_router.ev_turns);
        c_epoch[n]   += int'(dut.g_row[r].g_col[c].u_router.ev_epoch_start);
        c_reward[n]  += int'(dut.g_row[r].g_col[c].u_router.ev_reward_sent);
        c_yx[n]      += int'(dut.g_row[r].g_col[c].u_router.ev_inject_yx);
        c_explore[n] += int'(dut.g_row[r].g_col[c].u_router.ev_explore);
        c_qupd[n]    += $countones(dut.g_row[r].g_col[c].u_router.u_agent.u_qt.step);
        if (mode[n] != prev_mode) begin
          if (mode[n] == PG_COARSE) c_coarse_mode[n]++; else c_fine_back[n]++;
        end
        prev_mode = mode[n];
      end
      // Buffer wake-ups and gatings, split by mode.
      logic [NUM_PORTS-1:0] prev_en = '0;
      always @(posedge clk) if (rst_n) begin
        for (int p = 0; p < NUM_PORTS; p++) begin
          if (pwr_en[n][p] && !prev_en[p]) begin
            if (mode[n] == PG_COARSE) c_coarse_wake[n]++; else c_fine_wake[n]++;
          end
          if (!pwr_en[n][p] && prev_en[p]) c_gate[n]++;
        end
        prev_en = pwr_en[n];
      end
    end
  end

  function automatic int total(int a[N]);
    int s = 0;
    foreach (a[i]) s += a[i];
    return s;
  endfunction

  task automatic need(string name, int v);
    checks++;
    $display("  %-28s %0d", name, v);
    if (v == 0) fail($sformatf("mechanism never happened: %s", name));
  endtask

  // ------------------------------------------------------------ sequence
  initial begin
    inj_valid = '0;
    for (int n = 0; n < N; n++) inj_flit[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    phase = 1;
    repeat (P1_CYCLES) @(posedge clk);
    phase = 2;
    repeat (P2_CYCLES) @(posedge clk);
    phase = 3;
    wait (inj_valid == '0);
    while (delivered != injected) @(posedge clk);
    repeat (200) @(posedge clk);
    checks++;
    if (delivered != injected) fail("not all packets delivered");
    $display("injected %0d delivered %0d", injected, delivered);
    need("bypassed straight flits", total(c_bypass));
    need("turns in routers", total(c_turns));
    need("fine-grained buffer wake-ups", total(c_fine_wake));
    need("buffer gatings", total(c_gate));
    need("switches to coarse mode", total(c_coarse_mode));
    need("coarse-mode buffer wake-ups", total(c_coarse_wake));
    need("switches back to fine mode", total(c_fine_back));
    need("reward epochs", total(c_epoch));
    need("reward broadcasts", total(c_reward));
    need("Q-table updates", total(c_qupd));
    need("YX paths injected", total(c_yx));
    need("exploratory choices", total(c_explore));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog: injected %0d delivered %0d", injected, delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
