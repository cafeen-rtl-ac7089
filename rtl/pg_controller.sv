// pg_controller: power state management for the input buffers of one router,
// in CAFEEN's two power-gating modes.
//
// Each of the NUM_PORTS buffers has an OFF -> WAKE -> ON -> OFF state machine.
// A buffer in WAKE stays there T_ON cycles before it can be used; an ON buffer
// is gated after T_IDLE consecutive cycles in which it held and received
// nothing and no packet demanded it.
//  * Fine-grained mode (mode = PG_FINE): every buffer wakes on its own demand
//    and sleeps on its own idleness, with T_ON_FINE / T_IDLE_FINE (2 / 2).
//  * Coarse-grained mode (PG_COARSE): the buffers are ganged like a whole
//    router: any demand wakes every gated buffer (T_ON_COARSE = 8), and they
//    are all gated together after T_IDLE_COARSE = 4 cycles in which no port
//    was busy.
// pwr_en drives each buffer's power switch (high in WAKE and ON). all_off is
// high while every buffer is gated (the router has re-entered power gating).
// The mode behaviour and the four timing values follow the paper; reading
// t_on as cycles spent waking, t_idle as idle cycles before gating, and
// keeping already-ON buffers on while the others wake are this design's.
module pg_controller
  import cafeen_pkg::*;
#(
  parameter int unsigned NUM_PORTS     = cafeen_pkg::NUM_PORTS,
  parameter int unsigned T_IDLE_FINE   = 2,
  parameter int unsigned T_ON_FINE     = 2,
  parameter int unsigned T_IDLE_COARSE = 4,
  parameter int unsigned T_ON_COARSE   = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  pg_mode_e             mode,
  input  logic [NUM_PORTS-1:0] demand,
  input  logic [NUM_PORTS-1:0] busy,
  output pwr_state_e           state [NUM_PORTS],
  output logic [NUM_PORTS-1:0] pwr_en,
  output logic [NUM_PORTS-1:0] buf_on,
  output logic                 all_off
);
  localparam int unsigned CW = 4;

  logic [CW-1:0] t_cnt   [NUM_PORTS];
  logic [CW-1:0] r_idle;
  logic [NUM_PORTS-1:0] active;

  assign active  = busy | demand;

  always_comb begin
    all_off = 1'b1;
    for (int p = 0; p < NUM_PORTS; p++) begin
      pwr_en[p] = (state[p] != PWR_OFF);
      buf_on[p] = (state[p] == PWR_ON);
      if (state[p] != PWR_OFF) all_off = 1'b0;
    end
  end

  logic router_sleep;
  assign router_sleep = (active == '0) && (r_idle >= CW'(T_IDLE_COARSE - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_idle <= '0;
    end else if (active != '0 || all_off) begin
      r_idle <= '0;
    end else if (r_idle != '1) begin
      r_idle <= r_idle + 1'b1;
    end
  end

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    logic wake;
    assign wake = (mode == PG_COARSE) ? (demand != '0) : demand[p];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        state[p] <= PWR_OFF;
        t_cnt[p] <= '0;
      end else begin
        unique case (state[p])
          PWR_OFF: if (wake) begin
            state[p] <= PWR_WAKE;
            t_cnt[p] <= CW'(((mode == PG_COARSE) ? T_ON_COARSE : T_ON_FINE) - 1);
          end
          PWR_WAKE: begin
            if (t_cnt[p] == '0) begin
              state[p] <= PWR_ON;
              t_cnt[p] <= '0;
            end else begin
              t_cnt[p] <= t_cnt[p] - 1'b1;
            end
          end
          PWR_ON: begin
            if (mode == PG_COARSE) begin
              t_cnt[p] <= '0;
              if (router_sleep) state[p] <= PWR_OFF;
            end else if (active[p]) begin
              t_cnt[p] <= '0;
            end else if (t_cnt[p] >= CW'(T_IDLE_FINE - 1)) begin
              state[p] <= PWR_OFF;
              t_cnt[p] <= '0;
            end else begin
              t_cnt[p] <= t_cnt[p] + 1'b1;
            end
          end
          default: state[p] <= PWR_OFF;
        endcase
      end
    end
  end

  // A buffer that holds or receives flits is never gated.
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_chk
    a_no_gate_busy: assert property (@(posedge clk) disable iff (!rst_n)
      (buf_on[p] && busy[p]) |=> (state[p] != PWR_OFF));
  end
endmodule
