// pg_mode_selector: per-router choice between fine-grained and coarse-grained
// power gating.
//
// CAFEEN gates single input buffers under low load and switches a router to
// whole-router (coarse) gating when waking buffers one at a time would add up
// wake-up latencies, i.e. when several buffers are needed at once. The paper
// states that each router switches on its own according to traffic but gives
// no rule; this module uses a simple one built on that observation. It counts,
// over a window of WINDOW cycles, the cycles in which two or more input
// buffers are needed together (need has >= 2 bits set). At the end of a
// window it selects PG_COARSE if the count reached HI_THR, PG_FINE if it was
// at most LO_THR, and otherwise keeps the current mode (hysteresis). The mode
// output is a register and changes only at window boundaries. Reset selects
// the fine-grained mode. WINDOW, HI_THR and LO_THR are this design's values.
module pg_mode_selector
  import cafeen_pkg::*;
#(
  parameter int unsigned NUM_PORTS = cafeen_pkg::NUM_PORTS,
  parameter int unsigned WINDOW    = 64,
  parameter int unsigned HI_THR    = 8,
  parameter int unsigned LO_THR    = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_PORTS-1:0] need,
  output pg_mode_e             mode
);
  localparam int unsigned W_W = $clog2(WINDOW + 1);

  logic [W_W-1:0] cyc;
  logic [W_W-1:0] multi;
  logic           is_multi;
  logic [W_W-1:0] multi_nxt;

  assign is_multi  = $countones(need) >= 2;
  assign multi_nxt = multi + W_W'(is_multi);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc   <= '0;
      multi <= '0;
      mode  <= PG_FINE;
    end else if (cyc == W_W'(WINDOW - 1)) begin
      cyc   <= '0;
      multi <= '0;
      if (multi_nxt >= W_W'(HI_THR))      mode <= PG_COARSE;
      else if (multi_nxt <= W_W'(LO_THR)) mode <= PG_FINE;
    end else begin
      cyc   <= cyc + 1'b1;
      multi <= multi_nxt;
    end
  end
endmodule
