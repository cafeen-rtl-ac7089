// vc_buffer: the input buffer of one router port, the unit CAFEEN power-gates
// in its fine-grained mode.
//
// NUM_VC independent FIFOs of DEPTH flits (4 x 4 x 128 bits by default, the
// evaluated router). One flit can be written per cycle (wr_en, wr_vc) and each
// VC's head can be popped independently (rd_en). head_valid/head_flit show
// the oldest flit of each VC; room[v] says VC v can take one more flit. Write
// and pop take effect at the clock edge; a flit written in one cycle is
// visible at the head in the next.
//
// The buffer bank is one power domain: while pwr_on is low it holds nothing
// (the pointers are cleared, modelling lost state) and must not be written.
// The power controller only gates an empty buffer. The per-VC circular FIFO
// organisation is this design's choice.
module vc_buffer
  import cafeen_pkg::*;
#(
  parameter int unsigned NUM_VC = cafeen_pkg::NUM_VC,
  parameter int unsigned DEPTH  = cafeen_pkg::BUF_DEPTH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   pwr_on,
  input  logic                   wr_en,
  input  logic [VC_W-1:0]        wr_vc,
  input  flit_t                  wr_flit,
  input  logic [NUM_VC-1:0]      rd_en,
  output logic [NUM_VC-1:0]      head_valid,
  output flit_t                  head_flit [NUM_VC],
  output logic [NUM_VC-1:0]      room
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  flit_t            mem   [NUM_VC][DEPTH];
  logic [PTR_W-1:0] rd_ptr[NUM_VC];
  logic [PTR_W-1:0] wr_ptr[NUM_VC];
  logic [CNT_W-1:0] count [NUM_VC];

  function automatic logic [PTR_W-1:0] incr(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    logic push, pop;
    assign push = wr_en && (wr_vc == VC_W'(v));
    assign pop  = rd_en[v] && head_valid[v];
    assign head_valid[v] = (count[v] != '0);
    assign head_flit[v]  = mem[v][rd_ptr[v]];
    assign room[v]       = pwr_on && (count[v] != CNT_W'(DEPTH));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_ptr[v] <= '0;
        wr_ptr[v] <= '0;
        count[v]  <= '0;
      end else if (!pwr_on) begin
        rd_ptr[v] <= '0;
        wr_ptr[v] <= '0;
        count[v]  <= '0;
      end else begin
        if (push) wr_ptr[v] <= incr(wr_ptr[v]);
        if (pop)  rd_ptr[v] <= incr(rd_ptr[v]);
        count[v] <= count[v] + CNT_W'(push) - CNT_W'(pop);
      end
    end

    always_ff @(posedge clk) begin
      if (push) mem[v][wr_ptr[v]] <= wr_flit;
    end
  end

  // A write only goes to a powered VC that has room.
  a_write_ok: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (pwr_on && room[wr_vc]));
endmodule
