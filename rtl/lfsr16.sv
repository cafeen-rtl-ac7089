// lfsr16: 16-bit maximal-length Fibonacci LFSR (taps 16, 15, 13, 4), used as
// the random source of the routing agent's epsilon-greedy choice and of the
// Q-table's stochastic rounding. SEED must be non-zero. It advances every
// cycle; value shows the current state.
module lfsr16 #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [15:0] value
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) value <= SEED;
    else        value <= {value[14:0], value[15] ^ value[14] ^ value[12] ^ value[3]};
  end
endmodule
