// reward_unit: MARL reward epoch and reward broadcast of one CAFEEN router.
//
// Epoch: epoch_start (in coarse mode, a turning packet has reached this
// router) opens an epoch if none is running. For
// T_EPOCH = 16 cycles, or until the router is gated again (all_off), the unit
// adds up `turns`, the packets the router turns per cycle. The total is the
// shared reward, saturated to the 4-bit Q range.
// Broadcast: when the epoch ends the reward becomes one reward flit per
// direction on a dedicated channel. A flit sent E or W carries this router's
// column, one sent N or S its row, so that each receiver knows which Q-state
// to update. Every hop is one register. A router forwards the flits it
// receives straight on (a flit from the W leaves to the E); the router also
// hands them to its own agent. A forwarded flit has priority on an
// output; the router's own reward waits in a one-entry register per direction
// until the output is free. Edge routers simply drop what leaves the mesh.
// Timing: the first neighbours receive the reward the cycle after the epoch
// ends; each further hop adds one cycle.
// The epoch rule, shared reward and straight row/column broadcast follow the
// paper; the coordinate field, the saturation and the channel arbitration are
// this design's.
module reward_unit
  import cafeen_pkg::*;
#(
  parameter int unsigned T_EPOCH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] cur_row,
  input  logic [COORD_W-1:0] cur_col,
  input  logic               epoch_start,
  input  logic               all_off,
  input  logic [2:0]         turns,
  input  reward_flit_t       rwd_in    [NUM_DIRS],   // arriving from N, E, S, W
  output reward_flit_t       rwd_out   [NUM_DIRS],   // leaving to N, E, S, W
  output logic               epoch_active,
  output logic               epoch_done
);
  localparam int unsigned ACC_W = 8;
  localparam int unsigned EC_W  = $clog2(T_EPOCH + 1);

  logic [EC_W-1:0]  ecnt;
  logic [ACC_W-1:0] acc;
  logic [ACC_W-1:0] acc_nxt;
  logic [Q_W-1:0]   reward;
  reward_flit_t     pend [NUM_DIRS];

  assign acc_nxt = acc + ACC_W'(turns);
  assign reward  = (acc_nxt > ACC_W'((1 << Q_W) - 1)) ? Q_W'((1 << Q_W) - 1) : acc_nxt[Q_W-1:0];
  assign epoch_done = epoch_active && (all_off || ecnt == EC_W'(T_EPOCH - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      epoch_active <= 1'b0;
      ecnt         <= '0;
      acc          <= '0;
    end else if (epoch_done) begin
      epoch_active <= 1'b0;
      ecnt         <= '0;
      acc          <= '0;
    end else if (epoch_active) begin
      ecnt <= ecnt + 1'b1;
      acc  <= acc_nxt;
    end else if (epoch_start) begin
      epoch_active <= 1'b1;
      ecnt         <= '0;
      acc          <= '0;
    end
  end

  for (genvar d = 0; d < NUM_DIRS; d++) begin : g_dir
    reward_flit_t fwd, own;
    logic         vertical;
    assign vertical = (d == int'(PORT_N)) || (d == int'(PORT_S));
    // A flit leaving toward d arrived from the opposite side.
    assign fwd = rwd_in[2'(opposite(port_e'(d)))];
    assign own = '{valid: 1'b1, reward: reward, coord: vertical ? cur_row : cur_col};

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rwd_out[d] <= '0;
        pend[d]    <= '0;
      end else begin
        if (fwd.valid) begin
          rwd_out[d] <= fwd;
          if (epoch_done) pend[d] <= own;
        end else if (pend[d].valid) begin
          rwd_out[d] <= pend[d];
          pend[d]    <= epoch_done ? own : '0;
        end else begin
          rwd_out[d] <= epoch_done ? own : '0;
        end
      end
    end
  end
endmodule
