// switch_allocator: one-cycle separable (input-first) round-robin switch
// allocator for the 5-port CAFEEN router, including the TooT bypasses.
//
// Stage 1: each input port picks one of its VC heads that requests an output
// (req[p][v], already qualified by the downstream per-VC ready), round-robin
// over VCs. Stage 2: each output port picks one winner among the five input
// ports and, for the four mesh outputs, the bypass latch of the opposite
// input (byp_req[d] asks for output opposite(d)), round-robin over these six
// requesters. Results are combinational: vc_grant pops the granted VC heads,
// out_valid/out_src/out_vc steer the output multiplexers (out_src ==
// NUM_PORTS means the bypass), byp_grant releases a bypass latch. Pointers
// advance past a winner at the clock edge. Since packets are single flits no
// VC allocation is needed: a flit keeps its VC.
// The paper only says the router is input-buffered; this allocator is this
// design's own, standard choice.
module switch_allocator
  import cafeen_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_VC-1:0] req      [NUM_PORTS],
  input  port_e             req_port [NUM_PORTS][NUM_VC],
  input  logic [NUM_DIRS-1:0] byp_req,
  output logic [NUM_VC-1:0] vc_grant [NUM_PORTS],
  output logic [NUM_PORTS-1:0] out_valid,
  output logic [2:0]        out_src  [NUM_PORTS],
  output logic [VC_W-1:0]   out_vc   [NUM_PORTS],
  output logic [NUM_DIRS-1:0] byp_grant
);
  localparam int unsigned NREQ = NUM_PORTS + 1;

  logic [VC_W-1:0] in_ptr  [NUM_PORTS];
  logic [2:0]      out_ptr [NUM_PORTS];
  logic            in_has  [NUM_PORTS];
  logic [VC_W-1:0] in_vc   [NUM_PORTS];
  port_e           in_want [NUM_PORTS];

  // Stage 1: VC selection per input.
  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      in_has[p] = 1'b0;
      in_vc[p]  = '0;
      for (int k = NUM_VC - 1; k >= 0; k--) begin
        logic [VC_W-1:0] v;
        v = in_ptr[p] + VC_W'(k);
        if (req[p][v]) begin
          in_has[p] = 1'b1;
          in_vc[p]  = v;
        end
      end
      in_want[p] = req_port[p][in_vc[p]];
    end
  end

  // Stage 2: input (or bypass) selection per output.
  always_comb begin
    byp_grant = '0;
    for (int p = 0; p < NUM_PORTS; p++) vc_grant[p] = '0;
    for (int o = 0; o < NUM_PORTS; o++) begin
      logic [NREQ-1:0] r;
      out_valid[o] = 1'b0;
      out_src[o]   = '0;
      out_vc[o]    = '0;
      for (int p = 0; p < NUM_PORTS; p++) r[p] = in_has[p] && (in_want[p] == port_e'(o));
      r[NUM_PORTS] = (o < NUM_DIRS) ? byp_req[2'(opposite(port_e'(o)))] : 1'b0;
      for (int k = NREQ - 1; k >= 0; k--) begin
        if (r[(int'(out_ptr[o]) + k) % NREQ]) begin
          out_valid[o] = 1'b1;
          out_src[o]   = 3'((int'(out_ptr[o]) + k) % NREQ);
        end
      end
      if (out_valid[o]) begin
        if (out_src[o] == 3'(NUM_PORTS)) begin
          byp_grant[2'(opposite(port_e'(o)))] = 1'b1;
        end else begin
          out_vc[o] = in_vc[out_src[o]];
          vc_grant[out_src[o]][in_vc[out_src[o]]] = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        in_ptr[p]  <= '0;
        out_ptr[p] <= '0;
      end
    end else begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        if (vc_grant[p] != '0) in_ptr[p] <= in_vc[p] + 1'b1;
        if (out_valid[p]) out_ptr[p] <= (out_src[p] == 3'(NREQ - 1)) ? '0 : out_src[p] + 1'b1;
      end
    end
  end

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_chk
    a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(vc_grant[p]));
  end
endmodule
