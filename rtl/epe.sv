// epe: edge processing element, one per back-end channel.
//
// It sits right behind its Edge Array part. The part returns the edge
// {weight, dst} one cycle after the dispatcher's read, and the ePE applies
// Process_Edge(u.prop, e.weight) (see higraph_pkg for the per-algorithm
// bodies) and registers {Imm, dst} for the dataflow MDP-network, which sends
// it on to the vPE that owns dst.
//
// There is no backpressure here: the lane around it only issues a read when
// its output buffer has room. Latency: one cycle, one edge per cycle.
module epe
  import higraph_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  alg_e                    alg,
  input  logic                    in_valid,
  input  prop_t                   in_prop,    // u.prop
  input  logic [EDGE_W-1:0]       in_edge,    // {weight, dst}
  output logic                    out_valid,
  output logic [PROP_W+VID_W-1:0] out_data    // {Imm, dst}
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      out_data <= {process_edge(alg, in_prop, in_edge[VID_W +: WEIGHT_W]), in_edge[VID_W-1:0]};
  end
endmodule
