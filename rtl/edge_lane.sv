// edge_lane: one back-end channel in front of the dataflow MDP-network.
//
// Holds Edge Array part j (each word {weight, dst}), the ePE of that part and
// a small output buffer feeding the dataflow MDP-network. A dispatcher
// issues a read with the source property; the word comes back one cycle
// later, the ePE turns it into {Imm, dst} one cycle after that, and the
// result waits in the buffer until the network takes it. lane_ok tells the
// dispatcher whether one more read fits, counting the two cycles in flight,
// so the buffer never overflows. The host port writes the part while the
// accelerator is idle.
module edge_lane
  import higraph_pkg::*;
#(
  parameter int unsigned ROWS      = 131072,
  parameter int unsigned OUT_DEPTH = 4,
  localparam int unsigned AW       = $clog2(ROWS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  alg_e                    alg,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_row,
  input  prop_t                   rd_prop,
  output logic                    lane_ok,
  input  logic                    host_we,
  input  logic [AW-1:0]           host_row,
  input  logic [EDGE_W-1:0]       host_wdata,
  output logic                    out_valid,
  output logic [PROP_W+VID_W-1:0] out_data,
  input  logic                    out_ready,
  output logic                    busy
);
  logic              m_v, e_v, ob_ready;
  prop_t             m_prop;
  logic [EDGE_W-1:0] m_edge;
  logic [PROP_W+VID_W-1:0] e_data;
  logic [$clog2(OUT_DEPTH+1)-1:0] ob_count;

  sram_1r1w #(.W(EDGE_W), .DEPTH(ROWS)) u_part (
    .clk, .rd_en, .rd_addr(rd_row), .rd_data(m_edge),
    .wr_en(host_we), .wr_addr(host_row), .wr_data(host_wdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m_v <= 1'b0;
    else        m_v <= rd_en;
  end
  always_ff @(posedge clk) if (rd_en) m_prop <= rd_prop;

  epe u_epe (
    .clk, .rst_n, .alg,
    .in_valid(m_v), .in_prop(m_prop), .in_edge(m_edge),
    .out_valid(e_v), .out_data(e_data)
  );

  fifo_sync #(.W(PROP_W+VID_W), .DEPTH(OUT_DEPTH)) u_ob (
    .clk, .rst_n,
    .in_valid(e_v), .in_data(e_data), .in_ready(ob_ready),
    .out_valid, .out_data, .out_ready, .count(ob_count)
  );

  assign lane_ok = (32'(ob_count) + 32'(m_v) + 32'(e_v)) < OUT_DEPTH;
  assign busy    = m_v || e_v || out_valid;

  assert property (@(posedge clk) disable iff (!rst_n) e_v |-> ob_ready);
endmodule
