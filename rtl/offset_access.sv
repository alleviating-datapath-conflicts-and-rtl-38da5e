// offset_access: the front end's MDP-network for Offset Array access.
//
// Active vertices {prop, ID} arrive on N channels in any order. An
// mdp_network first moves every vertex u to channel u.ID mod N. There the
// vertex needs Off = Offset[u.ID] and nOff = Offset[u.ID+1]; with the Offset
// Array interleaved over N parts (entry i in part i mod N, row i / N) these
// sit in part c and part c+1 mod N, so a channel only competes with its two
// neighbours. The odd_even_arbiter decides which channel heads are issued
// each cycle. Granted reads return one cycle later and {prop, nOff, Off} is
// pushed into a small per-channel output buffer; a channel only requests
// while that buffer has room for everything it has in flight.
//
// The routing, the neighbour-only conflict and the arbiter follow the
// paper's description; the buffer depths, the host write port and the
// output format are this design's choices.
//
// Interface: valid/ready in and out. host_we writes Offset[host_addr]
// (used while the accelerator is idle). Latency: log2(N) cycles of network,
// one cycle of arbitration and read, one of output buffer.
module offset_access
  import higraph_pkg::*;
#(
  parameter int unsigned N         = 32,
  parameter int unsigned V_MAX     = 524288,
  parameter int unsigned DEPTH     = 32,
  parameter int unsigned OUT_DEPTH = 4,
  localparam int unsigned OW       = PROP_W + 2*OFF_W,   // {prop, nOff, Off}
  localparam int unsigned HAW      = $clog2(V_MAX + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N-1:0]            in_valid,
  input  logic [N-1:0][ACT_W-1:0] in_data,     // {prop, id}
  output logic [N-1:0]            in_ready,
  output logic [N-1:0]            out_valid,
  output logic [N-1:0][OW-1:0]    out_data,
  input  logic [N-1:0]            out_ready,
  input  logic                    host_we,
  input  logic [HAW-1:0]          host_addr,
  input  logic [OFF_W-1:0]        host_wdata,
  output logic [N-1:0]            blocked,
  output logic [N-1:0]            shared,
  output logic                    busy
);
  localparam int unsigned LN    = $clog2(N);
  localparam int unsigned ROWS  = V_MAX / N + 1;
  localparam int unsigned ROW_W = $clog2(ROWS);

  logic [N-1:0]            h_valid, h_ready;
  logic [N-1:0][ACT_W-1:0] h_data;
  logic                    net_busy;

  mdp_network #(.N(N), .W(ACT_W), .KEY_LSB(0), .DEPTH(DEPTH)) u_net (
    .clk, .rst_n,
    .in_valid, .in_data, .in_ready,
    .out_valid(h_valid), .out_data(h_data), .out_ready(h_ready),
    .busy(net_busy)
  );

  logic [N-1:0]              req, grant, port_en;
  logic [N-1:0][ROW_W-1:0]   row_lo, row_hi, port_row;
  logic [N-1:0][OFF_W-1:0]   part_q;
  logic [N-1:0]              rd_v;       // read issued last cycle
  logic [N-1:0][PROP_W-1:0]  rd_prop;
  logic [N-1:0]              space;
  logic [N-1:0]              ob_ready;
  logic [N-1:0][$clog2(OUT_DEPTH+1)-1:0] ob_count;
  logic                      odd_first;

  for (genvar c = 0; c < N; c++) begin : g_ch
    vid_t id;
    assign id        = h_data[c][VID_W-1:0];
    assign row_lo[c] = ROW_W'(id >> LN);
    assign row_hi[c] = ROW_W'(id >> LN) + ((c == N - 1) ? ROW_W'(1) : ROW_W'(0));
    assign space[c]  = (32'(ob_count[c]) + 32'(rd_v[c])) < OUT_DEPTH;
    assign req[c]    = h_valid[c] && space[c];
    assign h_ready[c] = grant[c];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) rd_v[c] <= 1'b0;
      else        rd_v[c] <= grant[c];
    end
    always_ff @(posedge clk) if (grant[c]) rd_prop[c] <= h_data[c][VID_W +: PROP_W];

    logic hw;
    assign hw = host_we && (host_addr[LN-1:0] == LN'(c));
    sram_1r1w #(.W(OFF_W), .DEPTH(ROWS)) u_part (
      .clk,
      .rd_en  (port_en[c]),
      .rd_addr(port_row[c]),
      .rd_data(part_q[c]),
      .wr_en  (hw),
      .wr_addr(ROW_W'(host_addr >> LN)),
      .wr_data(host_wdata)
    );

    fifo_sync #(.W(OW), .DEPTH(OUT_DEPTH)) u_ob (
      .clk, .rst_n,
      .in_valid (rd_v[c]),
      .in_data  ({rd_prop[c], part_q[(c + 1) % N], part_q[c]}),
      .in_ready (ob_ready[c]),
      .out_valid(out_valid[c]),
      .out_data (out_data[c]),
      .out_ready(out_ready[c]),
      .count    (ob_count[c])
    );
  end

  odd_even_arbiter #(.N(N), .ROW_W(ROW_W)) u_arb (
    .clk, .rst_n, .req, .row_lo, .row_hi,
    .grant, .port_en, .port_row, .blocked, .shared, .odd_first
  );

  assign busy = net_busy || (|rd_v) || (|out_valid);

  for (genvar c = 0; c < N; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) rd_v[c] |-> ob_ready[c]);
  end
endmodule
