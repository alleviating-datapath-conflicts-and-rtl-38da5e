// edge_mdp_network: the MDP-network variant for Edge Array access.
//
// N channels of edge-list pieces {prop, Len, Off} (each inside one row of the
// M-part Edge Array) enter; after log2(N) stages channel c holds only pieces
// whose parts lie in c*M/N .. c*M/N + M/N - 1, ready for that channel's
// dispatcher. Stage i pairs channels exactly as the plain mdp_network does
// (group of N/2^i channels, partner at distance N/2^(i+1)) but its modules
// are edge_split_2w2r, which steer on part-number bit log2(M)-1-i and cut a
// piece that straddles the two halves of its target range. The target range
// thus shrinks from M parts to M/N parts, stage by stage.
//
// Interface: valid/ready per channel. split_cnt counts the pieces cut this
// cycle (for statistics). Latency: one cycle per stage when nothing waits.
module edge_mdp_network
  import higraph_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned M     = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned LW   = $clog2(M + 1),
  localparam int unsigned W    = PROP_W + LW + OFF_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        in_valid,
  input  logic [N-1:0][W-1:0] in_data,
  output logic [N-1:0]        in_ready,
  output logic [N-1:0]        out_valid,
  output logic [N-1:0][W-1:0] out_data,
  input  logic [N-1:0]        out_ready,
  output logic [$clog2(N*$clog2(N)+1)-1:0] split_cnt,
  output logic                busy
);
  localparam int unsigned S  = $clog2(N);
  localparam int unsigned LM = $clog2(M);

  logic [S:0][N-1:0]        st_valid;
  logic [S:0][N-1:0][W-1:0] st_data;
  logic [S:0][N-1:0]        st_ready;
  logic [S-1:0][N/2-1:0]    st_busy;
  logic [S-1:0][N/2-1:0][1:0] st_split;

  assign st_valid[0] = in_valid;
  assign st_data[0]  = in_data;
  assign in_ready    = st_ready[0];
  assign out_valid   = st_valid[S];
  assign out_data    = st_data[S];
  assign st_ready[S] = out_ready;

  for (genvar i = 0; i < S; i++) begin : g_stage
    localparam int unsigned GROUP_BASE = N >> i;
    localparam int unsigned STEP       = GROUP_BASE / 2;
    for (genvar p = 0; p < N/2; p++) begin : g_pair
      localparam int unsigned CH1 = (p / STEP) * GROUP_BASE + (p % STEP);
      localparam int unsigned CH2 = CH1 + STEP;
      logic rdy;
      edge_split_2w2r #(.M(M), .BIT(LM - 1 - i), .DEPTH(DEPTH)) u_2w2r (
        .clk, .rst_n,
        .in_valid ({st_valid[i][CH2], st_valid[i][CH1]}),
        .in_data  ({st_data[i][CH2],  st_data[i][CH1]}),
        .in_ready (rdy),
        .out_valid({st_valid[i+1][CH2], st_valid[i+1][CH1]}),
        .out_data ({st_data[i+1][CH2],  st_data[i+1][CH1]}),
        .out_ready({st_ready[i+1][CH2], st_ready[i+1][CH1]}),
        .split    (st_split[i][p]),
        .busy     (st_busy[i][p])
      );
      assign st_ready[i][CH1] = rdy;
      assign st_ready[i][CH2] = rdy;
    end
  end

  always_comb begin
    split_cnt = '0;
    for (int i = 0; i < S; i++)
      for (int p = 0; p < N/2; p++)
        split_cnt += $bits(split_cnt)'(st_split[i][p][0]) + $bits(split_cnt)'(st_split[i][p][1]);
  end

  assign busy = |st_busy;

  initial assert (N >= 2 && (1 << S) == N && M >= N && (1 << LM) == M)
    else $error("edge_mdp_network: N, M powers of two, 2 <= N <= M");
endmodule
