// mdp_network: Multiple-stage Decentralized Propagation network, radix 2.
//
// N input channels are connected to N output channels through log2(N)
// stages of mdp_2w2r modules. A datum carries its destination channel
// number in data[KEY_LSB +: log2(N)]. The pairing follows the generation
// algorithm of the MDP-network: in stage i the channels fall into 2^i groups
// of N/2^i channels, and within a group channel k is paired with channel
// k + N/2^(i+1). The pair shares one 2W2R module which steers on destination
// bit log2(N)-1-i: bit value 0 leaves on the lower channel of the pair, 1 on
// the upper. After the last stage every datum sits on its destination
// channel. A datum is never blocked by a datum ahead of it that goes the
// other way, and each 2W2R module only ever talks to two channels, so no
// part of the network grows with N.
//
// Ordering: data from one input to one output stay in order.
// Interface: valid/ready per channel on both sides. in_ready[c] depends only
// on FIFO occupancy, not on in_valid. Latency: one cycle per stage when
// nothing waits, so log2(N) cycles through the network.
module mdp_network #(
  parameter int unsigned N       = 32,
  parameter int unsigned W       = 38,
  parameter int unsigned KEY_LSB = 0,
  parameter int unsigned DEPTH   = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      in_valid,
  input  logic [N-1:0][W-1:0] in_data,
  output logic [N-1:0]      in_ready,
  output logic [N-1:0]      out_valid,
  output logic [N-1:0][W-1:0] out_data,
  input  logic [N-1:0]      out_ready,
  output logic              busy
);
  localparam int unsigned S = $clog2(N);

  logic [S:0][N-1:0]        st_valid;
  logic [S:0][N-1:0][W-1:0] st_data;
  logic [S:0][N-1:0]        st_ready;
  logic [S-1:0][N/2-1:0]    st_busy;

  assign st_valid[0] = in_valid;
  assign st_data[0]  = in_data;
  assign in_ready    = st_ready[0];
  assign out_valid   = st_valid[S];
  assign out_data    = st_data[S];
  assign st_ready[S] = out_ready;

  for (genvar i = 0; i < S; i++) begin : g_stage
    localparam int unsigned GROUP_BASE = N >> i;
    localparam int unsigned STEP       = GROUP_BASE / 2;
    localparam int unsigned BIT        = S - 1 - i;
    for (genvar p = 0; p < N/2; p++) begin : g_pair
      localparam int unsigned CH1 = (p / STEP) * GROUP_BASE + (p % STEP);
      localparam int unsigned CH2 = CH1 + STEP;
      logic rdy;
      logic [1:0] sel;
      assign sel[0] = st_data[i][CH1][KEY_LSB + BIT];
      assign sel[1] = st_data[i][CH2][KEY_LSB + BIT];
      mdp_2w2r #(.W(W), .DEPTH(DEPTH)) u_2w2r (
        .clk, .rst_n,
        .in_valid ({st_valid[i][CH2], st_valid[i][CH1]}),
        .in_data  ({st_data[i][CH2],  st_data[i][CH1]}),
        .in_sel   (sel),
        .in_ready (rdy),
        .out_valid({st_valid[i+1][CH2], st_valid[i+1][CH1]}),
        .out_data ({st_data[i+1][CH2],  st_data[i+1][CH1]}),
        .out_ready({st_ready[i+1][CH2], st_ready[i+1][CH1]}),
        .busy     (st_busy[i][p])
      );
      assign st_ready[i][CH1] = rdy;
      assign st_ready[i][CH2] = rdy;
    end
  end

  assign busy = |st_busy;

  initial assert (N >= 2 && (1 << S) == N) else $error("mdp_network: N must be a power of two >= 2");
endmodule
