// edge_split_2w2r: 2W2R module of the Edge Array MDP-network, with splitting.
//
// Each input carries an edge-list piece {prop, Len, Off} whose Edge Array
// parts (Off mod M .. Off mod M + Len - 1) lie inside the target range this
// module serves. The range is halved here on bit BIT of the part number: a
// piece wholly in the lower half goes to FIFO 0, wholly in the upper half
// to FIFO 1, and a piece that straddles the middle is cut in two, the lower
// piece to FIFO 0 and the upper piece to FIFO 1, in the same cycle. (For
// example Off 4, Len 9 against halves 0-7 and 8-15 becomes Off 4 Len 4 and
// Off 8 Len 5.) Each FIFO therefore receives at most one piece from each
// input per cycle, which is exactly what a 2W1R FIFO takes.
//
// Interface and timing as mdp_2w2r: shared in_ready, valid/ready outputs,
// one cycle latency. split[i] flags that input i was cut this cycle.
module edge_split_2w2r
  import higraph_pkg::*;
#(
  parameter int unsigned M     = 32,
  parameter int unsigned BIT   = 4,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned LW   = $clog2(M + 1),
  localparam int unsigned W    = PROP_W + LW + OFF_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [1:0]        in_valid,
  input  logic [1:0][W-1:0] in_data,     // {prop, Len, Off}
  output logic              in_ready,
  output logic [1:0]        out_valid,
  output logic [1:0][W-1:0] out_data,
  input  logic [1:0]        out_ready,
  output logic [1:0]        split,
  output logic              busy
);
  localparam int unsigned LM = $clog2(M);

  // piece[i][k]: what input i writes into FIFO k
  logic [1:0][1:0]        pv;
  logic [1:0][1:0][W-1:0] pd;
  logic [1:0]             f_ready;

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      automatic off_t          off  = in_data[i][OFF_W-1:0];
      automatic logic [LW-1:0] len  = in_data[i][OFF_W +: LW];
      automatic prop_t         prop = in_data[i][OFF_W+LW +: PROP_W];
      automatic logic [LM:0]   lo   = {1'b0, off[LM-1:0]};
      automatic logic [LM:0]   hi   = lo + (LM+1)'(len) - (LM+1)'(1);
      automatic logic [LM:0]   mid  = (hi >> BIT) << BIT;
      automatic logic [LW-1:0] len0 = LW'(mid - lo);
      pv[i] = '0;
      pd[i] = '0;
      split[i] = 1'b0;
      if (lo[BIT] == hi[BIT]) begin
        pv[i][hi[BIT]] = in_valid[i];
        pd[i][hi[BIT]] = in_data[i];
      end else begin
        split[i] = in_valid[i] && in_ready;
        pv[i][0] = in_valid[i];
        pd[i][0] = {prop, len0, off};
        pv[i][1] = in_valid[i];
        pd[i][1] = {prop, LW'(len - len0), off_t'(off + off_t'(len0))};
      end
    end
  end

  for (genvar k = 0; k < 2; k++) begin : g_fifo
    logic [1:0] wv;
    logic [$clog2(DEPTH+1)-1:0] cnt;
    assign wv = {pv[1][k], pv[0][k]} & {2{in_ready}};
    fifo_2w1r #(.W(W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (wv),
      .in_data  ({pd[1][k], pd[0][k]}),
      .in_ready (f_ready[k]),
      .out_valid(out_valid[k]),
      .out_data (out_data[k]),
      .out_ready(out_ready[k]),
      .count    (cnt)
    );
  end

  assign in_ready = &f_ready;
  assign busy     = |out_valid;

  for (genvar i = 0; i < 2; i++) begin : g_chk
    // Pieces are never empty and never run past the end of an array row.
    assert property (@(posedge clk) disable iff (!rst_n)
      in_valid[i] |-> (in_data[i][OFF_W +: LW] != '0));
  end
endmodule
