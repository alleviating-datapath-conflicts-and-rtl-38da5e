// odd_even_arbiter: alternating-priority arbiter for the Offset Array.
//
// After the offset MDP-network, channel c only holds source vertices u with
// u.ID mod N == c. Reading Off = Offset[u.ID] and nOff = Offset[u.ID+1]
// therefore takes read port c (row u.ID/N) and read port c+1 mod N (row
// (u.ID+1)/N) of the N-part interleaved Offset Array. A channel can only
// collide with its two neighbours. Even and odd channels take turns at
// being the priority set; the priority set never collides with itself, so
// every requesting priority channel is granted at once. A channel of the
// other parity is granted when neither of its two ports is taken by a
// priority neighbour, or when the neighbour reads the very same row there,
// in which case the one read serves both.
//
// The priority parity flips every clock cycle (the text says only that the
// two sets alternate; flipping each cycle is this design's choice).
//
// Interface: req/row_lo/row_hi per channel, purely combinational grant and
// per-port read enable/row in the same cycle. blocked and shared flag, per
// channel, a request that lost and a grant that shared a port.
module odd_even_arbiter #(
  parameter int unsigned N     = 32,
  parameter int unsigned ROW_W = 15
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N-1:0]          req,
  input  logic [N-1:0][ROW_W-1:0] row_lo,   // row needed at port c
  input  logic [N-1:0][ROW_W-1:0] row_hi,   // row needed at port c+1 mod N
  output logic [N-1:0]          grant,
  output logic [N-1:0]          port_en,
  output logic [N-1:0][ROW_W-1:0] port_row,
  output logic [N-1:0]          blocked,
  output logic [N-1:0]          shared,
  output logic                  odd_first
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) odd_first <= 1'b0;
    else        odd_first <= ~odd_first;
  end

  always_comb begin
    for (int c = 0; c < N; c++) begin
      automatic int l = (c + N - 1) % N;
      automatic int r = (c + 1) % N;
      automatic logic prio = ((c % 2) == 1) == odd_first;
      automatic logic ok_l = !req[l] || (row_hi[l] == row_lo[c]);
      automatic logic ok_r = !req[r] || (row_lo[r] == row_hi[c]);
      if (prio) begin
        grant[c]  = req[c];
        shared[c] = 1'b0;
      end else begin
        grant[c]  = req[c] && ok_l && ok_r;
        shared[c] = grant[c] && (req[l] || req[r]);
      end
      blocked[c] = req[c] && !grant[c];
    end
    for (int k = 0; k < N; k++) begin
      automatic int l = (k + N - 1) % N;
      port_en[k]  = grant[k] || grant[l];
      port_row[k] = grant[k] ? row_lo[k] : row_hi[l];
    end
  end

  // Two granted channels that use one port must want the same row there.
  for (genvar k = 0; k < N; k++) begin : g_chk
    localparam int unsigned L = (k + N - 1) % N;
    assert property (@(posedge clk) disable iff (!rst_n)
      (grant[k] && grant[L]) |-> (row_lo[k] == row_hi[L]));
  end

  initial assert (N >= 2 && N % 2 == 0) else $error("odd_even_arbiter: N must be even");
endmodule
