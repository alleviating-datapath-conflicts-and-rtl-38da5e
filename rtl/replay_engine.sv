// replay_engine: cuts one vertex's edge list into row-sized pieces.
//
// Input is {prop, nOff, Off}: the edges Off .. nOff-1 of one source vertex.
// The Edge Array is interleaved over M parts (edge e in part e mod M, row
// e / M), so one row of the array is M consecutive edges held by M distinct
// parts. The engine replays the list as pieces {prop, Len, Off} that never
// cross a row boundary: each piece has 1..M edges and its parts are
// consecutive, which is what the edge MDP-network and the dispatchers
// downstream expect. One piece leaves per cycle; an empty list is dropped.
//
// The paper states only that the engine divides {Off, nOff} into
// {Off, Len} of an appropriate length; cutting at row boundaries (so the
// length is at most M) is this design's choice.
//
// Interface: valid/ready on both sides. A new list is taken in the cycle its
// last piece leaves, so back-to-back lists run without a bubble.
module replay_engine
  import higraph_pkg::*;
#(
  parameter int unsigned M  = 32,
  localparam int unsigned LW = $clog2(M + 1),
  localparam int unsigned IW = PROP_W + 2*OFF_W,
  localparam int unsigned OW = PROP_W + LW + OFF_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [IW-1:0] in_data,    // {prop, nOff, Off}
  output logic          in_ready,
  output logic          out_valid,
  output logic [OW-1:0] out_data,   // {prop, Len, Off}
  input  logic          out_ready,
  output logic          extra_piece, // a piece other than the first left
  output logic          busy
);
  localparam int unsigned LM = $clog2(M);

  logic  active, first;
  off_t  cur, last;      // last = nOff
  prop_t prop;
  off_t  room, remain;
  logic [LW-1:0] len;
  logic  is_last, fire;

  always_comb begin
    room    = off_t'(M) - off_t'(cur[LM-1:0]);
    remain  = last - cur;
    is_last = remain <= room;
    len     = is_last ? LW'(remain) : LW'(room);
  end

  assign out_valid   = active;
  assign out_data    = {prop, len, cur};
  assign fire        = out_valid && out_ready;
  assign in_ready    = !active || (fire && is_last);
  assign extra_piece = fire && !first;
  assign busy        = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      first  <= 1'b0;
    end else if (in_valid && in_ready) begin
      active <= in_data[OFF_W +: OFF_W] != in_data[OFF_W-1:0];
      first  <= 1'b1;
    end else if (fire) begin
      first <= 1'b0;
      if (is_last) active <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      cur  <= in_data[OFF_W-1:0];
      last <= in_data[OFF_W +: OFF_W];
      prop <= in_data[2*OFF_W +: PROP_W];
    end else if (fire) begin
      cur <= cur + off_t'(len);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) active |-> (last > cur));
endmodule
