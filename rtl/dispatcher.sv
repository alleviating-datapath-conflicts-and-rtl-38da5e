// dispatcher: turns one edge-list piece into parallel Edge Array reads.
//
// Dispatcher c sits at output channel c of the edge MDP-network and owns the
// G = M/N consecutive Edge Array parts c*G .. c*G+G-1. Every piece it gets,
// {prop, Len, Off}, lies in one array row (Off / M) and in its own parts, so
// all of its edges can be read in one cycle, one per part. The dispatcher
// decodes which of its parts the piece covers and issues the reads in a
// single cycle when every covered lane can take one (lane_ok), passing the
// source property along with each read.
//
// The paper names the dispatcher as a set of small units that spread access
// requests over consecutive output channels; the one-cycle all-or-nothing
// issue is this design's choice.
//
// Interface: valid/ready input; combinational per-lane read requests
// (rd_en, row, prop), the lane's memory registers them.
module dispatcher
  import higraph_pkg::*;
#(
  parameter int unsigned N  = 32,
  parameter int unsigned M  = 32,
  parameter int unsigned C  = 0,          // channel number of this unit
  localparam int unsigned G  = M / N,
  localparam int unsigned LW = $clog2(M + 1),
  localparam int unsigned W  = PROP_W + LW + OFF_W,
  localparam int unsigned RW = OFF_W - $clog2(M)
) (
  input  logic                 in_valid,
  input  logic [W-1:0]         in_data,    // {prop, Len, Off}
  output logic                 in_ready,
  input  logic [G-1:0]         lane_ok,
  output logic [G-1:0]         rd_en,
  output logic [RW-1:0]        rd_row,
  output prop_t                rd_prop
);
  localparam int unsigned LM = $clog2(M);

  off_t            off;
  logic [LW-1:0]   len;
  logic [LM:0]     lo, hi;
  logic [G-1:0]    covered;

  always_comb begin
    off = in_data[OFF_W-1:0];
    len = in_data[OFF_W +: LW];
    lo  = {1'b0, off[LM-1:0]};
    hi  = lo + (LM+1)'(len) - (LM+1)'(1);
    for (int g = 0; g < G; g++) begin
      automatic logic [LM:0] part = (LM+1)'(C * G + g);
      covered[g] = (part >= lo) && (part <= hi);
    end
  end

  assign in_ready = &(lane_ok | ~covered);
  assign rd_en    = (in_valid && in_ready) ? covered : '0;
  assign rd_row   = RW'(off >> LM);
  assign rd_prop  = in_data[OFF_W+LW +: PROP_W];
endmodule
