// sram_1r1w: one buffer part of an interleaved on-chip array.
//
// Every on-chip array of the accelerator (ActiveVertex, Offset, Edge with its
// weights, Property and tProperty) is split into parts, and each part is one
// of these: a synchronous memory with one read port and one write port. The
// array is written as a plain SystemVerilog array so any tool can map it to
// its own memory macro.
//
// Timing: rd_data holds the word addressed in the cycle rd_en was high, from
// the next cycle on. A read and a write to the same word in one cycle return
// the old word (read before write). Contents are not reset.
module sram_1r1w #(
  parameter int unsigned W     = 19,
  parameter int unsigned DEPTH = 16384
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end
endmodule
