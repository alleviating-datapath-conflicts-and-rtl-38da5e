// vpe: vertex processing element, one per back-end channel.
//
// After the dataflow MDP-network, back-end channel j only receives updates
// {Imm, v} with v mod M == j, so vPE j alone reads and writes tProperty part
// j (vertex v at row v / M). For each update it performs
// v.tProp <- Reduce(v.tProp, Imm) as a two-cycle read-modify-write: the
// read is issued when the update arrives, the reduced value is written in
// the next cycle. When an update follows one to the same row, the value
// written in the previous cycle is forwarded instead of the stale memory
// word, so the vPE takes a new update every cycle.
//
// in_ready is always high. The tProperty part's ports are brought out; the
// top level lends them to the vPE during the scatter phase. forward flags a
// read-after-write forward.
module vpe
  import higraph_pkg::*;
#(
  parameter int unsigned M    = 32,
  parameter int unsigned ROWS = 16384,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  alg_e                    alg,
  input  logic                    in_valid,
  input  logic [PROP_W+VID_W-1:0] in_data,    // {Imm, v}
  output logic                    in_ready,
  output logic                    mem_rd_en,
  output logic [AW-1:0]           mem_rd_addr,
  input  prop_t                   mem_rd_data,
  output logic                    mem_wr_en,
  output logic [AW-1:0]           mem_wr_addr,
  output prop_t                   mem_wr_data,
  output logic                    forward,
  output logic                    busy
);
  localparam int unsigned LM = $clog2(M);

  logic          s1_v, wb_v;
  logic [AW-1:0] s1_row, wb_row;
  prop_t         s1_imm, wb_data, old, upd;

  assign in_ready    = 1'b1;
  assign mem_rd_en   = in_valid;
  assign mem_rd_addr = AW'(in_data[VID_W-1:0] >> LM);

  assign forward     = s1_v && wb_v && (wb_row == s1_row);
  assign old         = forward ? wb_data : mem_rd_data;
  assign upd         = reduce(alg, old, s1_imm);
  assign mem_wr_en   = s1_v;
  assign mem_wr_addr = s1_row;
  assign mem_wr_data = upd;
  assign busy        = s1_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0;
      wb_v <= 1'b0;
    end else begin
      s1_v <= in_valid;
      wb_v <= s1_v;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_row <= mem_rd_addr;
      s1_imm <= in_data[VID_W +: PROP_W];
    end
    if (s1_v) begin
      wb_row  <= s1_row;
      wb_data <= upd;
    end
  end
endmodule
