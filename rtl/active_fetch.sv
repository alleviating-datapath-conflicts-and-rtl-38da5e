// active_fetch: streams one ActiveVertex part into the front end.
//
// On go it reads rows 0 .. count-1 of its ActiveVertex part, one per cycle,
// and hands each {prop, ID} to its input channel of the offset
// MDP-network through a small buffer; a read is issued only when the buffer
// has room for it and the read already in flight. done is high while no
// read remains to be issued; outside a go..done window it never reads.
// This reader is this design's own; the paper only shows the ActiveVertex
// Array feeding the network.
module active_fetch
  import higraph_pkg::*;
#(
  parameter int unsigned ROWS      = 16384,
  parameter int unsigned OUT_DEPTH = 4,
  localparam int unsigned AW       = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             go,
  input  logic [AW:0]      count,
  output logic             rd_en,
  output logic [AW-1:0]    rd_addr,
  input  logic [ACT_W-1:0] rd_data,
  output logic             out_valid,
  output logic [ACT_W-1:0] out_data,
  input  logic             out_ready,
  output logic             done,
  output logic             busy
);
  logic [AW:0] next;
  logic        running, m_v, ob_ready;
  logic [$clog2(OUT_DEPTH+1)-1:0] ob_count;

  // Reads only between go and the last row: the list is rebuilt (and count
  // grows) during the apply phase, which must not restart the reader.
  assign done    = !running;
  assign rd_en   = running && !go && (next < count)
                   && ((32'(ob_count) + 32'(m_v)) < OUT_DEPTH);
  assign rd_addr = next[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next    <= '0;
      running <= 1'b0;
      m_v     <= 1'b0;
    end else begin
      m_v <= rd_en;
      if (go) begin
        next    <= '0;
        running <= 1'b1;
      end else begin
        if (rd_en) next <= next + 1'b1;
        if (next >= count || (rd_en && next + 1'b1 >= count)) running <= 1'b0;
      end
    end
  end

  fifo_sync #(.W(ACT_W), .DEPTH(OUT_DEPTH)) u_ob (
    .clk, .rst_n,
    .in_valid(m_v), .in_data(rd_data), .in_ready(ob_ready),
    .out_valid, .out_data, .out_ready, .count(ob_count)
  );

  assign busy = m_v || out_valid;
endmodule
