// apply_unit: the apply phase for one group of back-end channels.
//
// Apply unit p owns the G = M/N back-end channels p*G .. p*G+G-1 and the
// Property and tProperty parts of those channels (vertex v lives in part
// v mod M at row v / M). Started by the controller, it sweeps its vertices
// one per cycle, row by row and part by part, and for each v < num_v:
//   applyRes <- Apply(v.prop, v.tProp)
//   if applyRes != v.prop: v.prop <- applyRes, activate {applyRes, v}
// Activation appends {prop, ID} to ActiveVertex part p through act_we; the
// top level keeps the append pointer. For PageRank every vertex is
// activated and tProp is cleared back to 0 for the next sum; for the
// min/max algorithms tProp keeps its value.
//
// The apply phase itself is the programming model's; its place per
// front-end part, the one-vertex-per-cycle sweep and the PR handling are
// this design's choices. Timing: reads in cycle t, compare and write in
// t+1; done rises one cycle after the last write.
module apply_unit
  import higraph_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned M     = 32,
  parameter int unsigned P     = 0,       // front-end part served
  parameter int unsigned ROWS  = 16384,   // rows per Property part
  localparam int unsigned G    = M / N,
  localparam int unsigned AW   = $clog2(ROWS),
  localparam int unsigned GW   = (G > 1) ? $clog2(G) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  alg_e                alg,
  input  logic                start,
  input  logic [VID_W:0]      num_v,
  input  prop_t               pr_base,
  output logic                done,
  output logic [G-1:0]        rd_en,       // same enable/address for prop and tProp
  output logic [AW-1:0]       rd_addr,
  input  prop_t [G-1:0]       prop_q,
  input  prop_t [G-1:0]       tprop_q,
  output logic [G-1:0]        prop_we,
  output logic [G-1:0]        tprop_we,
  output logic [AW-1:0]       wr_addr,
  output prop_t               wr_data_prop,
  output prop_t               wr_data_tprop,
  output logic                act_we,
  output logic [ACT_W-1:0]    act_wdata    // {prop, id}
);
  localparam int unsigned LM = $clog2(M);

  logic          running, c_v;
  logic [AW:0]   row;
  logic [GW-1:0] g;
  logic [AW-1:0] c_row;
  logic [GW-1:0] c_g;
  logic [VID_W:0] vid_now, c_vid;
  prop_t         res, pv;

  // vertex swept this cycle
  assign vid_now = (VID_W+1)'(row) * (VID_W+1)'(M) + (VID_W+1)'(P * G) + (VID_W+1)'(g);

  always_comb begin
    rd_en = '0;
    if (running && vid_now < num_v) rd_en[g] = 1'b1;
  end
  assign rd_addr = row[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      c_v     <= 1'b0;
      done    <= 1'b1;
      row     <= '0;
      g       <= '0;
    end else begin
      c_v <= running && (vid_now < num_v);
      if (start) begin
        running <= 1'b1;
        done    <= 1'b0;
        row     <= '0;
        g       <= '0;
      end else if (running) begin
        if (32'(g) == G - 1) begin
          g   <= '0;
          row <= row + 1'b1;
          if ((VID_W+1)'(row + 1'b1) * (VID_W+1)'(M) >= num_v || 32'(row) + 1 >= ROWS)
            running <= 1'b0;
        end else begin
          g <= g + 1'b1;
        end
      end else if (!c_v) begin
        done <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    c_row <= row[AW-1:0];
    c_g   <= g;
    c_vid <= vid_now;
  end

  assign pv  = prop_q[c_g];
  assign res = apply_fn(alg, pv, tprop_q[c_g], pr_base);

  always_comb begin
    prop_we  = '0;
    tprop_we = '0;
    if (c_v && res != pv) prop_we[c_g] = 1'b1;
    if (c_v && alg == ALG_PR) tprop_we[c_g] = 1'b1;
  end
  assign wr_addr       = c_row;
  assign wr_data_prop  = res;
  assign wr_data_tprop = '0;
  assign act_we        = c_v && (alg == ALG_PR || res != pv);
  assign act_wdata     = {res, c_vid[VID_W-1:0]};
endmodule
