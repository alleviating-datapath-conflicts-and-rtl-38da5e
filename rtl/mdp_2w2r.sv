// mdp_2w2r: the 2-write 2-read module, one switching element of an
// MDP-network of radix 2.
//
// It is two 2W1R FIFOs side by side. Each of the two inputs carries a
// destination select bit (one bit of the destination channel number, picked
// by the network for this stage); a datum with select 0 is written into
// FIFO 0 and one with select 1 into FIFO 1. Both inputs may target the same
// FIFO in one cycle, so nothing is ever arbitrated or blocked at the head of
// line: an input only waits when a FIFO has fewer than two free entries.
// Inside each FIFO input 0 is stored ahead of input 1.
//
// Interface: valid/ready on both sides; in_ready is shared by both inputs.
// Latency: one cycle from accepted input to FIFO head.
module mdp_2w2r #(
  parameter int unsigned W     = 38,
  parameter int unsigned DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [1:0]        in_valid,
  input  logic [1:0][W-1:0] in_data,
  input  logic [1:0]        in_sel,
  output logic              in_ready,
  output logic [1:0]        out_valid,
  output logic [1:0][W-1:0] out_data,
  input  logic [1:0]        out_ready,
  output logic              busy
);
  logic [1:0] f_ready;
  logic [1:0][$clog2(DEPTH+1)-1:0] f_count;

  for (genvar k = 0; k < 2; k++) begin : g_fifo
    logic [1:0] wv;
    always_comb begin
      wv[0] = in_ready && in_valid[0] && (in_sel[0] == 1'(k));
      wv[1] = in_ready && in_valid[1] && (in_sel[1] == 1'(k));
    end
    fifo_2w1r #(.W(W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (wv),
      .in_data  (in_data),
      .in_ready (f_ready[k]),
      .out_valid(out_valid[k]),
      .out_data (out_data[k]),
      .out_ready(out_ready[k]),
      .count    (f_count[k])
    );
  end

  assign in_ready = &f_ready;
  assign busy     = |out_valid;
endmodule
