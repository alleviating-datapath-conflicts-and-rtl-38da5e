// fifo_2w1r: two-write, one-read FIFO, the building block of every
// MDP-network stage.
//
// Up to two data enter per cycle (port 0 is stored ahead of port 1 when both
// write) and one leaves per cycle from the head. The FIFO accepts only while
// at least two entries are free, so neither writer ever has to look at the
// other: in_ready is one shared signal and a writer whose in_valid is low
// simply does not write. This is the admission rule described for nW1R
// FIFOs (accept only when the free space is not below the number of write
// ports). Storage is a plain circular buffer; DEPTH need not be a power of
// two.
//
// Timing: a datum written in cycle t is visible at out_data in cycle t+1
// (no fall-through). The read side is valid/ready.
module fifo_2w1r #(
  parameter int unsigned W     = 38,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       in_valid,
  input  logic [1:0][W-1:0] in_data,
  output logic             in_ready,
  output logic             out_valid,
  output logic [W-1:0]     out_data,
  input  logic             out_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  typedef logic [AW-1:0] ptr_t;

  logic [W-1:0] mem [DEPTH];
  ptr_t wp, rp;

  function automatic ptr_t inc(ptr_t p);
    return (p == ptr_t'(DEPTH - 1)) ? '0 : p + ptr_t'(1);
  endfunction

  logic do_rd;
  logic [1:0] nwr;
  assign in_ready  = (count <= ($clog2(DEPTH+1))'(DEPTH - 2));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign do_rd     = out_valid && out_ready;
  always_comb nwr = in_ready ? (2'(in_valid[0]) + 2'(in_valid[1])) : 2'd0;

  always_ff @(posedge clk) begin
    if (in_ready) begin
      if (in_valid[0]) mem[wp] <= in_data[0];
      if (in_valid[1]) mem[in_valid[0] ? inc(wp) : wp] <= in_data[1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (nwr == 2'd1) wp <= inc(wp);
      else if (nwr == 2'd2) wp <= inc(inc(wp));
      if (do_rd) rp <= inc(rp);
      count <= count + ($clog2(DEPTH+1))'(nwr) - ($clog2(DEPTH+1))'(do_rd);
    end
  end

  initial assert (DEPTH >= 2) else $error("fifo_2w1r needs DEPTH >= 2");
  // Never overflow or underflow.
  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule
