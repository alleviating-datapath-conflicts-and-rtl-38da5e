// fifo_sync: small single-clock FIFO, one write and one read per cycle.
//
// Used as the output buffer of pipeline stages that issue memory reads
// ahead: the stage counts its in-flight reads against `count` so the buffer
// never overflows. Registered output (no fall-through), valid/ready on both
// sides; in_ready is simply "not full".
module fifo_sync #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  input  logic         out_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  typedef logic [AW-1:0] ptr_t;
  typedef logic [$clog2(DEPTH+1)-1:0] cnt_t;

  logic [W-1:0] mem [DEPTH];
  ptr_t wp, rp;
  logic do_wr, do_rd;

  function automatic ptr_t inc(ptr_t p);
    return (p == ptr_t'(DEPTH - 1)) ? '0 : p + ptr_t'(1);
  endfunction

  assign in_ready  = (count != cnt_t'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  always_ff @(posedge clk) if (do_wr) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= inc(wp);
      if (do_rd) rp <= inc(rp);
      count <= count + cnt_t'(do_wr) - cnt_t'(do_rd);
    end
  end
endmodule
