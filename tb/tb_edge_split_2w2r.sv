// tb_edge_split_2w2r: M = 16 parts, split on bit 3 (halves 0-7 and 8-15).
// Random pieces inside one row on both inputs, random backpressure. The
// expected output pieces are built edge by edge (each edge goes to the half
// its part is in, consecutive edges of one half form one piece) and compared
// with each FIFO in order. Includes the worked example Off 4 Len 9 ->
// Off 4 Len 4 + Off 8 Len 5.
module tb_edge_split_2w2r;
  import higraph_pkg::*;
  localparam int M = 16, BIT = 3, DEPTH = 6, LW = $clog2(M + 1);
  localparam int W = PROP_W + LW + OFF_W;
  logic clk = 0, rst_n = 0;
  logic [1:0] in_valid, out_valid, out_ready, split;
  logic [1:0][W-1:0] in_data, out_data;
  logic in_ready, busy;
  int checks = 0, failures = 0, nsplit = 0;
  logic [W-1:0] q[2][$];

  edge_split_2w2r #(.M(M), .BIT(BIT), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [W-1:0] pc(int prop, int len, int off);
    return {prop_t'(prop), LW'(len), off_t'(off)};
  endfunction

  task automatic model(logic [W-1:0] d);
    int off = d[OFF_W-1:0], len = d[OFF_W +: LW], prop = d[OFF_W+LW +: PROP_W];
    int start = off, n = 0, half = ((off % M) >> BIT) & 1;
    for (int e = off; e < off + len; e++) begin
      automatic int h = ((e % M) >> BIT) & 1;
      if (h != half) begin
        q[half].push_back(pc(prop, n, start));
        start = e; n = 0; half = h;
      end
      n++;
    end
    q[half].push_back(pc(prop, n, start));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); in_valid = 2'b01; in_data[0] = pc(5, 9, 4);
    @(negedge clk); in_valid = 0;
    #1 check(out_valid == 2'b11 && out_data[0] == pc(5, 4, 4) && out_data[1] == pc(5, 5, 8),
             "Off 4 Len 9 split into Off 4 Len 4 and Off 8 Len 5");
    out_ready = 2'b11;
    @(negedge clk);
    for (int cyc = 0; cyc < 5000; cyc++) begin
      for (int i = 0; i < 2; i++) begin
        automatic int lo = $urandom % M;
        automatic int ln = 1 + $urandom % (M - lo);
        in_valid[i] = $urandom % 2;
        in_data[i]  = pc($urandom % 1000, ln, M * ($urandom % 100) + lo);
      end
      out_ready = 2'($urandom);
      #1;
      for (int k = 0; k < 2; k++) begin
        check(out_valid[k] == (q[k].size() != 0), "out_valid");
        if (out_valid[k]) check(out_data[k] == q[k][0], $sformatf("piece out %0d", k));
        if (out_valid[k] && out_ready[k]) void'(q[k].pop_front());
      end
      nsplit += split[0] + split[1];
      if (in_ready)
        for (int i = 0; i < 2; i++) if (in_valid[i]) model(in_data[i]);
      @(negedge clk);
    end
    check(nsplit > 100, "splits seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
