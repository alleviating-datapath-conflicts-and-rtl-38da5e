// tb_edge_mdp_network: N = 4 channels, M = 16 Edge Array parts (the example
// of the paper's architecture figure). Random row-sized pieces enter on all
// channels; every edge must come out exactly once, on channel part / 4, in a
// piece that stays inside that channel's four parts and carries its
// property. Also checks the per-stage latency (2 stages -> 2 cycles).
module tb_edge_mdp_network;
  import higraph_pkg::*;
  localparam int N = 4, M = 16, DEPTH = 6, LW = $clog2(M + 1);
  localparam int W = PROP_W + LW + OFF_W;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [N-1:0][W-1:0] in_data, out_data;
  logic [$clog2(N*$clog2(N)+1)-1:0] split_cnt;
  logic busy;
  int checks = 0, failures = 0, nsplit = 0, sent = 0, got = 0;
  int pending[int];                  // edge index -> property
  int rowc[N];

  edge_mdp_network #(.N(N), .M(M), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [W-1:0] pc(int prop, int len, int off);
    return {prop_t'(prop), LW'(len), off_t'(off)};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    in_valid = 0; in_data = '0; out_ready = '1;
    foreach (rowc[i]) rowc[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one edge in part 13 from channel 0 -> channel 3 after 2 cycles
    @(negedge clk); in_valid = 4'b0001; in_data[0] = pc(1, 1, M*50000 + 13);
    @(negedge clk); in_valid = 0; lat = 1;
    while (!out_valid[3] && lat < 10) begin @(negedge clk); lat++; end
    check(lat == 2 && out_data[3] == pc(1, 1, M*50000 + 13), $sformatf("latency %0d", lat));
    @(negedge clk);
    for (int cyc = 0; cyc < 6000; cyc++) begin
      for (int i = 0; i < N; i++) begin
        automatic int lo = $urandom % M;
        automatic int ln = 1 + $urandom % (M - lo);
        in_valid[i] = (cyc < 5000) && ($urandom % 2);
        in_data[i]  = pc(i * 1000 + rowc[i] % 1000, ln, M * (i * 10000 + rowc[i]) + lo);
      end
      out_ready = N'($urandom);
      #1;
      nsplit += split_cnt;
      for (int c = 0; c < N; c++)
        if (out_valid[c] && out_ready[c]) begin
          automatic int off  = out_data[c][OFF_W-1:0];
          automatic int len  = out_data[c][OFF_W +: LW];
          automatic int prop = out_data[c][OFF_W+LW +: PROP_W];
          check(len >= 1 && (off % M) / (M/N) == c && ((off + len - 1) % M) / (M/N) == c
                && (off / M) == ((off + len - 1) / M), "piece inside channel's parts");
          for (int e = off; e < off + len; e++) begin
            check(pending.exists(e) && pending[e] == prop, "edge expected once, right property");
            pending.delete(e);
            got++;
          end
        end
      for (int i = 0; i < N; i++)
        if (in_valid[i] && in_ready[i]) begin
          automatic int off = in_data[i][OFF_W-1:0];
          for (int e = off; e < off + int'(in_data[i][OFF_W +: LW]); e++) begin
            pending[e] = int'(in_data[i][OFF_W+LW +: PROP_W]); sent++;
          end
          rowc[i]++;
        end
      @(negedge clk);
    end
    check(pending.size() == 0 && got == sent && sent > 1000, $sformatf("all edges delivered %0d/%0d", got, sent));
    check(nsplit > 100, "pieces were split in the network");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
