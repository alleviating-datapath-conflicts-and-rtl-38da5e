// tb_mdp_network: N = 8 channels, random data with random destinations and
// random output backpressure. Every datum must leave on its destination
// channel, exactly once, in order per (source, destination) pair. An
// isolated datum must take log2(N) = 3 cycles, and a blocked output must
// stop the inputs (backpressure).
module tb_mdp_network;
  localparam int N = 8, W = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [N-1:0][W-1:0] in_data, out_data;
  logic busy;
  int checks = 0, failures = 0;
  int sent = 0, got = 0;
  logic [W-1:0] q[N][N][$];     // [src][dst]
  logic [7:0] seq[N];

  mdp_network #(.N(N), .W(W), .KEY_LSB(0), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // data = {src[2:0], seq[7:0], unused, dst[2:0]} -> 3+8+2+3 = 16
  function automatic logic [W-1:0] mk(int src, int dst, logic [7:0] s);
    return {3'(src), s, 2'b00, 3'(dst)};
  endfunction

  initial begin
    int lat;
    in_valid = 0; in_data = '0; out_ready = '1;
    foreach (seq[i]) seq[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency of an isolated datum from channel 2 to channel 5
    @(negedge clk); in_valid = 8'b0000_0100; in_data[2] = mk(2, 5, 8'hAA);
    @(negedge clk); in_valid = 0;
    lat = 1;
    while (!out_valid[5] && lat < 20) begin @(negedge clk); lat++; end
    check(lat == 3, $sformatf("latency %0d", lat));
    check(out_data[5] == mk(2, 5, 8'hAA), "latency datum");
    @(negedge clk);
    // backpressure: outputs blocked, all inputs pushing, inputs must stop
    out_ready = '0;
    for (int c = 0; c < 30; c++) begin
      in_valid = '1;
      for (int i = 0; i < N; i++) begin
        in_data[i] = mk(i, (i + 3) % N, seq[i]);
      end
      #1;
      for (int i = 0; i < N; i++)
        if (in_ready[i]) begin q[i][(i+3)%N].push_back(in_data[i]); seq[i]++; sent++; end
      @(negedge clk);
    end
    #1 check(in_ready == '0, "inputs stopped when outputs blocked");
    // random traffic
    for (int cyc = 0; cyc < 4000; cyc++) begin
      for (int i = 0; i < N; i++) begin
        automatic int d = $urandom % N;
        in_valid[i] = (cyc < 3500) && ($urandom % 4 != 0);
        in_data[i]  = mk(i, d, seq[i]);
      end
      out_ready = 8'($urandom);
      #1;
      for (int o = 0; o < N; o++)
        if (out_valid[o] && out_ready[o]) begin
          automatic int s = out_data[o][15:13];
          check(out_data[o][2:0] == 3'(o), "arrived at destination");
          check(q[s][o].size() != 0 && q[s][o][0] == out_data[o], "order per pair");
          if (q[s][o].size() != 0) void'(q[s][o].pop_front());
          got++;
        end
      for (int i = 0; i < N; i++)
        if (in_valid[i] && in_ready[i]) begin
          q[i][in_data[i][2:0]].push_back(in_data[i]); seq[i]++; sent++;
        end
      @(negedge clk);
    end
    check(sent == got && sent > 1000, $sformatf("all delivered %0d/%0d", got, sent));
    check(!busy, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
