// tb_fifo_2w1r: random two-write / one-read traffic against a queue model.
// Checks head data, count, the "accept only with two free entries" rule,
// and one-cycle write-to-head latency.
module tb_fifo_2w1r;
  localparam int W = 16, DEPTH = 6;
  logic clk = 0, rst_n = 0;
  logic [1:0] in_valid;
  logic [1:0][W-1:0] in_data;
  logic in_ready, out_valid, out_ready;
  logic [W-1:0] out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  fifo_2w1r #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
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
    // latency: one write is at the head one cycle later
    @(negedge clk); in_valid = 2'b01; in_data[0] = 16'h1234;
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 16'h1234, "latency 1");
    out_ready = 1; @(negedge clk); out_ready = 0;
    check(!out_valid, "empty after read");
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      in_valid = 2'($urandom);
      in_data[0] = 16'($urandom); in_data[1] = 16'($urandom);
      out_ready = ($urandom % 3) != 0;
      #1;
      check(in_ready == (q.size() <= DEPTH - 2), "in_ready rule");
      check(count == q.size(), "count");
      check(out_valid == (q.size() != 0), "out_valid");
      if (out_valid) check(out_data == q[0], "head data");
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_ready) begin
        if (in_valid[0]) q.push_back(in_data[0]);
        if (in_valid[1]) q.push_back(in_data[1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
