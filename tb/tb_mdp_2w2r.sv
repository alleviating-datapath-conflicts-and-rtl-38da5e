// tb_mdp_2w2r: random traffic on both inputs with random select bits and
// random output backpressure; each output is compared with a per-FIFO queue
// model (input 0 stored ahead of input 1 in the same cycle).
module tb_mdp_2w2r;
  localparam int W = 12, DEPTH = 5;
  logic clk = 0, rst_n = 0;
  logic [1:0] in_valid, in_sel, out_valid, out_ready;
  logic [1:0][W-1:0] in_data, out_data;
  logic in_ready, busy;
  int checks = 0, failures = 0;
  logic [W-1:0] q0[$], q1[$];

  mdp_2w2r #(.W(W), .DEPTH(DEPTH)) dut (.*);
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
    in_valid = 0; in_sel = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      in_valid = 2'($urandom); in_sel = 2'($urandom);
      in_data[0] = W'($urandom); in_data[1] = W'($urandom);
      out_ready = 2'($urandom);
      #1;
      check(in_ready == (q0.size() <= DEPTH-2 && q1.size() <= DEPTH-2), "in_ready");
      check(out_valid[0] == (q0.size() != 0) && out_valid[1] == (q1.size() != 0), "out_valid");
      if (out_valid[0]) check(out_data[0] == q0[0], "out0 data");
      if (out_valid[1]) check(out_data[1] == q1[0], "out1 data");
      if (out_valid[0] && out_ready[0]) void'(q0.pop_front());
      if (out_valid[1] && out_ready[1]) void'(q1.pop_front());
      if (in_ready)
        for (int i = 0; i < 2; i++)
          if (in_valid[i]) begin
            if (in_sel[i]) q1.push_back(in_data[i]); else q0.push_back(in_data[i]);
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
