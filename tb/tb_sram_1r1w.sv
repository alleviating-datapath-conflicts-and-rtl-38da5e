// tb_sram_1r1w: random reads and writes against an array model; checks the
// one-cycle read latency, read-before-write on a collision, and that rd_data
// holds while rd_en is low.
module tb_sram_1r1w;
  localparam int W = 19, DEPTH = 24;
  logic clk = 0;
  logic rd_en, wr_en;
  logic [$clog2(DEPTH)-1:0] rd_addr, wr_addr;
  logic [W-1:0] rd_data, wr_data, model[DEPTH], exp_q;
  logic exp_v;
  int checks = 0, failures = 0;

  sram_1r1w #(.W(W), .DEPTH(DEPTH)) dut (.*);
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

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0; exp_v = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 5'(a); wr_data = W'(a * 7 + 1); model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      if (exp_v) check(rd_data == exp_q, "read data");
      rd_en = $urandom % 2; rd_addr = 5'($urandom % DEPTH);
      wr_en = $urandom % 2; wr_addr = ($urandom % 4 == 0) ? rd_addr : 5'($urandom % DEPTH);
      wr_data = W'($urandom);
      if (rd_en) begin exp_q = model[rd_addr]; exp_v = 1; end
      if (wr_en) model[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
