// tb_dispatcher: dispatcher 2 of N = 4, M = 16 (parts 8..11). Random pieces
// inside those parts and random lane_ok. The read enables must cover
// exactly the piece's parts, the piece is taken only when all of those lanes
// can accept, and row and property are passed on.
module tb_dispatcher;
  import higraph_pkg::*;
  localparam int N = 4, M = 16, C = 2, G = M / N, LW = $clog2(M + 1);
  localparam int W = PROP_W + LW + OFF_W, RW = OFF_W - $clog2(M);
  logic in_valid, in_ready;
  logic [W-1:0] in_data;
  logic [G-1:0] lane_ok, rd_en;
  logic [RW-1:0] rd_row;
  prop_t rd_prop;
  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0;

  dispatcher #(.N(N), .M(M), .C(C)) dut (.*);
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
    for (int t = 0; t < 3000; t++) begin
      automatic int lo  = $urandom % G;
      automatic int ln  = 1 + $urandom % (G - lo);
      automatic int row = $urandom % 100000;
      automatic logic [G-1:0] want = '0;
      for (int g = lo; g < lo + ln; g++) want[g] = 1'b1;
      in_valid = $urandom % 4 != 0;
      lane_ok  = G'($urandom) | G'($urandom);
      in_data  = {prop_t'(row + 3), LW'(ln), off_t'(row * M + C * G + lo)};
      @(negedge clk);
      check(in_ready == ((want & ~lane_ok) == '0), "ready when all covered lanes ok");
      check(rd_en == ((in_valid && in_ready) ? want : '0), "read enables");
      if (in_valid && in_ready)
        check(rd_row == RW'(row) && rd_prop == prop_t'(row + 3), "row and property");
      if (in_valid && !in_ready) stalls++;
    end
    check(stalls > 0, "stalls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
