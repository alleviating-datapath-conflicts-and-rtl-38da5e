// tb_epe: Process_Edge for all four algorithms against hand-written
// expressions, including saturation at the infinite property value; checks
// the one-cycle latency.
module tb_epe;
  import higraph_pkg::*;
  logic clk = 0, rst_n = 0;
  alg_e alg;
  logic in_valid, out_valid;
  prop_t in_prop;
  logic [EDGE_W-1:0] in_edge;
  logic [PROP_W+VID_W-1:0] out_data;
  int checks = 0, failures = 0;

  epe dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int expect_imm(alg_e a, int p, int w);
    int inf = (1 << PROP_W) - 1;
    case (a)
      ALG_BFS:  return (p + 1 > inf) ? inf : p + 1;
      ALG_SSSP: return (p + w > inf) ? inf : p + w;
      ALG_SSWP: return (w < p) ? w : p;
      default:  return (p * w) / 16;
    endcase
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; alg = ALG_BFS; in_prop = 0; in_edge = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      automatic int p = ($urandom % 8 == 0) ? (1 << PROP_W) - 1 - ($urandom % 3) : $urandom % (1 << PROP_W);
      automatic int w = $urandom % 16;
      automatic int d = $urandom % (1 << VID_W);
      @(negedge clk);
      alg = alg_e'(t % 4); in_valid = 1; in_prop = prop_t'(p); in_edge = {4'(w), vid_t'(d)};
      @(negedge clk);
      in_valid = 0;
      check(out_valid, "valid one cycle later");
      check(out_data == {prop_t'(expect_imm(alg, p, w)), vid_t'(d)},
            $sformatf("alg %0d p %0d w %0d", alg, p, w));
      @(negedge clk);
      check(!out_valid, "single cycle valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
