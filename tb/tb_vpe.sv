// tb_vpe: vPE 1 of M = 4 on an 8-row tProperty part held by the testbench.
// A stream of updates, one per cycle with many repeats of the same row
// back to back, is reduced for every algorithm; the final part contents
// must equal the reduction computed by the testbench, forwarding must have
// happened, and in_ready must stay high (one update per cycle).
module tb_vpe;
  import higraph_pkg::*;
  localparam int M = 4, ROWS = 8, AW = $clog2(ROWS);
  logic clk = 0, rst_n = 0;
  alg_e alg;
  logic in_valid, in_ready, mem_rd_en, mem_wr_en, forward, busy;
  logic [PROP_W+VID_W-1:0] in_data;
  logic [AW-1:0] mem_rd_addr, mem_wr_addr;
  prop_t mem_rd_data, mem_wr_data;
  prop_t part[ROWS];
  int model[ROWS];
  int checks = 0, failures = 0, fwd = 0;

  vpe #(.M(M), .ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  // the tProperty part: synchronous read, read before write
  always_ff @(posedge clk) begin
    if (mem_rd_en) mem_rd_data <= part[mem_rd_addr];
    if (mem_wr_en) part[mem_wr_addr] <= mem_wr_data;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int red(alg_e a, int t, int imm);
    case (a)
      ALG_BFS, ALG_SSSP: return imm < t ? imm : t;
      ALG_SSWP:          return imm > t ? imm : t;
      default:           return (t + imm > (1 << PROP_W) - 1) ? (1 << PROP_W) - 1 : t + imm;
    endcase
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = '0; alg = ALG_BFS;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 4; a++) begin
      @(negedge clk);
      alg = alg_e'(a);
      for (int r = 0; r < ROWS; r++) begin
        model[r] = (a == 2 || a == 3) ? 0 : (1 << PROP_W) - 1;
        part[r]  = prop_t'(model[r]);
      end
      for (int t = 0; t < 400; t++) begin
        automatic int r   = ($urandom % 2) ? 3 : $urandom % ROWS;
        automatic int imm = (a == 3) ? $urandom % 4000 : $urandom % (1 << PROP_W);
        in_valid = $urandom % 8 != 0;
        in_data  = {prop_t'(imm), vid_t'(r * M + 1)};
        #1 check(in_ready, "always ready");
        if (in_valid) model[r] = red(alg, model[r], imm);
        @(negedge clk);
        fwd += forward;
      end
      in_valid = 0;
      repeat (3) @(negedge clk);
      for (int r = 0; r < ROWS; r++) check(part[r] == prop_t'(model[r]), $sformatf("alg %0d row %0d", a, r));
    end
    check(fwd > 0, "forwarding happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
