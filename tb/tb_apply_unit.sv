// tb_apply_unit: apply unit 1 of N = 2 with M = 4 (it owns parts 2 and 3),
// 8 rows per part and num_v = 27, so the sweep stops part-way through a row.
// Property and tProperty parts are held by the testbench. For every
// algorithm the updated properties, the list of activated {prop, ID} in
// sweep order and the PR clearing of tProperty are compared with a model,
// and the sweep must take one cycle per vertex.
module tb_apply_unit;
  import higraph_pkg::*;
  localparam int N = 2, M = 4, P = 1, ROWS = 8, G = M / N, AW = $clog2(ROWS);
  logic clk = 0, rst_n = 0;
  alg_e alg;
  logic start, done, act_we;
  logic [VID_W:0] num_v;
  prop_t pr_base, wr_data_prop, wr_data_tprop;
  logic [G-1:0] rd_en, prop_we, tprop_we;
  logic [AW-1:0] rd_addr, wr_addr;
  prop_t [G-1:0] prop_q, tprop_q;
  logic [ACT_W-1:0] act_wdata;
  prop_t prop_m[G][ROWS], tprop_m[G][ROWS];
  int exp_prop[G][ROWS], exp_tprop[G][ROWS];
  logic [ACT_W-1:0] exp_act[$];
  int checks = 0, failures = 0;

  apply_unit #(.N(N), .M(M), .P(P), .ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  for (genvar g = 0; g < G; g++) begin : g_mem
    always_ff @(posedge clk) begin
      if (rd_en[g]) begin prop_q[g] <= prop_m[g][rd_addr]; tprop_q[g] <= tprop_m[g][rd_addr]; end
      if (prop_we[g])  prop_m[g][wr_addr]  <= wr_data_prop;
      if (tprop_we[g]) tprop_m[g][wr_addr] <= wr_data_tprop;
    end
  end

  always @(posedge clk) if (rst_n && act_we) begin
    checks++;
    if (exp_act.size() == 0 || exp_act[0] != act_wdata) begin
      failures++; $display("FAIL activation %h", act_wdata);
    end
    if (exp_act.size() != 0) void'(exp_act.pop_front());
  end

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
    int cyc, nv;
    start = 0; alg = ALG_BFS; num_v = 27; pr_base = 100;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 4; a++) begin
      @(negedge clk);
      alg = alg_e'(a);
      nv = 0;
      for (int r = 0; r < ROWS; r++)
        for (int g = 0; g < G; g++) begin
          automatic int v = r * M + P * G + g;
          automatic int p = $urandom % 1000, t = ($urandom % 2) ? p : $urandom % 1000;
          automatic int res;
          prop_m[g][r] = prop_t'(p); tprop_m[g][r] = prop_t'(t);
          exp_prop[g][r] = p; exp_tprop[g][r] = t;
          if (v < 27) begin
            nv++;
            case (a)
              0, 1: res = t < p ? t : p;
              2:    res = t > p ? t : p;
              default: res = 100 + t;
            endcase
            exp_prop[g][r] = res;
            if (a == 3) exp_tprop[g][r] = 0;
            if (res != p || a == 3) exp_act.push_back({prop_t'(res), vid_t'(v)});
          end
        end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
      check(cyc <= nv + 3, $sformatf("one vertex per cycle (%0d cycles, %0d vertices)", cyc, nv));
      check(exp_act.size() == 0, "all activations seen");
      for (int r = 0; r < ROWS; r++)
        for (int g = 0; g < G; g++)
          check(prop_m[g][r] == prop_t'(exp_prop[g][r]) && tprop_m[g][r] == prop_t'(exp_tprop[g][r]),
                $sformatf("alg %0d part %0d row %0d", a, g, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
