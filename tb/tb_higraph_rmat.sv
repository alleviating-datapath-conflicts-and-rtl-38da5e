// tb_higraph_rmat: the accelerator at its full default size on an RMAT
// graph of the kind used to evaluate it (scale 14: 16384 vertices, average
// degree 64, 1,048,576 edges).
//
// The graph is generated here with the usual recursive-matrix rule (each
// edge picks a quadrant of the adjacency matrix with probabilities
// 0.57/0.19/0.19/0.05 at every level, vertex IDs then scrambled by a
// bijection) and random weights 1..15, sorted into
// CSR order, loaded through the host port and run with BFS, SSSP, SSWP and
// two PageRank iterations from a high-degree root. A reference model checks
// the iteration count, the edges processed and every vertex's Property and
// tProperty; the cycle count of each run is printed as edges per cycle.
module tb_higraph_rmat;
  import higraph_pkg::*;
  localparam int N_FE = 32, N_BE = 32, V_MAX = 524288, E_MAX = 4194304;
  localparam int SCALE = 14;
  localparam int NV = 1 << SCALE;
  localparam int NE = NV * 64;             // vertices used
  localparam int SEED = 1;

  logic clk = 0, rst_n = 0;
  alg_e alg;
  logic [VID_W:0] num_v;
  logic [15:0] max_iter, iter;
  prop_t pr_base, host_rdata;
  logic start, done, host_we, host_re, host_act_clear;
  phase_e phase;
  mem_sel_e host_sel;
  logic [31:0] host_addr;
  logic [ACT_W-1:0] host_wdata;
  perf_t perf;

  higraph_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int offs[];
  int edst[], ew[];
  int ne;
  int gprop[], gtprop[];
  int multi_iter_runs = 0, algs_run = 0;
  longint cycles_total = 0;
  localparam int INF = (1 << PROP_W) - 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hw(mem_sel_e sel, int addr, logic [ACT_W-1:0] data);
    host_we = 1; host_sel = sel; host_addr = addr; host_wdata = data;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic hr(mem_sel_e sel, int addr, output int data);
    host_re = 1; host_sel = sel; host_addr = addr;
    @(negedge clk);
    host_re = 0;
    data = host_rdata;
  endtask

  function automatic int pe(alg_e a, int p, int w);
    case (a)
      ALG_BFS:  return (p + 1 > INF) ? INF : p + 1;
      ALG_SSSP: return (p + w > INF) ? INF : p + w;
      ALG_SSWP: return (w < p) ? w : p;
      default:  return (p * w) >> 4;
    endcase
  endfunction
  function automatic int red(alg_e a, int t, int i);
    case (a)
      ALG_BFS, ALG_SSSP: return i < t ? i : t;
      ALG_SSWP:          return i > t ? i : t;
      default:           return (t + i > INF) ? INF : t + i;
    endcase
  endfunction
  function automatic int app(alg_e a, int p, int t, int base);
    case (a)
      ALG_BFS, ALG_SSSP: return t < p ? t : p;
      ALG_SSWP:          return t > p ? t : p;
      default:           return (base + t > INF) ? INF : base + t;
    endcase
  endfunction

  function automatic int mix(int x);
    x = x ^ (x >> 7);
    x = (x * 725) % NV;
    return x ^ (x >> 5);
  endfunction

  task automatic run(alg_e a, int root, int mi);
    int act_id[$], act_p[$], nid[$], np[$];
    int g_iter = 0, g_edges = 0, e0, c0, d;
    alg = a; max_iter = 16'(mi);
    // initial properties
    for (int v = 0; v < NV; v++) begin
      case (a)
        ALG_BFS, ALG_SSSP: begin gprop[v] = (v == root) ? 0 : INF; gtprop[v] = gprop[v]; end
        ALG_SSWP:          begin gprop[v] = (v == root) ? INF : 0; gtprop[v] = gprop[v]; end
        default:           begin gprop[v] = 500 + v; gtprop[v] = 0; end
      endcase
      hw(SEL_PROP, v, ACT_W'(gprop[v]));
      hw(SEL_TPROP, v, ACT_W'(gtprop[v]));
    end
    host_act_clear = 1; @(negedge clk); host_act_clear = 0;
    if (a == ALG_PR) for (int v = 0; v < NV; v++) begin act_id.push_back(v); act_p.push_back(gprop[v]); end
    else begin act_id.push_back(root); act_p.push_back(gprop[root]); end
    foreach (act_id[i]) hw(SEL_ACTIVE, 0, {prop_t'(act_p[i]), vid_t'(act_id[i])});
    // reference run
    while (act_id.size() != 0 && g_iter < mi) begin
      foreach (act_id[i])
        for (int e = offs[act_id[i]]; e < offs[act_id[i] + 1]; e++) begin
          gtprop[edst[e]] = red(a, gtprop[edst[e]], pe(a, act_p[i], ew[e]));
          g_edges++;
        end
      nid.delete(); np.delete();
      for (int v = 0; v < NV; v++) begin
        automatic int r = app(a, gprop[v], gtprop[v], pr_base);
        if (r != gprop[v] || a == ALG_PR) begin nid.push_back(v); np.push_back(r); end
        gprop[v] = r;
        if (a == ALG_PR) gtprop[v] = 0;
      end
      act_id = nid; act_p = np;
      g_iter++;
    end
    // hardware run
    e0 = perf.edges; c0 = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done && c0 < 10000000) begin @(negedge clk); c0++; end
    cycles_total += c0;
    check(done, "run finished");
    check(int'(iter) == g_iter, $sformatf("alg %0d iterations %0d vs %0d", a, iter, g_iter));
    check(int'(perf.edges) - e0 == g_edges, $sformatf("alg %0d edges %0d vs %0d", a, int'(perf.edges) - e0, g_edges));
    $display("alg %0d: %0d iterations, %0d edges, %0d cycles, %0.2f edges/cycle", a, g_iter, g_edges, c0, real'(g_edges) / real'(c0));
    if (g_iter > 1) multi_iter_runs++;
    algs_run++;
    for (int v = 0; v < NV; v++) begin
      hr(SEL_PROP, v, d);
      check(d == gprop[v], $sformatf("alg %0d prop[%0d] %0d vs %0d", a, v, d, gprop[v]));
      hr(SEL_TPROP, v, d);
      check(d == gtprop[v], $sformatf("alg %0d tprop[%0d] %0d vs %0d", a, v, d, gtprop[v]));
    end
  endtask

  initial begin
    int root;
    void'($urandom(SEED));
    alg = ALG_BFS; num_v = NV; max_iter = 0; pr_base = 150; start = 0;
    host_we = 0; host_re = 0; host_act_clear = 0; host_sel = SEL_PROP; host_addr = 0; host_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // RMAT graph, counting-sorted by source into CSR order
    offs = new[NV + 1]; gprop = new[NV]; gtprop = new[NV];
    edst = new[NE]; ew = new[NE];
    begin
      int src[], dst[], deg[], pos[];
      src = new[NE]; dst = new[NE]; deg = new[NV]; pos = new[NV];
      for (int v = 0; v < NV; v++) deg[v] = 0;
      for (int e = 0; e < NE; e++) begin
        automatic int s = 0, t = 0;
        for (int l = 0; l < SCALE; l++) begin
          automatic int r = $urandom % 100;
          s = s << 1; t = t << 1;
          if (r >= 57 && r < 76) t |= 1;
          else if (r >= 76 && r < 95) s |= 1;
          else if (r >= 95) begin s |= 1; t |= 1; end
        end
        // relabel with a bijection of the SCALE-bit IDs (xor-shift, odd
        // multiply, xor-shift) so that the RMAT hubs, which all have many
        // zero bits, do not crowd into channel 0
        s = mix(s); t = mix(t);
        src[e] = s; dst[e] = t; deg[s]++;
      end
      ne = 0;
      for (int v = 0; v < NV; v++) begin offs[v] = ne; pos[v] = ne; ne += deg[v]; end
      for (int e = 0; e < NE; e++) begin
        edst[pos[src[e]]] = dst[e]; ew[pos[src[e]]] = 1 + $urandom % 15; pos[src[e]]++;
      end
      offs[NV] = ne;
    end
    for (int i = 0; i <= NV; i++) hw(SEL_OFFSET, i, ACT_W'(offs[i]));
    for (int e = 0; e < ne; e++) hw(SEL_EDGE, e, ACT_W'({4'(ew[e]), vid_t'(edst[e])}));
    root = 0;
    while (offs[root + 1] - offs[root] < 64) root++;
    run(ALG_BFS, root, 100);
    run(ALG_SSSP, root, 100);
    $display("edges %0d, cycles in runs %0d", perf.edges, cycles_total);
    run(ALG_SSWP, root, 100);
    run(ALG_PR, root, 2);
    check(multi_iter_runs >= 4, "multi-iteration runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
