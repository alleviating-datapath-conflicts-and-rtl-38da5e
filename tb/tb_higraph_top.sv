// tb_higraph_top: end-to-end run of the accelerator on a random graph.
//
// A graph with a few high-degree hubs is generated, loaded through the host
// port, and BFS, SSSP, SSWP and PageRank are run one after the other. A
// reference model executes the same vertex-centric program (synchronous
// scatter and apply over the same active lists) and the testbench compares
// the number of iterations, the number of edges processed and every
// vertex's Property and tProperty. It also requires that each mechanism of
// the design happened at least once: dataflow MDP-network backpressure,
// odd-even arbiter conflicts and shared reads, replay-engine splits,
// edge-network splits, vPE forwarding, vPE starvation, multi-iteration runs
// and every algorithm mode.
module tb_higraph_top;
  import higraph_pkg::*;
  localparam int N_FE = 4, N_BE = 8, V_MAX = 256, E_MAX = 4096;
  localparam int NV = 200;              // vertices used
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

  higraph_top #(.N_FE(N_FE), .N_BE(N_BE), .V_MAX(V_MAX), .E_MAX(E_MAX),
                .MDP_DEPTH(4), .FE_DEPTH(4)) dut (.*);

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
    repeat (3000000) @(posedge clk);
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
    while (!done && c0 < 1000000) begin @(negedge clk); c0++; end
    cycles_total += c0;
    check(done, "run finished");
    check(int'(iter) == g_iter, $sformatf("alg %0d iterations %0d vs %0d", a, iter, g_iter));
    check(int'(perf.edges) - e0 == g_edges, $sformatf("alg %0d edges %0d vs %0d", a, int'(perf.edges) - e0, g_edges));
    $display("alg %0d: %0d iterations, %0d edges, %0d cycles", a, g_iter, g_edges, c0);
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
    // random graph: a few hubs with long edge lists, the rest short
    offs = new[NV + 1]; gprop = new[NV]; gtprop = new[NV];
    edst = new[E_MAX]; ew = new[E_MAX];
    ne = 0;
    for (int v = 0; v < NV; v++) begin
      automatic int deg = ($urandom % 10 == 0) ? 20 + $urandom % 30 : $urandom % 10;
      offs[v] = ne;
      for (int k = 0; k < deg && ne < E_MAX; k++) begin
        edst[ne] = $urandom % NV; ew[ne] = 1 + $urandom % 15; ne++;
      end
    end
    offs[NV] = ne;
    for (int i = 0; i <= NV; i++) hw(SEL_OFFSET, i, ACT_W'(offs[i]));
    for (int e = 0; e < ne; e++) hw(SEL_EDGE, e, ACT_W'({4'(ew[e]), vid_t'(edst[e])}));
    root = 0;
    while (offs[root + 1] - offs[root] < 3) root++;
    run(ALG_BFS, root, 100);
    run(ALG_SSSP, root, 100);
    run(ALG_SSWP, root, 100);
    run(ALG_PR, root, 3);
    $display("edges %0d, cycles in runs %0d", perf.edges, cycles_total);
    $display("mdp_stall %0d arb_conflict %0d arb_shared %0d replay_split %0d edge_split %0d vpe_forward %0d vpe_starve %0d",
             perf.mdp_stall, perf.arb_conflict, perf.arb_shared, perf.replay_split, perf.edge_split,
             perf.vpe_forward, perf.vpe_starve);
    check(perf.mdp_stall > 0,    "dataflow MDP-network backpressure happened");
    check(perf.arb_conflict > 0, "odd-even arbiter conflict happened");
    check(perf.arb_shared > 0,   "odd-even arbiter shared read happened");
    check(perf.replay_split > 0, "replay engine split a list");
    check(perf.edge_split > 0,   "edge MDP-network split a piece");
    check(perf.vpe_forward > 0,  "vPE forwarding happened");
    check(perf.vpe_starve > 0,   "vPE starvation counted");
    check(multi_iter_runs >= 3,  "multi-iteration runs");
    check(algs_run == 4,         "all four algorithm modes ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
