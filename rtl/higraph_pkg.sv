// higraph_pkg: widths, types and the per-algorithm functions shared by the
// whole accelerator.
//
// Vertex IDs and vertex properties are 19 bits wide, which is the
// quantisation the design is built around. The edge weight (4 bits) and the
// offset width (23 bits, enough to address 2^22 edges plus the final
// end-of-list offset) are this design's choice; they are what the sizes of
// the on-chip arrays work out to (a 2^22-entry Edge Array of 19-bit IDs is
// 9.5 MiB, a 2^22-entry array of 4-bit weights is 2 MiB).
//
// Process_Edge, Reduce and Apply are the user-defined functions of the
// vertex-centric programming model. Their bodies for BFS, SSSP, SSWP and a
// fixed-point PageRank variant are this design's own choice.
package higraph_pkg;

  localparam int unsigned VID_W    = 19;
  localparam int unsigned PROP_W   = 19;
  localparam int unsigned WEIGHT_W = 4;
  localparam int unsigned OFF_W    = 23;
  localparam int unsigned EDGE_W   = WEIGHT_W + VID_W;   // {weight, dst}
  localparam int unsigned ACT_W    = PROP_W + VID_W;     // {prop, id}

  typedef logic [VID_W-1:0]    vid_t;
  typedef logic [PROP_W-1:0]   prop_t;
  typedef logic [WEIGHT_W-1:0] weight_t;
  typedef logic [OFF_W-1:0]    off_t;

  localparam prop_t PROP_INF = '1;

  typedef enum logic [1:0] {
    ALG_BFS  = 2'd0,
    ALG_SSSP = 2'd1,
    ALG_SSWP = 2'd2,
    ALG_PR   = 2'd3
  } alg_e;

  // Host-visible memory selector of the load/readback port.
  typedef enum logic [2:0] {
    SEL_ACTIVE = 3'd0,   // append {prop, id} to the ActiveVertex Array
    SEL_OFFSET = 3'd1,
    SEL_EDGE   = 3'd2,   // {weight, dst}
    SEL_PROP   = 3'd3,
    SEL_TPROP  = 3'd4
  } mem_sel_e;

  typedef enum logic [1:0] {
    PH_IDLE    = 2'd0,
    PH_SCATTER = 2'd1,
    PH_APPLY   = 2'd2
  } phase_e;

  // Event counters reported by the top level.
  typedef struct packed {
    logic [31:0] mdp_stall;       // cycles a dataflow MDP input was refused
    logic [31:0] arb_conflict;    // offset reads deferred by the odd-even arbiter
    logic [31:0] arb_shared;      // offset reads granted by sharing an address
    logic [31:0] replay_split;    // extra pieces made by the replay engines
    logic [31:0] edge_split;      // pieces split inside the edge MDP-network
    logic [31:0] vpe_forward;     // read-after-write forwards inside the vPEs
    logic [31:0] vpe_starve;      // vPE-cycles without data during scatter
    logic [31:0] edges;           // edges reduced
  } perf_t;

  function automatic prop_t sat_add(prop_t a, prop_t b);
    logic [PROP_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[PROP_W] ? PROP_INF : s[PROP_W-1:0];
  endfunction

  // Imm <- Process_Edge(u.prop, e.weight)
  function automatic prop_t process_edge(alg_e alg, prop_t uprop, weight_t w);
    logic [PROP_W+WEIGHT_W-1:0] prod;
    prod = uprop * w;
    case (alg)
      ALG_BFS:  return sat_add(uprop, prop_t'(1));
      ALG_SSSP: return sat_add(uprop, prop_t'(w));
      ALG_SSWP: return (prop_t'(w) < uprop) ? prop_t'(w) : uprop;
      default:  return prop_t'(prod >> WEIGHT_W);   // PR: prop * w / 16
    endcase
  endfunction

  // v.tProp <- Reduce(v.tProp, Imm)
  function automatic prop_t reduce(alg_e alg, prop_t t, prop_t imm);
    case (alg)
      ALG_BFS, ALG_SSSP: return (imm < t) ? imm : t;
      ALG_SSWP:          return (imm > t) ? imm : t;
      default:           return sat_add(t, imm);
    endcase
  endfunction

  // applyRes <- Apply(v.prop, v.tProp)
  function automatic prop_t apply_fn(alg_e alg, prop_t p, prop_t t, prop_t pr_base);
    case (alg)
      ALG_BFS, ALG_SSSP: return (t < p) ? t : p;
      ALG_SSWP:          return (t > p) ? t : p;
      default:           return sat_add(pr_base, t);
    endcase
  endfunction

endpackage
