// higraph_top: the HiGraph graph analytics accelerator.
//
// All graph data sit on chip, each array interleaved over parts:
//   ActiveVertex  N_FE parts, {prop, ID} entries appended per part
//   Offset        N_FE parts, entry i in part i mod N_FE (inside offset_access)
//   Edge          N_BE parts, edge e = {weight, dst} in part e mod N_BE
//   Property,
//   tProperty     N_BE parts, vertex v in part v mod N_BE
// One scatter iteration flows left to right:
//   active_fetch x N_FE -> offset_access (MDP-network, odd-even arbiter,
//   Offset read) -> replay_engine x N_FE -> edge_mdp_network -> dispatcher
//   x N_FE -> edge_lane x N_BE (Edge read + ePE) -> dataflow mdp_network
//   -> vpe x N_BE (Reduce into tProperty)
// and the apply phase runs apply_unit x N_FE over Property/tProperty and
// rebuilds the ActiveVertex Array. higraph_ctrl sequences the phases.
//
// The three MDP-networks (offset access, edge access, dataflow) are the
// paper's; the host load/readback port, the counters and the phase control
// are this design's own.
//
// Host port (only while idle, phase == PH_IDLE): host_we with host_sel
// writes entry host_addr of the chosen array (SEL_ACTIVE appends, ignoring
// host_addr, to the parts in turn); host_re reads Property or tProperty
// entry host_addr, data on host_rdata in the next cycle; host_act_clear
// empties the ActiveVertex Array.
// Run: pulse start; done pulses when no vertex is active or max_iter
// iterations have run.
module higraph_top
  import higraph_pkg::*;
#(
  parameter int unsigned N_FE      = 32,        // front-end channels
  parameter int unsigned N_BE      = 32,        // back-end channels
  parameter int unsigned V_MAX     = 524288,    // 2^19 vertices (19-bit IDs)
  parameter int unsigned E_MAX     = 4194304,   // 2^22 edges
  parameter int unsigned MDP_DEPTH = 32,        // dataflow 2W1R FIFO depth (x5 stages = 160)
  parameter int unsigned FE_DEPTH  = 16         // front-end 2W1R FIFO depth
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration and run control
  input  alg_e             alg,
  input  logic [VID_W:0]   num_v,
  input  logic [15:0]      max_iter,
  input  prop_t            pr_base,
  input  logic             start,
  output logic             done,
  output phase_e           phase,
  output logic [15:0]      iter,
  // host load / readback port
  input  logic             host_we,
  input  mem_sel_e         host_sel,
  input  logic [31:0]      host_addr,
  input  logic [ACT_W-1:0] host_wdata,
  input  logic             host_re,
  output prop_t            host_rdata,
  input  logic             host_act_clear,   // empty the ActiveVertex Array
  // statistics
  output perf_t            perf
);
  localparam int unsigned LNF       = $clog2(N_FE);
  localparam int unsigned LNB       = $clog2(N_BE);
  localparam int unsigned G         = N_BE / N_FE;
  localparam int unsigned ACT_ROWS  = V_MAX / N_FE;
  localparam int unsigned AAW       = $clog2(ACT_ROWS);
  localparam int unsigned PROP_ROWS = V_MAX / N_BE;
  localparam int unsigned PAW       = $clog2(PROP_ROWS);
  localparam int unsigned EDGE_ROWS = E_MAX / N_BE;
  localparam int unsigned EAW       = $clog2(EDGE_ROWS);
  localparam int unsigned LW        = $clog2(N_BE + 1);
  localparam int unsigned OAW       = $clog2(V_MAX + 1);
  localparam int unsigned OFW       = PROP_W + 2*OFF_W;
  localparam int unsigned PW        = PROP_W + LW + OFF_W;
  localparam int unsigned UW        = PROP_W + VID_W;
  localparam int unsigned RW        = OFF_W - LNB;

  function automatic logic [8:0] popc(input logic [255:0] v);
    logic [8:0] n;
    n = '0;
    for (int i = 0; i < 256; i++) n += 9'(v[i]);
    return n;
  endfunction

  // ------------------------------------------------------------ control
  logic scatter_go, apply_go, any_active, fetch_done, pipe_busy, apply_done;
  logic idle;

  higraph_ctrl u_ctrl (
    .clk, .rst_n, .start, .max_iter, .any_active, .fetch_done, .pipe_busy,
    .apply_done, .phase, .scatter_go, .apply_go, .done, .iter
  );
  assign idle = (phase == PH_IDLE);

  // ---------------------------------------------------- ActiveVertex Array
  logic [N_FE-1:0][AAW:0]       act_cnt;
  logic [LNF-1:0]               host_part;   // next part for a host append
  logic [N_FE-1:0]              ap_act_we;
  logic [N_FE-1:0][ACT_W-1:0]   ap_act_wdata;
  logic [N_FE-1:0]              af_rd_en, af_done, af_busy;
  logic [N_FE-1:0][AAW-1:0]     af_rd_addr;
  logic [N_FE-1:0][ACT_W-1:0]   af_rd_data;
  logic [N_FE-1:0]              fe_valid, fe_ready;
  logic [N_FE-1:0][ACT_W-1:0]   fe_data;
  logic                         host_act;

  assign host_act = idle && host_we && (host_sel == SEL_ACTIVE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_cnt   <= '0;
      host_part <= '0;
    end else begin
      if (idle && host_act_clear) host_part <= '0;
      else if (host_act)          host_part <= host_part + 1'b1;
      for (int p = 0; p < N_FE; p++) begin
        if (apply_go || (idle && host_act_clear))
          act_cnt[p] <= '0;
        else if (ap_act_we[p] || (host_act && host_part == LNF'(p)))
          act_cnt[p] <= act_cnt[p] + 1'b1;
      end
    end
  end
  assign any_active = |act_cnt;

  for (genvar p = 0; p < N_FE; p++) begin : g_fe
    logic               aw;
    logic [ACT_W-1:0]   awd;
    assign aw  = ap_act_we[p] || (host_act && host_part == LNF'(p));
    assign awd = ap_act_we[p] ? ap_act_wdata[p] : host_wdata;

    sram_1r1w #(.W(ACT_W), .DEPTH(ACT_ROWS)) u_act (
      .clk, .rd_en(af_rd_en[p]), .rd_addr(af_rd_addr[p]), .rd_data(af_rd_data[p]),
      .wr_en(aw), .wr_addr(act_cnt[p][AAW-1:0]), .wr_data(awd)
    );

    active_fetch #(.ROWS(ACT_ROWS)) u_fetch (
      .clk, .rst_n, .go(scatter_go), .count(act_cnt[p]),
      .rd_en(af_rd_en[p]), .rd_addr(af_rd_addr[p]), .rd_data(af_rd_data[p]),
      .out_valid(fe_valid[p]), .out_data(fe_data[p]), .out_ready(fe_ready[p]),
      .done(af_done[p]), .busy(af_busy[p])
    );
  end
  assign fetch_done = &af_done;

  // ------------------------------------- MDP-network for Offset Array access
  logic [N_FE-1:0]          of_valid, of_ready, arb_blocked, arb_shared;
  logic [N_FE-1:0][OFW-1:0] of_data;
  logic                     of_busy;

  offset_access #(.N(N_FE), .V_MAX(V_MAX), .DEPTH(FE_DEPTH)) u_offset (
    .clk, .rst_n,
    .in_valid(fe_valid), .in_data(fe_data), .in_ready(fe_ready),
    .out_valid(of_valid), .out_data(of_data), .out_ready(of_ready),
    .host_we(idle && host_we && host_sel == SEL_OFFSET),
    .host_addr(OAW'(host_addr)), .host_wdata(host_wdata[OFF_W-1:0]),
    .blocked(arb_blocked), .shared(arb_shared), .busy(of_busy)
  );

  // --------------------------------------- MDP-network for Edge Array access
  logic [N_FE-1:0]         rp_valid, rp_ready, rp_extra, rp_busy;
  logic [N_FE-1:0][PW-1:0] rp_data;
  logic [N_FE-1:0]         dp_valid, dp_ready;
  logic [N_FE-1:0][PW-1:0] dp_data;
  logic [$clog2(N_FE*LNF+1)-1:0] em_split;
  logic                    em_busy;

  for (genvar p = 0; p < N_FE; p++) begin : g_replay
    replay_engine #(.M(N_BE)) u_replay (
      .clk, .rst_n,
      .in_valid(of_valid[p]), .in_data(of_data[p]), .in_ready(of_ready[p]),
      .out_valid(rp_valid[p]), .out_data(rp_data[p]), .out_ready(rp_ready[p]),
      .extra_piece(rp_extra[p]), .busy(rp_busy[p])
    );
  end

  edge_mdp_network #(.N(N_FE), .M(N_BE), .DEPTH(FE_DEPTH)) u_edge_net (
    .clk, .rst_n,
    .in_valid(rp_valid), .in_data(rp_data), .in_ready(rp_ready),
    .out_valid(dp_valid), .out_data(dp_data), .out_ready(dp_ready),
    .split_cnt(em_split), .busy(em_busy)
  );

  // ------------------------------------------- dispatchers and edge lanes
  logic [N_BE-1:0]          ln_ok, ln_rd_en, ln_busy;
  logic [N_BE-1:0][EAW-1:0] ln_rd_row;
  prop_t [N_BE-1:0]         ln_rd_prop;
  logic [N_BE-1:0]          df_in_valid, df_in_ready;
  logic [N_BE-1:0][UW-1:0]  df_in_data;

  for (genvar c = 0; c < N_FE; c++) begin : g_disp
    logic [RW-1:0] row;
    prop_t         dprop;
    dispatcher #(.N(N_FE), .M(N_BE), .C(c)) u_disp (
      .in_valid(dp_valid[c]), .in_data(dp_data[c]), .in_ready(dp_ready[c]),
      .lane_ok(ln_ok[c*G +: G]), .rd_en(ln_rd_en[c*G +: G]),
      .rd_row(row), .rd_prop(dprop)
    );
    for (genvar g = 0; g < G; g++) begin : g_l
      assign ln_rd_row[c*G+g]  = EAW'(row);
      assign ln_rd_prop[c*G+g] = dprop;
    end
  end

  for (genvar j = 0; j < N_BE; j++) begin : g_lane
    edge_lane #(.ROWS(EDGE_ROWS)) u_lane (
      .clk, .rst_n, .alg,
      .rd_en(ln_rd_en[j]), .rd_row(ln_rd_row[j]), .rd_prop(ln_rd_prop[j]),
      .lane_ok(ln_ok[j]),
      .host_we(idle && host_we && host_sel == SEL_EDGE && host_addr[LNB-1:0] == LNB'(j)),
      .host_row(EAW'(host_addr >> LNB)), .host_wdata(host_wdata[EDGE_W-1:0]),
      .out_valid(df_in_valid[j]), .out_data(df_in_data[j]), .out_ready(df_in_ready[j]),
      .busy(ln_busy[j])
    );
  end

  // -------------------------------------- MDP-network for dataflow propagation
  logic [N_BE-1:0]         vp_valid, vp_ready, vp_busy, vp_fwd;
  logic [N_BE-1:0][UW-1:0] vp_data;
  logic                    df_busy;

  mdp_network #(.N(N_BE), .W(UW), .KEY_LSB(0), .DEPTH(MDP_DEPTH)) u_df_net (
    .clk, .rst_n,
    .in_valid(df_in_valid), .in_data(df_in_data), .in_ready(df_in_ready),
    .out_valid(vp_valid), .out_data(vp_data), .out_ready(vp_ready),
    .busy(df_busy)
  );

  // ------------------------------- vPEs, apply units, Property and tProperty
  logic [N_BE-1:0]          v_rd_en, v_wr_en;
  logic [N_BE-1:0][PAW-1:0] v_rd_addr, v_wr_addr;
  prop_t [N_BE-1:0]         v_wr_data;
  logic [N_BE-1:0]          a_rd_en, a_prop_we, a_tprop_we;
  logic [N_FE-1:0][PAW-1:0] a_rd_addr, a_wr_addr;
  prop_t [N_FE-1:0]         a_wd_prop, a_wd_tprop;
  logic [N_FE-1:0]          a_done;
  prop_t [N_BE-1:0]         prop_q, tprop_q;
  logic                     hsel_prop_q;
  logic [LNB-1:0]           hpart_q;

  for (genvar j = 0; j < N_BE; j++) begin : g_be
    localparam int unsigned P = j / G;
    logic           h_hit, scat, app;
    logic           t_re, t_we, p_re, p_we;
    logic [PAW-1:0] t_ra, t_wa, p_ra, p_wa;
    prop_t          t_wd, p_wd;

    assign h_hit = idle && host_addr[LNB-1:0] == LNB'(j);
    assign scat  = (phase == PH_SCATTER);
    assign app   = (phase == PH_APPLY);

    vpe #(.M(N_BE), .ROWS(PROP_ROWS)) u_vpe (
      .clk, .rst_n, .alg,
      .in_valid(vp_valid[j]), .in_data(vp_data[j]), .in_ready(vp_ready[j]),
      .mem_rd_en(v_rd_en[j]), .mem_rd_addr(v_rd_addr[j]), .mem_rd_data(tprop_q[j]),
      .mem_wr_en(v_wr_en[j]), .mem_wr_addr(v_wr_addr[j]), .mem_wr_data(v_wr_data[j]),
      .forward(vp_fwd[j]), .busy(vp_busy[j])
    );

    always_comb begin
      // tProperty part: vPE in scatter, apply unit in apply, host when idle
      t_re = scat ? v_rd_en[j] : app ? a_rd_en[j] : (h_hit && host_re && host_sel == SEL_TPROP);
      t_ra = scat ? v_rd_addr[j] : app ? a_rd_addr[P] : PAW'(host_addr >> LNB);
      t_we = scat ? v_wr_en[j] : app ? a_tprop_we[j] : (h_hit && host_we && host_sel == SEL_TPROP);
      t_wa = scat ? v_wr_addr[j] : app ? a_wr_addr[P] : PAW'(host_addr >> LNB);
      t_wd = scat ? v_wr_data[j] : app ? a_wd_tprop[P] : host_wdata[PROP_W-1:0];
      // Property part: apply unit in apply, host when idle
      p_re = app ? a_rd_en[j] : (h_hit && host_re && host_sel == SEL_PROP);
      p_ra = app ? a_rd_addr[P] : PAW'(host_addr >> LNB);
      p_we = app ? a_prop_we[j] : (h_hit && host_we && host_sel == SEL_PROP);
      p_wa = app ? a_wr_addr[P] : PAW'(host_addr >> LNB);
      p_wd = app ? a_wd_prop[P] : host_wdata[PROP_W-1:0];
    end

    sram_1r1w #(.W(PROP_W), .DEPTH(PROP_ROWS)) u_tprop (
      .clk, .rd_en(t_re), .rd_addr(t_ra), .rd_data(tprop_q[j]),
      .wr_en(t_we), .wr_addr(t_wa), .wr_data(t_wd)
    );
    sram_1r1w #(.W(PROP_W), .DEPTH(PROP_ROWS)) u_prop (
      .clk, .rd_en(p_re), .rd_addr(p_ra), .rd_data(prop_q[j]),
      .wr_en(p_we), .wr_addr(p_wa), .wr_data(p_wd)
    );
  end

  for (genvar p = 0; p < N_FE; p++) begin : g_apply
    apply_unit #(.N(N_FE), .M(N_BE), .P(p), .ROWS(PROP_ROWS)) u_apply (
      .clk, .rst_n, .alg, .start(apply_go), .num_v, .pr_base,
      .done(a_done[p]),
      .rd_en(a_rd_en[p*G +: G]), .rd_addr(a_rd_addr[p]),
      .prop_q(prop_q[p*G +: G]), .tprop_q(tprop_q[p*G +: G]),
      .prop_we(a_prop_we[p*G +: G]), .tprop_we(a_tprop_we[p*G +: G]),
      .wr_addr(a_wr_addr[p]), .wr_data_prop(a_wd_prop[p]), .wr_data_tprop(a_wd_tprop[p]),
      .act_we(ap_act_we[p]), .act_wdata(ap_act_wdata[p])
    );
  end
  assign apply_done = &a_done;

  // host readback
  always_ff @(posedge clk) begin
    hsel_prop_q <= (host_sel == SEL_PROP);
    hpart_q     <= host_addr[LNB-1:0];
  end
  assign host_rdata = hsel_prop_q ? prop_q[hpart_q] : tprop_q[hpart_q];

  assign pipe_busy = (|af_busy) || of_busy || (|rp_busy) || em_busy || (|ln_busy)
                   || df_busy || (|vp_busy);

  // ------------------------------------------------------------ statistics
  logic [N_BE-1:0] df_stall, vp_idle;
  assign df_stall = df_in_valid & ~df_in_ready;
  assign vp_idle  = ~vp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf <= '0;
    end else begin
      perf.mdp_stall    <= perf.mdp_stall    + 32'(popc(256'(df_stall)));
      perf.arb_conflict <= perf.arb_conflict + 32'(popc(256'(arb_blocked)));
      perf.arb_shared   <= perf.arb_shared   + 32'(popc(256'(arb_shared)));
      perf.replay_split <= perf.replay_split + 32'(popc(256'(rp_extra)));
      perf.edge_split   <= perf.edge_split   + 32'(em_split);
      perf.vpe_forward  <= perf.vpe_forward  + 32'(popc(256'(vp_fwd)));
      perf.edges        <= perf.edges        + 32'(popc(256'(vp_valid)));
      if (phase == PH_SCATTER)
        perf.vpe_starve <= perf.vpe_starve + 32'(popc(256'(vp_idle)));
    end
  end

  // The host may only touch the arrays while the accelerator is idle.
  assert property (@(posedge clk) disable iff (!rst_n) (host_we || host_re) |-> idle);
  initial assert (N_FE >= 2 && N_BE >= N_FE && N_BE % N_FE == 0)
    else $error("higraph_top: need 2 <= N_FE <= N_BE, N_FE dividing N_BE");
endmodule
