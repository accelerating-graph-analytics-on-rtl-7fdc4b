// tm_tile: one Transmuter tile with the data-indirect prefetcher.
//
// Contents: N_GPE GPE memory ports, a GPE-to-L1 R-XBar, N_GPE L1 R-DCache
// banks (one per GPE) each with its PF engine, the tile's fused PFHR array,
// the handshake network between PF engines, a response crossbar L1-to-GPE,
// the LCP's data cache (D$), the tile crossbar to the sync scratchpad and
// the work/status queues between the LCP and the GPEs.
//
// Mode (shared, one bit): shared=1 is the shared L1 mode, every GPE reaches
// every bank by cache colouring, the PF engines hand requests to the home
// bank's engine and the PFHR array is used as one (one engine per cycle).
// shared=0 is private: GPE g uses bank g only, engine g uses PFHR bank g.
// A change of the mode is detected here and, in the same cycle, invalidates
// every L1 line, empties the PFHR array and drops queued prefetch work; this
// flush-on-switch is this design's choice (the paper only says the cache
// mode can be switched at run time).
//
// Next-level ports: one request/response pair per L1 bank plus one for the
// D$ (index N_GPE), going to the L1-to-L2 R-XBar of the cluster. The L1
// banks label their downstream requests with src_base+bank, the D$ with
// src_base+N_GPE; the sync network labels requests with src_base+core
// (core N_GPE is the LCP). src_base, like each bank's and engine's index,
// is a constant-tied input rather than a parameter, so that all tiles and
// all banks are copies of one module. The mode register resets to shared,
// so a tile that leaves reset in private mode counts one (empty) flush.
// The GPE and LCP cores themselves are outside.
module tm_tile
  import tm_pkg::*;
#(
  parameter int N_GPE      = 16,
  parameter int L1_BYTES   = 16384,
  parameter int L1_WAYS    = 4,
  parameter int L1_MSHRS   = 8,
  parameter int PFHR_PER_GPE = 8,
  parameter int DC_BYTES   = 4096,
  parameter int WQ_DEPTH   = 4,
  localparam int GW        = (N_GPE > 1) ? $clog2(N_GPE) : 1,
  localparam int NC        = N_GPE + 1,
  localparam int CW        = $clog2(NC)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SRC_W-1:0] src_base,     // tied constant: first source ID of this tile
  input  logic             shared,
  input  dig_cfg_t         cfg,
  // GPE memory ports
  input  logic [N_GPE-1:0] gpe_req_valid,
  input  mem_req_t         gpe_req      [N_GPE],
  output logic [N_GPE-1:0] gpe_req_ready,
  output logic [N_GPE-1:0] gpe_rsp_valid,
  output mem_rsp_t         gpe_rsp      [N_GPE],
  input  logic [N_GPE-1:0] gpe_rsp_ready,
  // LCP data-cache port
  input  logic             lcp_req_valid,
  input  mem_req_t         lcp_req,
  output logic             lcp_req_ready,
  output logic             lcp_rsp_valid,
  output mem_rsp_t         lcp_rsp,
  input  logic             lcp_rsp_ready,
  // sync-scratchpad ports of the cores (GPEs 0..N_GPE-1, LCP = N_GPE)
  input  logic [NC-1:0]    core_sync_req_valid,
  input  mem_req_t         core_sync_req  [NC],
  output logic [NC-1:0]    core_sync_req_ready,
  output logic [NC-1:0]    core_sync_rsp_valid,
  output mem_rsp_t         core_sync_rsp  [NC],
  input  logic [NC-1:0]    core_sync_rsp_ready,
  // towards the cluster crossbar and the scratchpad
  output logic             sync_req_valid,
  output mem_req_t         sync_req,
  input  logic             sync_req_ready,
  input  logic             sync_rsp_valid,
  input  mem_rsp_t         sync_rsp,
  output logic             sync_rsp_ready,
  // work/status queues
  input  logic             wq_push_valid,
  input  logic [GW-1:0]    wq_push_gpe,
  input  word_t            wq_push_data,
  output logic             wq_push_ready,
  input  logic [GW-1:0]    sq_pop_gpe,
  output logic             sq_pop_valid,
  output word_t            sq_pop_data,
  input  logic             sq_pop_ready,
  output logic [N_GPE-1:0] wq_pop_valid,
  output word_t            wq_pop_data  [N_GPE],
  input  logic [N_GPE-1:0] wq_pop_ready,
  input  logic [N_GPE-1:0] sq_push_valid,
  input  word_t            sq_push_data [N_GPE],
  output logic [N_GPE-1:0] sq_push_ready,
  // to the L1-to-L2 R-XBar (index N_GPE is the D$)
  output logic [NC-1:0]    dn_req_valid,
  output mem_req_t         dn_req       [NC],
  input  logic [NC-1:0]    dn_req_ready,
  input  logic [NC-1:0]    dn_rsp_valid,
  input  mem_rsp_t         dn_rsp       [NC],
  output logic [NC-1:0]    dn_rsp_ready,
  output tile_stats_t      stats
);

  // ---------------- mode switch ----------------
  logic shared_q, mode_chg;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) shared_q <= 1'b1;
    else        shared_q <= shared;
  assign mode_chg = shared != shared_q;

  // ---------------- GPE -> L1 R-XBar ----------------
  logic [MEM_REQ_W-1:0] gx_in  [N_GPE];
  logic [MEM_REQ_W-1:0] gx_out [N_GPE];
  logic [GW-1:0]        gx_src [N_GPE];
  logic [N_GPE-1:0]     l1_req_valid, l1_req_ready;
  mem_req_t             l1_req [N_GPE];
  logic [31:0]          gx_fwd, gx_wait;
  always_comb
    for (int g = 0; g < N_GPE; g++) begin
      mem_req_t r;
      r       = gpe_req[g];
      r.src   = SRC_W'(g);      // responses come back by GPE index
      gx_in[g] = r;
    end
  rxbar #(.N_IN(N_GPE), .N_OUT(N_GPE), .W(MEM_REQ_W)) u_gpe_xbar (
    .clk, .rst_n, .shared,
    .in_valid(gpe_req_valid), .in_data(gx_in), .in_ready(gpe_req_ready),
    .out_valid(l1_req_valid), .out_data(gx_out), .out_src(gx_src), .out_ready(l1_req_ready),
    .stat_fwd(gx_fwd), .stat_wait(gx_wait)
  );
  always_comb for (int b = 0; b < N_GPE; b++) l1_req[b] = mem_req_t'(gx_out[b]);

  // ---------------- L1 banks + PF engines ----------------
  logic [N_GPE-1:0] l1_rsp_valid, l1_rsp_ready;
  logic [MEM_RSP_W-1:0] l1_rsp_bits [N_GPE];
  logic [GW-1:0]    l1_rsp_dest [N_GPE];

  logic [N_GPE-1:0] pf_valid, pf_ready;
  addr_t            pf_addr [N_GPE];
  logic [N_GPE-1:0] s_dem_v, s_line_v, e_hit, e_miss, e_late, e_pfev, e_repl;
  addr_t            s_dem_a [N_GPE];
  logic [SRC_W-1:0] s_dem_s [N_GPE];
  addr_t            s_line_a [N_GPE];
  line_t            s_line_d [N_GPE];

  logic [N_GPE-1:0] hs_o_v, hs_o_r, hs_i_v, hs_i_r;
  logic [GW-1:0]    hs_o_d [N_GPE];
  logic [PF_REQ_W-1:0] hs_o [N_GPE];
  logic [PF_REQ_W-1:0] hs_i [N_GPE];
  logic [N_GPE-1:0] p_rv, p_rs, p_gnt, p_hit, p_sq;
  pf_req_t          p_req [N_GPE];
  pf_req_t          p_ent [N_GPE];
  logic [N_GPE-1:0] v_trig, v_fwd, v_iss, v_exp, v_drop;

  for (genvar b = 0; b < N_GPE; b++) begin : g_bank
    mem_rsp_t rsp_b;
    pf_req_t  hs_o_s;
    rdcache #(.SIZE_BYTES(L1_BYTES), .WAYS(L1_WAYS), .MSHRS(L1_MSHRS)) u_l1 (
      .clk, .rst_n, .cache_id(src_base + SRC_W'(b)), .flush(mode_chg),
      .req_valid(l1_req_valid[b]), .req(l1_req[b]), .req_ready(l1_req_ready[b]),
      .rsp_valid(l1_rsp_valid[b]), .rsp(rsp_b), .rsp_ready(l1_rsp_ready[b]),
      .pf_valid(pf_valid[b]), .pf_addr(pf_addr[b]), .pf_ready(pf_ready[b]),
      .dn_req_valid(dn_req_valid[b]), .dn_req(dn_req[b]), .dn_req_ready(dn_req_ready[b]),
      .dn_rsp_valid(dn_rsp_valid[b]), .dn_rsp(dn_rsp[b]), .dn_rsp_ready(dn_rsp_ready[b]),
      .snp_dem_valid(s_dem_v[b]), .snp_dem_addr(s_dem_a[b]), .snp_dem_src(s_dem_s[b]),
      .snp_line_valid(s_line_v[b]), .snp_line_addr(s_line_a[b]), .snp_line_data(s_line_d[b]),
      .evt_hit(e_hit[b]), .evt_miss(e_miss[b]), .evt_late_pf(e_late[b]),
      .evt_pf_evict(e_pfev[b]), .evt_replace(e_repl[b])
    );
    assign l1_rsp_bits[b] = rsp_b;
    assign l1_rsp_dest[b] = rsp_b.src[GW-1:0];

    pf_engine #(.N_ENG(N_GPE)) u_pf (
      .clk, .rst_n, .eng_id(GW'(b)), .shared, .clear(mode_chg), .cfg,
      .snp_dem_valid(s_dem_v[b]), .snp_dem_addr(s_dem_a[b]), .snp_dem_src(s_dem_s[b]),
      .snp_line_valid(s_line_v[b]), .snp_line_addr(s_line_a[b]), .snp_line_data(s_line_d[b]),
      .evt_late_pf(e_late[b]), .evt_pf_evict(e_pfev[b]),
      .pf_valid(pf_valid[b]), .pf_addr(pf_addr[b]), .pf_ready(pf_ready[b]),
      .hs_out_valid(hs_o_v[b]), .hs_out_dest(hs_o_d[b]), .hs_out(hs_o_s), .hs_out_ready(hs_o_r[b]),
      .hs_in_valid(hs_i_v[b]), .hs_in(pf_req_t'(hs_i[b])), .hs_in_ready(hs_i_r[b]),
      .pfhr_req_valid(p_rv[b]), .pfhr_req_search(p_rs[b]), .pfhr_req(p_req[b]),
      .pfhr_gnt(p_gnt[b]), .pfhr_hit(p_hit[b]), .pfhr_hit_entry(p_ent[b]),
      .cur_dist(),
      .ev_trigger(v_trig[b]), .ev_forward(v_fwd[b]), .ev_issue(v_iss[b]),
      .ev_expand(v_exp[b]), .ev_drop(v_drop[b])
    );
    assign hs_o[b] = hs_o_s;
  end

  // responses L1 bank -> GPE
  logic [MEM_RSP_W-1:0] gr_out [N_GPE];
  xbar #(.N_IN(N_GPE), .N_OUT(N_GPE), .W(MEM_RSP_W)) u_rsp_xbar (
    .clk, .rst_n,
    .in_valid(l1_rsp_valid), .in_dest(l1_rsp_dest), .in_data(l1_rsp_bits), .in_ready(l1_rsp_ready),
    .out_valid(gpe_rsp_valid), .out_data(gr_out), .out_src(), .out_ready(gpe_rsp_ready),
    .stat_fwd(), .stat_wait()
  );
  always_comb for (int g = 0; g < N_GPE; g++) gpe_rsp[g] = mem_rsp_t'(gr_out[g]);

  // handshake network between PF engines
  xbar #(.N_IN(N_GPE), .N_OUT(N_GPE), .W(PF_REQ_W)) u_hs_xbar (
    .clk, .rst_n,
    .in_valid(hs_o_v), .in_dest(hs_o_d), .in_data(hs_o), .in_ready(hs_o_r),
    .out_valid(hs_i_v), .out_data(hs_i), .out_src(), .out_ready(hs_i_r),
    .stat_fwd(), .stat_wait()
  );

  // fused PFHR array
  pfhr_fused #(.N_ENG(N_GPE), .ENTRIES(PFHR_PER_GPE)) u_pfhr (
    .clk, .rst_n, .shared, .clear(mode_chg),
    .req_valid(p_rv), .req_search(p_rs), .req(p_req),
    .gnt(p_gnt), .hit(p_hit), .squash(p_sq), .hit_entry(p_ent)
  );

  // ---------------- LCP data cache ----------------
  rdcache #(.SIZE_BYTES(DC_BYTES), .WAYS(L1_WAYS), .MSHRS(L1_MSHRS)) u_dcache (
    .clk, .rst_n, .cache_id(src_base + SRC_W'(N_GPE)), .flush(1'b0),
    .req_valid(lcp_req_valid), .req(lcp_req), .req_ready(lcp_req_ready),
    .rsp_valid(lcp_rsp_valid), .rsp(lcp_rsp), .rsp_ready(lcp_rsp_ready),
    .pf_valid(1'b0), .pf_addr('0), .pf_ready(),
    .dn_req_valid(dn_req_valid[N_GPE]), .dn_req(dn_req[N_GPE]), .dn_req_ready(dn_req_ready[N_GPE]),
    .dn_rsp_valid(dn_rsp_valid[N_GPE]), .dn_rsp(dn_rsp[N_GPE]), .dn_rsp_ready(dn_rsp_ready[N_GPE]),
    .snp_dem_valid(), .snp_dem_addr(), .snp_dem_src(),
    .snp_line_valid(), .snp_line_addr(), .snp_line_data(),
    .evt_hit(), .evt_miss(), .evt_late_pf(), .evt_pf_evict(), .evt_replace()
  );

  // ---------------- tile crossbar to the sync scratchpad ----------------
  logic [MEM_REQ_W-1:0] sx_in  [NC];
  logic [MEM_REQ_W-1:0] sx_out [1];
  logic                 sx_dest [NC];
  logic [0:0]           sx_ov;
  always_comb
    for (int c = 0; c < NC; c++) begin
      mem_req_t r;
      r        = core_sync_req[c];
      r.src    = src_base + SRC_W'(c);
      sx_in[c] = r;
      sx_dest[c] = 1'b0;
    end
  xbar #(.N_IN(NC), .N_OUT(1), .W(MEM_REQ_W)) u_sync_xbar (
    .clk, .rst_n,
    .in_valid(core_sync_req_valid), .in_dest(sx_dest), .in_data(sx_in), .in_ready(core_sync_req_ready),
    .out_valid(sx_ov), .out_data(sx_out), .out_src(), .out_ready(sync_req_ready),
    .stat_fwd(), .stat_wait()
  );
  assign sync_req_valid = sx_ov[0];
  assign sync_req       = mem_req_t'(sx_out[0]);

  logic [MEM_RSP_W-1:0] sr_in  [1];
  logic [CW-1:0]        sr_dest [1];
  logic [MEM_RSP_W-1:0] sr_out [NC];
  logic [0:0]           sr_rdy;
  assign sr_in[0]   = sync_rsp;
  assign sr_dest[0] = CW'(sync_rsp.src - src_base);
  xbar #(.N_IN(1), .N_OUT(NC), .W(MEM_RSP_W)) u_sync_rsp_xbar (
    .clk, .rst_n,
    .in_valid(sync_rsp_valid), .in_dest(sr_dest), .in_data(sr_in), .in_ready(sr_rdy),
    .out_valid(core_sync_rsp_valid), .out_data(sr_out), .out_src(), .out_ready(core_sync_rsp_ready),
    .stat_fwd(), .stat_wait()
  );
  assign sync_rsp_ready = sr_rdy[0];
  always_comb for (int c = 0; c < NC; c++) core_sync_rsp[c] = mem_rsp_t'(sr_out[c]);

  // ---------------- work/status queues ----------------
  work_status_queue #(.N_GPE(N_GPE), .DEPTH(WQ_DEPTH)) u_wsq (
    .clk, .rst_n,
    .wq_push_valid, .wq_push_gpe, .wq_push_data, .wq_push_ready,
    .sq_pop_gpe, .sq_pop_valid, .sq_pop_data, .sq_pop_ready,
    .wq_pop_valid, .wq_pop_data, .wq_pop_ready,
    .sq_push_valid, .sq_push_data, .sq_push_ready
  );

  // ---------------- event counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stats <= '0;
    else begin
      stats.l1_hit          <= stats.l1_hit          + 32'($countones(e_hit));
      stats.l1_miss         <= stats.l1_miss         + 32'($countones(e_miss));
      stats.l1_replace      <= stats.l1_replace      + 32'($countones(e_repl));
      stats.late_pf         <= stats.late_pf         + 32'($countones(e_late));
      stats.pf_evict_unused <= stats.pf_evict_unused + 32'($countones(e_pfev));
      stats.pf_trigger      <= stats.pf_trigger      + 32'($countones(v_trig));
      stats.pf_forward      <= stats.pf_forward      + 32'($countones(v_fwd));
      stats.pf_issue        <= stats.pf_issue        + 32'($countones(v_iss));
      stats.pf_expand       <= stats.pf_expand       + 32'($countones(v_exp));
      stats.pfhr_squash     <= stats.pfhr_squash     + 32'($countones(p_sq & p_gnt));
      stats.pf_drop         <= stats.pf_drop         + 32'($countones(v_drop));
      stats.xbar_fwd        <= gx_fwd;
      stats.xbar_wait       <= gx_wait;
      stats.mode_switch     <= stats.mode_switch     + 32'(mode_chg);
    end
  end

endmodule
