// tm_cluster: top level, one Transmuter cluster in the evaluated 4x16
// configuration with the data-indirect prefetcher: N_TILES tiles of N_GPE
// GPEs, each GPE with a 16 kB L1 bank and a PF engine; an L1-to-L2 R-XBar
// into L2_BANKS_PER_TILE*N_TILES L2 banks of 4 kB (four per tile instead of
// one, same total L2); a crossbar from the L2 banks to the HBM
// pseudo-channels; and the sync scratchpad behind a cluster crossbar.
//
// Outside this module: the GPE and LCP cores (their memory, sync and queue
// ports are ports here) and the HBM stack (one request/response pair per
// pseudo-channel; a channel answers a load with the whole 64-byte line and
// the request's src, and takes stores without answer).
//
// Modes: l1_shared selects shared or private L1 banks in every tile (see
// tm_tile); l2_shared selects line interleaving across all L2 banks (the
// evaluated setting) or a fixed L1-to-L2 mapping. cfg programs the DIG
// tables of every PF engine (broadcast). Request ids: L1 bank b of tile t is
// t*(N_GPE+1)+b, the D$ of tile t is t*(N_GPE+1)+N_GPE; the same numbering
// is used for the cores on the sync network. L2 bank k labels its HBM
// requests k.
module tm_cluster
  import tm_pkg::*;
#(
  parameter int N_TILES           = 4,
  parameter int N_GPE             = 16,
  parameter int L1_BYTES          = 16384,
  parameter int L2_BANKS_PER_TILE = 4,
  parameter int L2_BYTES          = 4096,
  parameter int HBM_CH            = 16,
  parameter int SP_WORDS          = 1024,
  localparam int NG               = N_TILES * N_GPE,
  localparam int NC               = N_GPE + 1,
  localparam int NR               = N_TILES * NC,
  localparam int NL2              = N_TILES * L2_BANKS_PER_TILE,
  localparam int GW               = (N_GPE > 1) ? $clog2(N_GPE) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               l1_shared,
  input  logic               l2_shared,
  input  dig_cfg_t           cfg,
  // GPE memory ports, GPE g of tile t at index t*N_GPE+g
  input  logic [NG-1:0]      gpe_req_valid,
  input  mem_req_t           gpe_req      [NG],
  output logic [NG-1:0]      gpe_req_ready,
  output logic [NG-1:0]      gpe_rsp_valid,
  output mem_rsp_t           gpe_rsp      [NG],
  input  logic [NG-1:0]      gpe_rsp_ready,
  // LCP data-cache ports, one per tile
  input  logic [N_TILES-1:0] lcp_req_valid,
  input  mem_req_t           lcp_req      [N_TILES],
  output logic [N_TILES-1:0] lcp_req_ready,
  output logic [N_TILES-1:0] lcp_rsp_valid,
  output mem_rsp_t           lcp_rsp      [N_TILES],
  input  logic [N_TILES-1:0] lcp_rsp_ready,
  // sync-scratchpad ports of all cores, core c of tile t at t*(N_GPE+1)+c
  input  logic [NR-1:0]      sync_req_valid,
  input  mem_req_t           sync_req     [NR],
  output logic [NR-1:0]      sync_req_ready,
  output logic [NR-1:0]      sync_rsp_valid,
  output mem_rsp_t           sync_rsp     [NR],
  input  logic [NR-1:0]      sync_rsp_ready,
  // work/status queues, per tile (LCP side) and per GPE
  input  logic [N_TILES-1:0] wq_push_valid,
  input  logic [GW-1:0]      wq_push_gpe  [N_TILES],
  input  word_t              wq_push_data [N_TILES],
  output logic [N_TILES-1:0] wq_push_ready,
  input  logic [GW-1:0]      sq_pop_gpe   [N_TILES],
  output logic [N_TILES-1:0] sq_pop_valid,
  output word_t              sq_pop_data  [N_TILES],
  input  logic [N_TILES-1:0] sq_pop_ready,
  output logic [NG-1:0]      wq_pop_valid,
  output word_t              wq_pop_data  [NG],
  input  logic [NG-1:0]      wq_pop_ready,
  input  logic [NG-1:0]      sq_push_valid,
  input  word_t              sq_push_data [NG],
  output logic [NG-1:0]      sq_push_ready,
  // HBM pseudo-channels
  output logic [HBM_CH-1:0]  hbm_req_valid,
  output mem_req_t           hbm_req      [HBM_CH],
  input  logic [HBM_CH-1:0]  hbm_req_ready,
  input  logic [HBM_CH-1:0]  hbm_rsp_valid,
  input  mem_rsp_t           hbm_rsp      [HBM_CH],
  output logic [HBM_CH-1:0]  hbm_rsp_ready,
  // counters
  output tile_stats_t        tile_stats   [N_TILES],
  output logic [31:0]        l1l2_fwd,
  output logic [31:0]        l1l2_wait
);

  // L1/D$ <-> L1-to-L2 R-XBar, flattened: requester r = t*NC + b
  logic [NR-1:0]        r_req_valid, r_req_ready, r_rsp_valid, r_rsp_ready;
  mem_req_t             r_req [NR];
  mem_rsp_t             r_rsp [NR];
  // tile <-> cluster sync crossbar
  logic [N_TILES-1:0]   t_sreq_valid, t_sreq_ready, t_srsp_valid, t_srsp_ready;
  mem_req_t             t_sreq [N_TILES];
  mem_rsp_t             t_srsp [N_TILES];

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    logic [N_GPE-1:0] grv, grr, gsv, gsr, wpv, wpr, spv, spr;
    mem_req_t         gr  [N_GPE];
    mem_rsp_t         gs  [N_GPE];
    word_t            wpd [N_GPE];
    word_t            spd [N_GPE];
    logic [NC-1:0]    crv, crr, csv, csr, dqv, dqr, dsv, dsr;
    mem_req_t         cr  [NC];
    mem_rsp_t         cs  [NC];
    mem_req_t         dq  [NC];
    mem_rsp_t         ds  [NC];

    always_comb begin
      for (int g = 0; g < N_GPE; g++) begin
        grv[g] = gpe_req_valid[t*N_GPE+g];
        gr[g]  = gpe_req[t*N_GPE+g];
        gsr[g] = gpe_rsp_ready[t*N_GPE+g];
        wpr[g] = wq_pop_ready[t*N_GPE+g];
        spv[g] = sq_push_valid[t*N_GPE+g];
        spd[g] = sq_push_data[t*N_GPE+g];
      end
      for (int c = 0; c < NC; c++) begin
        crv[c] = sync_req_valid[t*NC+c];
        cr[c]  = sync_req[t*NC+c];
        csr[c] = sync_rsp_ready[t*NC+c];
        dqr[c] = r_req_ready[t*NC+c];
        dsv[c] = r_rsp_valid[t*NC+c];
        ds[c]  = r_rsp[t*NC+c];
      end
    end
    for (genvar g = 0; g < N_GPE; g++) begin : g_gpe
      assign gpe_req_ready[t*N_GPE+g] = grr[g];
      assign gpe_rsp_valid[t*N_GPE+g] = gsv[g];
      assign gpe_rsp[t*N_GPE+g]       = gs[g];
      assign wq_pop_valid[t*N_GPE+g]  = wpv[g];
      assign wq_pop_data[t*N_GPE+g]   = wpd[g];
      assign sq_push_ready[t*N_GPE+g] = spr[g];
    end
    for (genvar c = 0; c < NC; c++) begin : g_core
      assign sync_req_ready[t*NC+c] = crr[c];
      assign sync_rsp_valid[t*NC+c] = csv[c];
      assign sync_rsp[t*NC+c]       = cs[c];
      assign r_req_valid[t*NC+c]    = dqv[c];
      assign r_req[t*NC+c]          = dq[c];
      assign r_rsp_ready[t*NC+c]    = dsr[c];
    end

    tm_tile #(.N_GPE(N_GPE), .L1_BYTES(L1_BYTES)) u_tile (
      .src_base(SRC_W'(t*NC)),
      .clk, .rst_n, .shared(l1_shared), .cfg,
      .gpe_req_valid(grv), .gpe_req(gr), .gpe_req_ready(grr),
      .gpe_rsp_valid(gsv), .gpe_rsp(gs), .gpe_rsp_ready(gsr),
      .lcp_req_valid(lcp_req_valid[t]), .lcp_req(lcp_req[t]), .lcp_req_ready(lcp_req_ready[t]),
      .lcp_rsp_valid(lcp_rsp_valid[t]), .lcp_rsp(lcp_rsp[t]), .lcp_rsp_ready(lcp_rsp_ready[t]),
      .core_sync_req_valid(crv), .core_sync_req(cr), .core_sync_req_ready(crr),
      .core_sync_rsp_valid(csv), .core_sync_rsp(cs), .core_sync_rsp_ready(csr),
      .sync_req_valid(t_sreq_valid[t]), .sync_req(t_sreq[t]), .sync_req_ready(t_sreq_ready[t]),
      .sync_rsp_valid(t_srsp_valid[t]), .sync_rsp(t_srsp[t]), .sync_rsp_ready(t_srsp_ready[t]),
      .wq_push_valid(wq_push_valid[t]), .wq_push_gpe(wq_push_gpe[t]), .wq_push_data(wq_push_data[t]),
      .wq_push_ready(wq_push_ready[t]),
      .sq_pop_gpe(sq_pop_gpe[t]), .sq_pop_valid(sq_pop_valid[t]), .sq_pop_data(sq_pop_data[t]),
      .sq_pop_ready(sq_pop_ready[t]),
      .wq_pop_valid(wpv), .wq_pop_data(wpd), .wq_pop_ready(wpr),
      .sq_push_valid(spv), .sq_push_data(spd), .sq_push_ready(spr),
      .dn_req_valid(dqv), .dn_req(dq), .dn_req_ready(dqr),
      .dn_rsp_valid(dsv), .dn_rsp(ds), .dn_rsp_ready(dsr),
      .stats(tile_stats[t])
    );
  end

  // ---------------- L1-to-L2 R-XBar and its response network ----------------
  logic [MEM_REQ_W-1:0] q_in  [NR];
  logic [MEM_REQ_W-1:0] q_out [NL2];
  logic [NL2-1:0]       l2_req_valid, l2_req_ready, l2_rsp_valid, l2_rsp_ready;
  mem_req_t             l2_req [NL2];
  mem_rsp_t             l2_rsp [NL2];
  always_comb for (int r = 0; r < NR; r++) q_in[r] = r_req[r];
  rxbar #(.N_IN(NR), .N_OUT(NL2), .W(MEM_REQ_W)) u_l1l2_xbar (
    .clk, .rst_n, .shared(l2_shared),
    .in_valid(r_req_valid), .in_data(q_in), .in_ready(r_req_ready),
    .out_valid(l2_req_valid), .out_data(q_out), .out_src(), .out_ready(l2_req_ready),
    .stat_fwd(l1l2_fwd), .stat_wait(l1l2_wait)
  );
  always_comb for (int k = 0; k < NL2; k++) l2_req[k] = mem_req_t'(q_out[k]);

  localparam int RW = $clog2(NR);
  logic [MEM_RSP_W-1:0] p_in   [NL2];
  logic [RW-1:0]        p_dest [NL2];
  logic [MEM_RSP_W-1:0] p_out  [NR];
  always_comb
    for (int k = 0; k < NL2; k++) begin
      p_in[k]   = l2_rsp[k];
      p_dest[k] = RW'(l2_rsp[k].src);
    end
  xbar #(.N_IN(NL2), .N_OUT(NR), .W(MEM_RSP_W)) u_l2l1_xbar (
    .clk, .rst_n,
    .in_valid(l2_rsp_valid), .in_dest(p_dest), .in_data(p_in), .in_ready(l2_rsp_ready),
    .out_valid(r_rsp_valid), .out_data(p_out), .out_src(), .out_ready(r_rsp_ready),
    .stat_fwd(), .stat_wait()
  );
  always_comb for (int r = 0; r < NR; r++) r_rsp[r] = mem_rsp_t'(p_out[r]);

  // ---------------- L2 banks ----------------
  logic [NL2-1:0] m_req_valid, m_req_ready, m_rsp_valid, m_rsp_ready;
  mem_req_t       m_req [NL2];
  mem_rsp_t       m_rsp [NL2];
  for (genvar k = 0; k < NL2; k++) begin : g_l2
    rdcache #(.SIZE_BYTES(L2_BYTES), .WAYS(4), .MSHRS(8)) u_l2 (
      .cache_id(SRC_W'(k)),
      .clk, .rst_n, .flush(1'b0),
      .req_valid(l2_req_valid[k]), .req(l2_req[k]), .req_ready(l2_req_ready[k]),
      .rsp_valid(l2_rsp_valid[k]), .rsp(l2_rsp[k]), .rsp_ready(l2_rsp_ready[k]),
      .pf_valid(1'b0), .pf_addr('0), .pf_ready(),
      .dn_req_valid(m_req_valid[k]), .dn_req(m_req[k]), .dn_req_ready(m_req_ready[k]),
      .dn_rsp_valid(m_rsp_valid[k]), .dn_rsp(m_rsp[k]), .dn_rsp_ready(m_rsp_ready[k]),
      .snp_dem_valid(), .snp_dem_addr(), .snp_dem_src(),
      .snp_line_valid(), .snp_line_addr(), .snp_line_data(),
      .evt_hit(), .evt_miss(), .evt_late_pf(), .evt_pf_evict(), .evt_replace()
    );
  end

  // ---------------- L2 <-> HBM crossbars ----------------
  localparam int HW = (HBM_CH > 1) ? $clog2(HBM_CH) : 1;
  localparam int KW = (NL2 > 1) ? $clog2(NL2) : 1;
  logic [MEM_REQ_W-1:0] h_in   [NL2];
  logic [HW-1:0]        h_dest [NL2];
  logic [MEM_REQ_W-1:0] h_out  [HBM_CH];
  always_comb
    for (int k = 0; k < NL2; k++) begin
      h_in[k]   = m_req[k];
      h_dest[k] = HW'(color_bank(m_req[k].addr, HBM_CH));
    end
  xbar #(.N_IN(NL2), .N_OUT(HBM_CH), .W(MEM_REQ_W)) u_mem_xbar (
    .clk, .rst_n,
    .in_valid(m_req_valid), .in_dest(h_dest), .in_data(h_in), .in_ready(m_req_ready),
    .out_valid(hbm_req_valid), .out_data(h_out), .out_src(), .out_ready(hbm_req_ready),
    .stat_fwd(), .stat_wait()
  );
  always_comb for (int c = 0; c < HBM_CH; c++) hbm_req[c] = mem_req_t'(h_out[c]);

  logic [MEM_RSP_W-1:0] g_in   [HBM_CH];
  logic [KW-1:0]        g_dest [HBM_CH];
  logic [MEM_RSP_W-1:0] g_out  [NL2];
  always_comb
    for (int c = 0; c < HBM_CH; c++) begin
      g_in[c]   = hbm_rsp[c];
      g_dest[c] = KW'(hbm_rsp[c].src);
    end
  xbar #(.N_IN(HBM_CH), .N_OUT(NL2), .W(MEM_RSP_W)) u_mem_rsp_xbar (
    .clk, .rst_n,
    .in_valid(hbm_rsp_valid), .in_dest(g_dest), .in_data(g_in), .in_ready(hbm_rsp_ready),
    .out_valid(m_rsp_valid), .out_data(g_out), .out_src(), .out_ready(m_rsp_ready),
    .stat_fwd(), .stat_wait()
  );
  always_comb for (int k = 0; k < NL2; k++) m_rsp[k] = mem_rsp_t'(g_out[k]);

  // ---------------- cluster crossbar and sync scratchpad ----------------
  localparam int TW = (N_TILES > 1) ? $clog2(N_TILES) : 1;
  logic [MEM_REQ_W-1:0] c_in   [N_TILES];
  logic                 c_dest [N_TILES];
  logic [MEM_REQ_W-1:0] c_out  [1];
  logic [0:0]           sp_req_valid, sp_req_ready, sp_rsp_ready;
  logic                 sp_rsp_valid;
  mem_rsp_t             sp_rsp;
  always_comb
    for (int t = 0; t < N_TILES; t++) begin
      c_in[t]   = t_sreq[t];
      c_dest[t] = 1'b0;
    end
  xbar #(.N_IN(N_TILES), .N_OUT(1), .W(MEM_REQ_W)) u_cl_xbar (
    .clk, .rst_n,
    .in_valid(t_sreq_valid), .in_dest(c_dest), .in_data(c_in), .in_ready(t_sreq_ready),
    .out_valid(sp_req_valid), .out_data(c_out), .out_src(), .out_ready(sp_req_ready),
    .stat_fwd(), .stat_wait()
  );
  sync_scratchpad #(.WORDS(SP_WORDS)) u_sp (
    .clk, .rst_n,
    .req_valid(sp_req_valid[0]), .req(mem_req_t'(c_out[0])), .req_ready(sp_req_ready[0]),
    .rsp_valid(sp_rsp_valid), .rsp(sp_rsp), .rsp_ready(sp_rsp_ready[0])
  );
  logic [MEM_RSP_W-1:0] cr_in   [1];
  logic [TW-1:0]        cr_dest [1];
  logic [MEM_RSP_W-1:0] cr_out  [N_TILES];
  assign cr_in[0]   = sp_rsp;
  assign cr_dest[0] = TW'(int'(sp_rsp.src) / NC);
  xbar #(.N_IN(1), .N_OUT(N_TILES), .W(MEM_RSP_W)) u_cl_rsp_xbar (
    .clk, .rst_n,
    .in_valid(sp_rsp_valid), .in_dest(cr_dest), .in_data(cr_in), .in_ready(sp_rsp_ready),
    .out_valid(t_srsp_valid), .out_data(cr_out), .out_src(), .out_ready(t_srsp_ready),
    .stat_fwd(), .stat_wait()
  );
  always_comb for (int t = 0; t < N_TILES; t++) t_srsp[t] = mem_rsp_t'(cr_out[t]);

endmodule
