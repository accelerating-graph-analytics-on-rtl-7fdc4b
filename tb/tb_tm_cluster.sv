// tb_tm_cluster: end-to-end test of the whole cluster at its default size
// (4 tiles x 16 GPEs, 16 kB L1 per GPE, 16 L2 banks of 4 kB, 16 HBM
// pseudo-channels modelled with a 100-cycle latency). 64 behavioural GPEs
// run a pull-mode neighbour-sum kernel on a synthetic CSC graph; the LCP of
// each tile hands out the work through the work queues and collects the
// status words, and finally reads every GPE's result back from the sync
// scratchpad. The DIG of the kernel (offsets -ranged-> nbrs -single-> prop)
// is programmed into every PF engine.
// Phase 1 runs with private L1s, phase 2 after a run-time switch to shared
// L1s. Every loaded value, every status word and every scratchpad word is
// checked against values computed here from the graph formula. The test
// also counts how often each mechanism happened (prefetch trigger,
// handshake forwarding, PFHR hit, PFHR squash, late prefetch, eviction of an
// unused prefetched line, L1 replacement, R-XBar contention, mode switch)
// and counts a failure for any that never did.
module tb_tm_cluster;
  import tm_pkg::*;
  import tb_mem_pkg::*;

  localparam int NT = 4, NGP = 16, NC = NGP + 1, NG = NT * NGP, NR = NT * NC, CH = 16;
  localparam int VPG = 12;            // vertices per GPE and phase
  localparam int HBM_LAT = 100;       // cycles (80-150 ns at 1 GHz)

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic l1_shared, l2_shared;
  dig_cfg_t cfg;
  logic [NG-1:0] gpe_req_valid, gpe_req_ready, gpe_rsp_valid, gpe_rsp_ready;
  mem_req_t gpe_req [NG]; mem_rsp_t gpe_rsp [NG];
  logic [NT-1:0] lcp_req_valid, lcp_req_ready, lcp_rsp_valid, lcp_rsp_ready;
  mem_req_t lcp_req [NT]; mem_rsp_t lcp_rsp [NT];
  logic [NR-1:0] sync_req_valid, sync_req_ready, sync_rsp_valid, sync_rsp_ready;
  mem_req_t sync_req [NR]; mem_rsp_t sync_rsp [NR];
  logic [NT-1:0] wq_push_valid, wq_push_ready, sq_pop_valid, sq_pop_ready;
  logic [3:0] wq_push_gpe [NT]; word_t wq_push_data [NT];
  logic [3:0] sq_pop_gpe [NT]; word_t sq_pop_data [NT];
  logic [NG-1:0] wq_pop_valid, wq_pop_ready, sq_push_valid, sq_push_ready;
  word_t wq_pop_data [NG]; word_t sq_push_data [NG];
  logic [CH-1:0] hbm_req_valid, hbm_req_ready, hbm_rsp_valid, hbm_rsp_ready;
  mem_req_t hbm_req [CH]; mem_rsp_t hbm_rsp [CH];
  tile_stats_t tile_stats [NT];
  logic [31:0] l1l2_fwd, l1l2_wait;

  tm_cluster dut (.*);

  for (genvar c = 0; c < CH; c++) begin : g_hbm
    tb_mem_model #(.LAT(HBM_LAT)) u_ch (
      .clk, .rst_n, .req_valid(hbm_req_valid[c]), .req(hbm_req[c]), .req_ready(hbm_req_ready[c]),
      .rsp_valid(hbm_rsp_valid[c]), .rsp(hbm_rsp[c]), .rsp_ready(hbm_rsp_ready[c]));
  end

  int gpe_err [NG];
  int gpe_vert [NG];
  for (genvar t = 0; t < NT; t++) begin : g_t
    for (genvar g = 0; g < NGP; g++) begin : g_g
      localparam int I = t * NGP + g;
      tb_gpe_model u_gpe (
        .gid(I), .clk, .rst_n,
        .req_valid(gpe_req_valid[I]), .req(gpe_req[I]), .req_ready(gpe_req_ready[I]),
        .rsp_valid(gpe_rsp_valid[I]), .rsp(gpe_rsp[I]), .rsp_ready(gpe_rsp_ready[I]),
        .wq_valid(wq_pop_valid[I]), .wq_data(wq_pop_data[I]), .wq_ready(wq_pop_ready[I]),
        .sq_valid(sq_push_valid[I]), .sq_data(sq_push_data[I]), .sq_ready(sq_push_ready[I]),
        .sync_valid(sync_req_valid[t*NC+g]), .sync_req(sync_req[t*NC+g]),
        .sync_ready(sync_req_ready[t*NC+g]),
        .sync_rsp_valid(sync_rsp_valid[t*NC+g]), .sync_rsp(sync_rsp[t*NC+g]),
        .sync_rsp_ready(sync_rsp_ready[t*NC+g]));
      always @(posedge clk) begin
        gpe_err[I]  <= u_gpe.n_err;
        gpe_vert[I] <= u_gpe.n_vert;
      end
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wcfg(dig_cfg_t c);
    @(negedge clk); cfg = c; cfg.we = 1; @(negedge clk); cfg = '0;
  endtask

  function automatic word_t item_total(int v0);
    word_t s;
    s = '0;
    for (int v = v0; v < v0 + VPG; v++) s += vertex_sum(v);
    return s;
  endfunction

  // LCP of tile t: hand out one item per GPE, collect the status words.
  task automatic lcp_phase(int t, int vbase);
    for (int g = 0; g < NGP; g++) begin
      @(negedge clk);
      wq_push_valid[t] = 1; wq_push_gpe[t] = 4'(g);
      wq_push_data[t] = {16'(VPG), 16'(vbase + (t * NGP + g) * VPG)};
      do @(posedge clk); while (!wq_push_ready[t]);
      @(negedge clk); wq_push_valid[t] = 0;
    end
    for (int g = 0; g < NGP; g++) begin
      @(negedge clk);
      sq_pop_gpe[t] = 4'(g);
      #1;
      while (!sq_pop_valid[t]) begin @(negedge clk); #1; end
      check(sq_pop_data[t] == item_total(vbase + (t * NGP + g) * VPG),
            $sformatf("status of tile %0d GPE %0d", t, g));
      sq_pop_ready[t] = 1; @(negedge clk); sq_pop_ready[t] = 0;
    end
  endtask

  task automatic lcp_sync_load(int t, addr_t a, output word_t d);
    @(negedge clk);
    sync_req_valid[t*NC+NGP] = 1;
    sync_req[t*NC+NGP] = '{src: '0, wdata: '0, op: OP_LOAD, addr: a};
    do @(posedge clk); while (!sync_req_ready[t*NC+NGP]);
    @(negedge clk); sync_req_valid[t*NC+NGP] = 0;
    while (!sync_rsp_valid[t*NC+NGP]) @(negedge clk);
    d = sync_rsp[t*NC+NGP].word;
  endtask

  task automatic lcp_dc_load(int t, addr_t a, output word_t d);
    @(negedge clk);
    lcp_req_valid[t] = 1; lcp_req[t] = '{src: '0, wdata: '0, op: OP_LOAD, addr: a};
    do @(posedge clk); while (!lcp_req_ready[t]);
    @(negedge clk); lcp_req_valid[t] = 0;
    while (!lcp_rsp_valid[t]) @(negedge clk);
    d = lcp_rsp[t].word;
  endtask

  task automatic run_phase(int vbase);
    fork
      lcp_phase(0, vbase);
      lcp_phase(1, vbase);
      lcp_phase(2, vbase);
      lcp_phase(3, vbase);
    join
    for (int i = 0; i < NG; i++) begin
      word_t d;
      lcp_sync_load(i / NGP, addr_t'(4 * i), d);
      check(d == item_total(vbase + i * VPG), $sformatf("scratchpad word of GPE %0d", i));
    end
  endtask

  function automatic longint sum_stat(int k);
    longint s;
    s = 0;
    for (int t = 0; t < NT; t++)
      case (k)
        0: s += tile_stats[t].pf_trigger;   1: s += tile_stats[t].pf_forward;
        2: s += tile_stats[t].pf_expand;    3: s += tile_stats[t].pfhr_squash;
        4: s += tile_stats[t].late_pf;      5: s += tile_stats[t].pf_evict_unused;
        6: s += tile_stats[t].l1_replace;   7: s += tile_stats[t].xbar_wait;
        8: s += tile_stats[t].mode_switch;  9: s += tile_stats[t].pf_issue;
        10: s += tile_stats[t].l1_hit;      11: s += tile_stats[t].l1_miss;
        default: s += tile_stats[t].pf_drop;
      endcase
    return s;
  endfunction

  initial begin
    dig_cfg_t c;
    longint t0, t1, t2;
    string names[13] = '{"prefetch trigger", "handshake forward", "PFHR hit", "PFHR squash",
                         "late prefetch", "unused prefetch evicted", "L1 replacement",
                         "GPE R-XBar contention", "mode switch", "prefetch issued",
                         "L1 hit", "L1 miss", "prefetch dropped"};
    l1_shared = 0; l2_shared = 1; cfg = '0;
    lcp_req_valid = '0; lcp_rsp_ready = '1; sync_req_valid[NR-1:0] = '0;
    for (int t = 0; t < NT; t++) begin
      lcp_req[t] = '0; wq_push_gpe[t] = '0; wq_push_data[t] = '0; sq_pop_gpe[t] = '0;
      sync_req[t*NC+NGP] = '0;
    end
    sync_rsp_ready = '1; wq_push_valid = '0; sq_pop_ready = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    c = '0; c.kind = CFG_NODE; c.idx = 0; c.base = OFF_BASE; c.bound = OFF_BASE + 4 * (V + 1); c.size_log2 = 2; wcfg(c);
    c = '0; c.kind = CFG_NODE; c.idx = 1; c.base = NBR_BASE; c.bound = NBR_BASE + 4 * V * DEG; c.size_log2 = 2; wcfg(c);
    c = '0; c.kind = CFG_NODE; c.idx = 2; c.base = PROP_BASE; c.bound = PROP_BASE + 4 * V; c.size_log2 = 2; wcfg(c);
    c = '0; c.kind = CFG_EDGE; c.idx = 0; c.src = 0; c.dst = 1; c.ranged = 1; wcfg(c);
    c = '0; c.kind = CFG_EDGE; c.idx = 1; c.src = 1; c.dst = 2; c.ranged = 0; wcfg(c);
    c = '0; c.kind = CFG_TRIG; c.src = 0; wcfg(c);
    c = '0; c.kind = CFG_DIST; c.pf_dist = 2; wcfg(c);

    // LCP D$ sanity
    for (int t = 0; t < NT; t++) begin
      word_t d;
      lcp_dc_load(t, OFF_BASE + addr_t'(4 * t), d);
      check(d == mem_word(OFF_BASE + addr_t'(4 * t)), "LCP D$ load");
    end

    t0 = $time;
    run_phase(0);                      // private L1
    t1 = $time;
    @(negedge clk); l1_shared = 1;     // run-time switch to shared L1
    run_phase(NG * VPG);
    t2 = $time;

    begin
      int errs, verts;
      errs = 0; verts = 0;
      for (int i = 0; i < NG; i++) begin errs += gpe_err[i]; verts += gpe_vert[i]; end
      check(errs == 0, $sformatf("GPE load/readback mismatches: %0d", errs));
      check(verts == 2 * NG * VPG, $sformatf("vertices processed %0d", verts));
    end
    $display("phase cycles: private %0d, shared %0d", (t1 - t0) / 10, (t2 - t1) / 10);
    $display("L1-to-L2 R-XBar: %0d packets, %0d packet-cycles waiting", l1l2_fwd, l1l2_wait);
    for (int k = 0; k < 13; k++) begin
      $display("mechanism %-24s : %0d", names[k], sum_stat(k));
      if (k != 12) check(sum_stat(k) > 0, $sformatf("mechanism %s happened", names[k]));
    end
    check(l1l2_wait > 0, "L1-to-L2 R-XBar contention happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
