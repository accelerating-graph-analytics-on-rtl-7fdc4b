// tb_tm_tile: one tile at reduced size (4 GPEs, 2 kB L1 banks so that lines
// get replaced) with a memory model at each next-level port. Four
// behavioural GPEs run the pull-mode neighbour-sum kernel, first with
// private L1s, then after a run-time switch with shared L1s; the test LCP
// hands out work through the work queues, checks the status words, reads
// the results back from a scratchpad model and reads through its D$. It
// counts each prefetcher mechanism and fails on any that never happened.
module tb_tm_tile;
  import tm_pkg::*;
  import tb_mem_pkg::*;
  localparam int NGP = 4, NC = NGP + 1, VPG = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic shared; dig_cfg_t cfg;
  logic [NGP-1:0] gpe_req_valid, gpe_req_ready, gpe_rsp_valid, gpe_rsp_ready;
  mem_req_t gpe_req [NGP]; mem_rsp_t gpe_rsp [NGP];
  logic lcp_req_valid, lcp_req_ready, lcp_rsp_valid, lcp_rsp_ready;
  mem_req_t lcp_req; mem_rsp_t lcp_rsp;
  logic [NC-1:0] core_sync_req_valid, core_sync_req_ready, core_sync_rsp_valid, core_sync_rsp_ready;
  mem_req_t core_sync_req [NC]; mem_rsp_t core_sync_rsp [NC];
  logic sync_req_valid, sync_req_ready, sync_rsp_valid, sync_rsp_ready;
  mem_req_t sync_req; mem_rsp_t sync_rsp;
  logic wq_push_valid, wq_push_ready, sq_pop_valid, sq_pop_ready;
  logic [1:0] wq_push_gpe, sq_pop_gpe; word_t wq_push_data, sq_pop_data;
  logic [NGP-1:0] wq_pop_valid, wq_pop_ready, sq_push_valid, sq_push_ready;
  word_t wq_pop_data [NGP]; word_t sq_push_data [NGP];
  logic [NC-1:0] dn_req_valid, dn_req_ready, dn_rsp_valid, dn_rsp_ready;
  mem_req_t dn_req [NC]; mem_rsp_t dn_rsp [NC];
  tile_stats_t stats;

  tm_tile #(.N_GPE(NGP), .L1_BYTES(2048), .PFHR_PER_GPE(4)) dut (.src_base(8'd0), .*);

  for (genvar p = 0; p < NC; p++) begin : g_mem
    tb_mem_model #(.LAT(60)) u_mem (
      .clk, .rst_n, .req_valid(dn_req_valid[p]), .req(dn_req[p]), .req_ready(dn_req_ready[p]),
      .rsp_valid(dn_rsp_valid[p]), .rsp(dn_rsp[p]), .rsp_ready(dn_rsp_ready[p]));
  end
  sync_scratchpad #(.WORDS(64)) u_sp (
    .clk, .rst_n, .req_valid(sync_req_valid), .req(sync_req), .req_ready(sync_req_ready),
    .rsp_valid(sync_rsp_valid), .rsp(sync_rsp), .rsp_ready(sync_rsp_ready));

  int gerr [NGP];
  for (genvar g = 0; g < NGP; g++) begin : g_gpe
    tb_gpe_model u_gpe (
      .gid(g), .clk, .rst_n,
      .req_valid(gpe_req_valid[g]), .req(gpe_req[g]), .req_ready(gpe_req_ready[g]),
      .rsp_valid(gpe_rsp_valid[g]), .rsp(gpe_rsp[g]), .rsp_ready(gpe_rsp_ready[g]),
      .wq_valid(wq_pop_valid[g]), .wq_data(wq_pop_data[g]), .wq_ready(wq_pop_ready[g]),
      .sq_valid(sq_push_valid[g]), .sq_data(sq_push_data[g]), .sq_ready(sq_push_ready[g]),
      .sync_valid(core_sync_req_valid[g]), .sync_req(core_sync_req[g]),
      .sync_ready(core_sync_req_ready[g]),
      .sync_rsp_valid(core_sync_rsp_valid[g]), .sync_rsp(core_sync_rsp[g]),
      .sync_rsp_ready(core_sync_rsp_ready[g]));
    always @(posedge clk) gerr[g] <= u_gpe.n_err;
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    repeat (300000) @(posedge clk);
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

  task automatic phase(int vbase);
    for (int g = 0; g < NGP; g++) begin
      @(negedge clk);
      wq_push_valid = 1; wq_push_gpe = 2'(g); wq_push_data = {16'(VPG), 16'(vbase + g * VPG)};
      do @(posedge clk); while (!wq_push_ready);
      @(negedge clk); wq_push_valid = 0;
    end
    for (int g = 0; g < NGP; g++) begin
      @(negedge clk); sq_pop_gpe = 2'(g); #1;
      while (!sq_pop_valid) begin @(negedge clk); #1; end
      check(sq_pop_data == item_total(vbase + g * VPG), $sformatf("status GPE %0d", g));
      sq_pop_ready = 1; @(negedge clk); sq_pop_ready = 0;
    end
    for (int g = 0; g < NGP; g++) begin
      @(negedge clk);
      core_sync_req_valid[NGP] = 1;
      core_sync_req[NGP] = '{src: '0, wdata: '0, op: OP_LOAD, addr: addr_t'(4 * g)};
      do @(posedge clk); while (!core_sync_req_ready[NGP]);
      @(negedge clk); core_sync_req_valid[NGP] = 0;
      while (!core_sync_rsp_valid[NGP]) @(negedge clk);
      check(core_sync_rsp[NGP].word == item_total(vbase + g * VPG), "scratchpad result");
    end
  endtask

  initial begin
    dig_cfg_t c;
    shared = 0; cfg = '0; lcp_req_valid = 0; lcp_req = '0; lcp_rsp_ready = 1;
    core_sync_req_valid[NGP] = 0; core_sync_req[NGP] = '0; core_sync_rsp_ready[NGP] = 1;
    wq_push_valid = 0; wq_push_gpe = 0; wq_push_data = 0; sq_pop_gpe = 0; sq_pop_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    c = '0; c.kind = CFG_NODE; c.idx = 0; c.base = OFF_BASE; c.bound = OFF_BASE + 4 * (V + 1); c.size_log2 = 2; wcfg(c);
    c = '0; c.kind = CFG_NODE; c.idx = 1; c.base = NBR_BASE; c.bound = NBR_BASE + 4 * V * DEG; c.size_log2 = 2; wcfg(c);
    c = '0; c.kind = CFG_NODE; c.idx = 2; c.base = PROP_BASE; c.bound = PROP_BASE + 4 * V; c.size_log2 = 2; wcfg(c);
    c = '0; c.kind = CFG_EDGE; c.idx = 0; c.src = 0; c.dst = 1; c.ranged = 1; wcfg(c);
    c = '0; c.kind = CFG_EDGE; c.idx = 1; c.src = 1; c.dst = 2; c.ranged = 0; wcfg(c);
    c = '0; c.kind = CFG_TRIG; c.src = 0; wcfg(c);
    c = '0; c.kind = CFG_DIST; c.pf_dist = 3; wcfg(c);
    // LCP D$
    @(negedge clk); lcp_req_valid = 1; lcp_req = '{src: '0, wdata: '0, op: OP_LOAD, addr: NBR_BASE + 12};
    do @(posedge clk); while (!lcp_req_ready);
    @(negedge clk); lcp_req_valid = 0;
    while (!lcp_rsp_valid) @(negedge clk);
    check(lcp_rsp.word == mem_word(NBR_BASE + 12), "LCP D$ load");

    phase(0);
    @(negedge clk); shared = 1;
    phase(2000);
    begin
      int e; e = 0;
      for (int g = 0; g < NGP; g++) e += gerr[g];
      check(e == 0, $sformatf("GPE mismatches %0d", e));
    end
    $display("trigger %0d forward %0d issue %0d expand %0d squash %0d late %0d pf_evict %0d replace %0d hit %0d miss %0d wait %0d drop %0d",
             stats.pf_trigger, stats.pf_forward, stats.pf_issue, stats.pf_expand, stats.pfhr_squash,
             stats.late_pf, stats.pf_evict_unused, stats.l1_replace, stats.l1_hit, stats.l1_miss,
             stats.xbar_wait, stats.pf_drop);
    check(stats.pf_trigger > 0, "trigger happened");
    check(stats.pf_forward > 0, "handshake forward happened");
    check(stats.pf_expand > 0, "PFHR hit happened");
    check(stats.pfhr_squash > 0, "PFHR squash happened");
    check(stats.late_pf > 0, "late prefetch happened");
    check(stats.pf_evict_unused > 0, "unused prefetch eviction happened");
    check(stats.l1_replace > 0, "replacement happened");
    check(stats.xbar_wait > 0, "R-XBar contention happened");
    check(stats.mode_switch == 2, "mode switches: one out of reset (shared), one at run time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
