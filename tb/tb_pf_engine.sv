// tb_pf_engine: one PF engine (engine 0 of 4) with a fused PFHR array. The
// testbench plays the cache bank: it accepts every prefetch and returns the
// line 6 cycles later on the line-snoop port, contents from tb_mem_pkg.
// The DIG is the pull-mode graph pattern: offsets (trigger) --ranged-->
// neighbour ids --single--> vertex property.
// Private mode: a demand access to offsets[i] must yield exactly the
// prefetches offsets[i+d], nbrs[off[i+d] .. off[i+d+1]-1] and
// prop[nbr] of each of those, computed here from the graph formula.
// Shared mode: every generated request must leave on the handshake port to
// the engine of its colour-mapped bank unless that bank is this one, and a
// request that arrives on the handshake port is issued here. Also checks
// the distance adaptation and the chain's completion time.
module tb_pf_engine;
  import tm_pkg::*;
  import tb_mem_pkg::*;
  localparam int NE = 4;
  localparam addr_t PROP_END = PROP_BASE + 4 * V;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic shared, clear;
  dig_cfg_t cfg;
  logic snp_dem_valid, snp_line_valid, evt_late_pf, evt_pf_evict;
  addr_t snp_dem_addr, snp_line_addr; logic [SRC_W-1:0] snp_dem_src; line_t snp_line_data;
  logic pf_valid, pf_ready; addr_t pf_addr;
  logic hs_out_valid, hs_out_ready, hs_in_valid, hs_in_ready;
  logic [1:0] hs_out_dest; pf_req_t hs_out, hs_in;
  logic [NE-1:0] p_rv, p_rs, p_gnt, p_hit, p_sq;
  pf_req_t p_req [NE]; pf_req_t p_ent [NE];
  logic [DIST_W-1:0] cur_dist;
  logic ev_trigger, ev_forward, ev_issue, ev_expand, ev_drop;

  pf_engine #(.N_ENG(NE)) dut (
    .eng_id('0),
    .clk, .rst_n, .shared, .clear, .cfg,
    .snp_dem_valid, .snp_dem_addr, .snp_dem_src, .snp_line_valid, .snp_line_addr, .snp_line_data,
    .evt_late_pf, .evt_pf_evict, .pf_valid, .pf_addr, .pf_ready,
    .hs_out_valid, .hs_out_dest, .hs_out, .hs_out_ready, .hs_in_valid, .hs_in, .hs_in_ready,
    .pfhr_req_valid(p_rv[0]), .pfhr_req_search(p_rs[0]), .pfhr_req(p_req[0]),
    .pfhr_gnt(p_gnt[0]), .pfhr_hit(p_hit[0]), .pfhr_hit_entry(p_ent[0]),
    .cur_dist, .ev_trigger, .ev_forward, .ev_issue, .ev_expand, .ev_drop);
  assign p_rv[NE-1:1] = '0;
  assign p_rs[NE-1:1] = '0;
  for (genvar e = 1; e < NE; e++) begin : g_idle
    assign p_req[e] = '0;
  end
  pfhr_fused #(.N_ENG(NE), .ENTRIES(8)) u_pfhr (
    .clk, .rst_n, .shared, .clear, .req_valid(p_rv), .req_search(p_rs), .req(p_req),
    .gnt(p_gnt), .hit(p_hit), .squash(p_sq), .hit_entry(p_ent));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // cache model: prefetched lines come back on the snoop port
  longint cyc = 0;
  typedef struct { longint t; addr_t a; } fill_t;
  fill_t fq[$];
  int issued[addr_t];
  int fwd[addr_t];
  int n_expand = 0, n_fwd_bad = 0, n_local_bad = 0;
  assign pf_ready = 1'b1;
  assign hs_out_ready = 1'b1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && pf_valid) begin
      issued[pf_addr] = issued.exists(pf_addr) ? issued[pf_addr] + 1 : 1;
      fq.push_back('{t: cyc + 6, a: pf_addr});
      if (shared && color_bank(pf_addr, NE) != 0) n_local_bad++;
    end
    if (rst_n && hs_out_valid) begin
      fwd[hs_out.addr] = fwd.exists(hs_out.addr) ? fwd[hs_out.addr] + 1 : 1;
      if (int'(hs_out_dest) != color_bank(hs_out.addr, NE) || hs_out_dest == 0) n_fwd_bad++;
    end
    if (ev_expand) n_expand++;
  end
  always @(negedge clk) begin
    snp_line_valid = 0;
    if (fq.size() > 0 && fq[0].t <= cyc) begin
      fill_t f;
      f = fq.pop_front();
      snp_line_valid = 1; snp_line_addr = line_of(f.a); snp_line_data = mem_line(f.a);
    end
  end

  task automatic wcfg(dig_cfg_t c);
    @(negedge clk); cfg = c; cfg.we = 1; @(negedge clk); cfg = '0;
  endtask
  task automatic demand(addr_t a, int gpe);
    @(negedge clk); snp_dem_valid = 1; snp_dem_addr = a; snp_dem_src = SRC_W'(gpe);
    @(negedge clk); snp_dem_valid = 0;
  endtask

  // expected prefetch set for a trigger at offsets[i] with distance d
  function automatic void expect_chain(int i, int d, ref int ex[addr_t]);
    int t, lo, hi;
    t  = i + d;
    ex[OFF_BASE + addr_t'(4 * t)] = 1;
    lo = t * DEG; hi = (t + 1) * DEG;
    for (int j = lo; j < hi; j++) begin
      ex[NBR_BASE + addr_t'(4 * j)] = 1;
      ex[PROP_BASE + addr_t'(4 * nbr_of(j))] = 1;
    end
  endfunction

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dig_cfg_t c;
    int ex[addr_t];
    longint t0;
    shared = 0; clear = 0; cfg = '0; snp_dem_valid = 0; snp_dem_addr = '0; snp_dem_src = '0;
    evt_late_pf = 0; evt_pf_evict = 0; hs_in_valid = 0; hs_in = '0;
    snp_line_valid = 0; snp_line_addr = '0; snp_line_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    c = '0; c.kind = CFG_NODE; c.idx = 0; c.base = OFF_BASE; c.bound = OFF_BASE + 4 * (V + 1); c.size_log2 = 2; wcfg(c);
    c = '0; c.kind = CFG_NODE; c.idx = 1; c.base = NBR_BASE; c.bound = NBR_BASE + 4 * V * DEG; c.size_log2 = 2; wcfg(c);
    c = '0; c.kind = CFG_NODE; c.idx = 2; c.base = PROP_BASE; c.bound = PROP_END; c.size_log2 = 2; wcfg(c);
    c = '0; c.kind = CFG_EDGE; c.idx = 0; c.src = 0; c.dst = 1; c.ranged = 1; wcfg(c);
    c = '0; c.kind = CFG_EDGE; c.idx = 1; c.src = 1; c.dst = 2; c.ranged = 0; wcfg(c);
    c = '0; c.kind = CFG_TRIG; c.src = 0; wcfg(c);
    c = '0; c.kind = CFG_DIST; c.pf_dist = 2; wcfg(c);
    @(negedge clk);
    check(cur_dist == 2, "distance programmed");

    // ---- private mode: one full chain ----
    demand(PROP_BASE + 8, 0);          // not the trigger array: nothing happens
    repeat (10) @(negedge clk);
    check(issued.size() == 0, "no prefetch for non-trigger access");
    t0 = cyc;
    demand(OFF_BASE + 4 * 10, 0);
    repeat (200) @(negedge clk);
    expect_chain(10, 2, ex);
    check(issued.size() == ex.size(), $sformatf("chain size %0d expect %0d", issued.size(), ex.size()));
    foreach (ex[a]) check(issued.exists(a), $sformatf("prefetch of %h issued", a));
    foreach (issued[a]) check(ex.exists(a), $sformatf("prefetch of %h expected", a));
    check(n_expand == 1 + DEG, $sformatf("PFHR hits %0d", n_expand));
    check(fwd.size() == 0, "private mode forwards nothing");

    // ---- distance adaptation ----
    repeat (3) begin @(negedge clk); evt_late_pf = 1; @(negedge clk); evt_late_pf = 0; end
    check(cur_dist == 5, "late prefetches raise the distance");
    @(negedge clk); evt_pf_evict = 1; @(negedge clk); evt_pf_evict = 0;
    check(cur_dist == 4, "unused eviction lowers the distance");

    // ---- shared mode: handshake ----
    issued.delete(); ex.delete(); n_expand = 0;
    @(negedge clk); shared = 1; clear = 1; @(negedge clk); clear = 0;
    for (int i = 100; i < 164; i += 4) begin
      demand(OFF_BASE + addr_t'(4 * i), 1);
      repeat (30) @(negedge clk);
    end
    repeat (100) @(negedge clk);
    for (int i = 100; i < 164; i += 4) ex[OFF_BASE + addr_t'(4 * (i + 4))] = 1;
    begin
      int n;
      n = 0;
      foreach (ex[a]) begin
        if (color_bank(a, NE) == 0) check(issued.exists(a), $sformatf("home-bank trigger %h issued here", a));
        else                        check(fwd.exists(a), $sformatf("trigger %h handed over", a));
        n++;
      end
      check(n_fwd_bad == 0 && n_local_bad == 0, "every request goes to its colour bank");
    end
    // a request handed to this engine by another one is issued here and expanded
    issued.delete();
    @(negedge clk);
    hs_in_valid = 1; hs_in = '{gpe: 6'd2, node: 3'd0, addr: OFF_BASE + 4 * 64};
    while (!hs_in_ready) @(negedge clk);
    @(negedge clk); hs_in_valid = 0;
    repeat (100) @(negedge clk);
    check(issued.exists(OFF_BASE + 4 * 64), "handed-over request issued");
    check(n_expand >= 1, "handed-over request expanded after its fill");
    begin
      int j;
      j = 64 * DEG;   // first neighbour of vertex 64
      check(issued.exists(NBR_BASE + addr_t'(4 * j)) || fwd.exists(NBR_BASE + addr_t'(4 * j)),
            "neighbour prefetch generated from handed-over request");
    end
    check(cyc - t0 < 2000, "completion time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
