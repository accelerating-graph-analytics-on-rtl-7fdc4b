// tb_rdcache: self-checking test of one cache bank (default L1 size) over a
// memory model with a 12-cycle latency. Checks load data against the memory
// formula, the 1-cycle hit latency, the miss latency, store-through, a
// prefetch that turns a later load into a hit, a late prefetch merged with a
// demand load, replacement and the unused-prefetch eviction event, MSHR
// exhaustion and flush.
module tb_rdcache;
  import tm_pkg::*;
  import tb_mem_pkg::*;

  localparam int LAT = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, rsp_valid, rsp_ready, pf_valid, pf_ready, flush;
  mem_req_t req; mem_rsp_t rsp; addr_t pf_addr;
  logic dn_req_valid, dn_req_ready, dn_rsp_valid, dn_rsp_ready;
  mem_req_t dn_req; mem_rsp_t dn_rsp;
  logic snp_dem_valid, snp_line_valid, e_hit, e_miss, e_late, e_pfev, e_repl;
  addr_t snp_dem_addr, snp_line_addr; logic [SRC_W-1:0] snp_dem_src; line_t snp_line_data;

  rdcache dut (
    .cache_id(8'd7),
    .clk, .rst_n, .flush, .req_valid, .req, .req_ready, .rsp_valid, .rsp, .rsp_ready,
    .pf_valid, .pf_addr, .pf_ready, .dn_req_valid, .dn_req, .dn_req_ready,
    .dn_rsp_valid, .dn_rsp, .dn_rsp_ready, .snp_dem_valid, .snp_dem_addr, .snp_dem_src,
    .snp_line_valid, .snp_line_addr, .snp_line_data, .evt_hit(e_hit), .evt_miss(e_miss),
    .evt_late_pf(e_late), .evt_pf_evict(e_pfev), .evt_replace(e_repl));
  tb_mem_model #(.LAT(LAT)) mem (
    .clk, .rst_n, .req_valid(dn_req_valid), .req(dn_req), .req_ready(dn_req_ready),
    .rsp_valid(dn_rsp_valid), .rsp(dn_rsp), .rsp_ready(dn_rsp_ready));

  int checks = 0, failures = 0;
  int n_hit = 0, n_late = 0, n_pfev = 0, n_repl = 0, n_snpline = 0;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    n_hit  <= n_hit + int'(e_hit);
    n_late <= n_late + int'(e_late);
    n_pfev <= n_pfev + int'(e_pfev);
    n_repl <= n_repl + int'(e_repl);
    n_snpline <= n_snpline + int'(snp_line_valid);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Issue a load, wait for its response; returns data and cycles from accept to response.
  task automatic load(addr_t a, output word_t d, output int lat);
    longint t0;
    @(negedge clk);
    req_valid = 1; req = '{src: 8'd3, wdata: '0, op: OP_LOAD, addr: a};
    do @(posedge clk); while (!req_ready);
    t0 = cyc;
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    lat = int'(cyc - t0);
    d = rsp.word;
    check(rsp.src == 8'd3, "response src");
    check(rsp.line == mem.read_line(a), "response line");
  endtask

  task automatic store(addr_t a, word_t v);
    @(negedge clk);
    req_valid = 1; req = '{src: 8'd3, wdata: v, op: OP_STORE, addr: a};
    do @(posedge clk); while (!req_ready);
    @(negedge clk); req_valid = 0;
  endtask

  task automatic prefetch(addr_t a);
    @(negedge clk);
    pf_valid = 1; pf_addr = a;
    do @(posedge clk); while (!pf_ready);
    @(negedge clk); pf_valid = 0;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t d; int lat; int h0, l0, p0, r0;
    req_valid = 0; pf_valid = 0; rsp_ready = 1; flush = 0; req = '0; pf_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // miss then hit
    load(32'h0000_1004, d, lat);
    check(d == mem_word(32'h0000_1004), "miss data");
    check(lat >= LAT && lat <= LAT + 6, $sformatf("miss latency %0d", lat));
    h0 = n_hit;
    load(32'h0000_1038, d, lat);
    check(d == mem_word(32'h0000_1038), "hit data");
    check(lat == 1, $sformatf("hit latency %0d (expect 1)", lat));
    check(n_hit == h0 + 1, "hit counted");

    // store-through, then the new value is read back (hit) and is in memory
    store(32'h0000_1008, 32'hDEAD_BEEF);
    load(32'h0000_1008, d, lat);
    check(d == 32'hDEAD_BEEF, "store hit updates line");
    repeat (3) @(negedge clk);
    check(mem.peek(32'h0000_1008) == 32'hDEAD_BEEF, "store written through");

    // prefetch, then the load hits
    prefetch(32'h0000_2000);
    repeat (LAT + 5) @(negedge clk);
    check(n_snpline > 0, "fill snooped");
    h0 = n_hit;
    load(32'h0000_2010, d, lat);
    check(d == mem_word(32'h0000_2010) && lat == 1 && n_hit == h0 + 1, "prefetched line hits");

    // late prefetch: demand load meets the pending prefetch MSHR
    l0 = n_late;
    prefetch(32'h0000_3000);
    load(32'h0000_3004, d, lat);
    check(d == mem_word(32'h0000_3004), "late prefetch data");
    check(n_late == l0 + 1, "late prefetch event");

    // replacement: 5 prefetched lines into one set of 4 ways, never used
    p0 = n_pfev; r0 = n_repl;
    for (int i = 0; i < 5; i++) prefetch(32'h0001_0140 + addr_t'(i) * 32'h1000);
    repeat (LAT + 10) @(negedge clk);
    check(n_repl == r0 + 1, $sformatf("replacement count %0d", n_repl - r0));
    check(n_pfev == p0 + 1, "unused prefetched line evicted");

    // MSHR exhaustion: 8 outstanding prefetch misses, the 9th waits
    @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      pf_valid = 1; pf_addr = 32'h0002_0000 + addr_t'(i) * 64;
      @(posedge clk); @(negedge clk);
    end
    pf_addr = 32'h0002_0000 + 8 * 64;
    #1 check(!pf_ready, "ninth miss stalls with 8 MSHRs busy");
    pf_valid = 0;
    repeat (LAT + 12) @(negedge clk);
    check(pf_ready, "MSHRs free again");

    // flush invalidates: next load misses again
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    load(32'h0000_1038, d, lat);
    check(lat >= LAT, "miss after flush");
    check(d == mem_word(32'h0000_1038), "data after flush");

    // random loads against the formula (includes conflicts)
    for (int i = 0; i < 200; i++) begin
      addr_t a;
      a = {16'h0, 4'($urandom_range(0, 7)), 6'($urandom), 4'($urandom), 2'b00};
      load(a, d, lat);
      check(d == mem.peek(a), $sformatf("random load %h", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
