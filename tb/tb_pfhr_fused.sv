// tb_pfhr_fused: checks the fused PFHR array at its default size (16 banks
// of 8 entries). Private mode: all engines are granted in the same cycle and
// work on their own bank only. Shared mode: one grant per cycle in
// round-robin order, allocation spills over all banks, a search by any
// engine finds an entry written by another, a full array squashes only an
// entry with the same GPE-ID and refuses when there is none.
module tb_pfhr_fused;
  import tm_pkg::*;
  localparam int N = 16, E = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic shared, clear;
  logic [N-1:0] req_valid, req_search, gnt, hit, squash;
  pf_req_t req [N];
  pf_req_t hit_entry [N];
  pfhr_fused #(.N_ENG(N), .ENTRIES(E)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic pf_req_t mk(int gpe, int node, addr_t a);
    return '{gpe: GPE_W'(gpe), node: NODE_W'(node), addr: a};
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    shared = 0; clear = 0; req_valid = '0; req_search = '0;
    for (int e = 0; e < N; e++) req[e] = '0;
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- private: every engine allocates in parallel ----
    @(negedge clk);
    for (int e = 0; e < N; e++) begin
      req_valid[e] = 1; req_search[e] = 0; req[e] = mk(e, 1, addr_t'(32'h1000 * (e + 1)));
    end
    #1 check(gnt == '1, "private: all granted in one cycle");
    check(hit == '1, "private: all allocated");
    @(negedge clk); req_valid = '0;
    // engine 1 searching engine 0's address: not visible in private mode
    req_valid[1] = 1; req_search[1] = 1; req[1] = mk(0, 0, 32'h1000);
    #1 check(gnt[1] && !hit[1], "private: other bank invisible");
    @(negedge clk);
    req[1] = mk(0, 0, 32'h2010);
    #1 check(hit[1] && hit_entry[1].addr == 32'h2000 && hit_entry[1].node == 1 &&
             hit_entry[1].gpe == 1, "private: own entry found by line");
    @(negedge clk);
    #1 check(!hit[1], "private: search frees the entry");
    @(negedge clk); req_valid = '0;

    // private: fill bank 2 (8 entries, gpe 2), then squash
    for (int i = 1; i < E; i++) begin
      req_valid[2] = 1; req_search[2] = 0; req[2] = mk(2, 1, addr_t'(32'h9000 + 64 * i));
      #1 check(hit[2] && !squash[2], "private: fill bank");
      @(negedge clk);
    end
    req[2] = mk(2, 1, 32'hA000);
    #1 check(hit[2] && squash[2], "private: full bank squashes own GPE entry");
    @(negedge clk); req_valid = '0;

    // ---- shared: clear, then round robin ----
    clear = 1; @(negedge clk); clear = 0; shared = 1;
    for (int e = 0; e < 4; e++) begin
      req_valid[e] = 1; req_search[e] = 0; req[e] = mk(e, 2, addr_t'(32'h4000 + 64 * e));
    end
    begin
      int order[4]; bit seen[4];
      for (int c = 0; c < 4; c++) begin
        #1 check($countones(gnt) == 1, "shared: one grant per cycle");
        for (int e = 0; e < 4; e++) if (gnt[e]) order[c] = e;
        @(negedge clk);
        req_valid[order[c]] = 0;
      end
      for (int c = 0; c < 4; c++) seen[order[c]] = 1;
      check(seen[0] && seen[1] && seen[2] && seen[3], "shared: every requester served");
      check(order[1] == (order[0] + 1) % 4 || order[0] < order[1], "shared: rotating order");
    end
    // engine 9 finds the entry engine 3 wrote
    req_valid[9] = 1; req_search[9] = 1; req[9] = mk(0, 0, 32'h40C4);
    #1 check(gnt[9] && hit[9] && hit_entry[9].gpe == 3 && hit_entry[9].node == 2,
             "shared: search across banks");
    @(negedge clk); req_valid = '0;

    // shared: fill the whole array (128 entries) with GPE 5
    for (int i = 0; i < N * E - 3; i++) begin
      req_valid[i % N] = 1; req_search[i % N] = 0; req[i % N] = mk(5, 1, addr_t'(32'h10_0000 + 64 * i));
      #1 check(hit[i % N] && !squash[i % N], "shared: allocate");
      @(negedge clk); req_valid = '0;
    end
    req_valid[4] = 1; req_search[4] = 0; req[4] = mk(7, 1, 32'h20_0000);
    #1 check(gnt[4] && !hit[4] && !squash[4], "shared: other GPE may not squash");
    @(negedge clk);
    req[4] = mk(5, 1, 32'h20_0000);
    #1 check(hit[4] && squash[4], "shared: same GPE squashes");
    @(negedge clk); req_valid = '0;
    req_valid[6] = 1; req_search[6] = 1; req[6] = mk(0, 0, 32'h20_0000);
    #1 check(hit[6] && hit_entry[6].gpe == 5, "shared: squashing entry is live");
    @(negedge clk); req_valid = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
