// tb_dig_table: writes random DIG nodes and edges, the trigger node and the
// distance, and checks every stored field, the per-node "has an outgoing
// edge" flags computed independently here, and the distance write pulse.
module tb_dig_table;
  import tm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dig_cfg_t cfg;
  addr_t node_base [8]; addr_t node_bound [8]; logic [1:0] node_size [8];
  logic [7:0] node_has_out, edge_valid, edge_ranged;
  logic [2:0] edge_src [8]; logic [2:0] edge_dst [8];
  logic trig_en, dist_we; logic [2:0] trig_node; logic [DIST_W-1:0] dist_val;
  dig_table dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(dig_cfg_t c);
    @(negedge clk); cfg = c; cfg.we = 1; @(negedge clk); cfg = '0;
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_t b[8], bd[8]; logic [1:0] sz[8]; logic [2:0] es[8], ed[8]; logic er[8]; bit ev[8];
  initial begin
    cfg = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(node_has_out == '0 && edge_valid == '0 && !trig_en, "reset state");
    for (int n = 0; n < 8; n++) begin
      dig_cfg_t c;
      b[n] = $urandom; bd[n] = b[n] + $urandom_range(64, 4096); sz[n] = 2'($urandom);
      c = '0; c.kind = CFG_NODE; c.idx = 3'(n); c.base = b[n]; c.bound = bd[n]; c.size_log2 = sz[n];
      wr(c);
    end
    for (int e = 0; e < 8; e++) ev[e] = 0;
    for (int k = 0; k < 5; k++) begin
      dig_cfg_t c; int e;
      e = $urandom_range(0, 7);
      es[e] = 3'($urandom); ed[e] = 3'($urandom); er[e] = 1'($urandom); ev[e] = 1;
      c = '0; c.kind = CFG_EDGE; c.idx = 3'(e); c.src = es[e]; c.dst = ed[e]; c.ranged = er[e];
      wr(c);
    end
    begin
      dig_cfg_t c;
      c = '0; c.kind = CFG_TRIG; c.src = 3'd5; wr(c);
      c = '0; c.kind = CFG_DIST; c.pf_dist = 6'd9;
      @(negedge clk); cfg = c; cfg.we = 1; @(negedge clk); cfg = '0;
      check(dist_we && dist_val == 6'd9, "distance pulse");
      @(negedge clk);
      check(!dist_we, "pulse lasts one cycle");
    end
    for (int n = 0; n < 8; n++)
      check(node_base[n] == b[n] && node_bound[n] == bd[n] && node_size[n] == sz[n],
            $sformatf("node %0d", n));
    begin
      logic [7:0] ho;
      ho = '0;
      for (int e = 0; e < 8; e++) begin
        check(edge_valid[e] == ev[e], $sformatf("edge %0d valid", e));
        if (ev[e]) begin
          check(edge_src[e] == es[e] && edge_dst[e] == ed[e] && edge_ranged[e] == er[e],
                $sformatf("edge %0d fields", e));
          ho[es[e]] = 1;
        end
      end
      check(node_has_out == ho, "has_out flags");
    end
    check(trig_en && trig_node == 3'd5, "trigger");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
