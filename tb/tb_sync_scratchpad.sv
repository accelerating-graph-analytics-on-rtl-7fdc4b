// tb_sync_scratchpad: random stores and loads against a reference array,
// checking data, the returned src and the one-cycle load latency, and that a
// stalled response holds the request port.
module tb_sync_scratchpad;
  import tm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  mem_req_t req; mem_rsp_t rsp;
  sync_scratchpad dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t ref_m [1024];
  initial begin
    req_valid = 0; rsp_ready = 1; req = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      ref_m[i] = $urandom;
      req_valid = 1; req = '{src: 8'(i), wdata: ref_m[i], op: OP_STORE, addr: addr_t'(4 * i)};
    end
    @(negedge clk); req_valid = 0;
    for (int k = 0; k < 500; k++) begin
      int a;
      a = $urandom_range(0, 1023);
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        ref_m[a] = $urandom;
        req_valid = 1; req = '{src: 8'(k), wdata: ref_m[a], op: OP_STORE, addr: addr_t'(4 * a)};
        @(negedge clk); req_valid = 0;
      end else begin
        req_valid = 1; req = '{src: 8'(k), wdata: '0, op: OP_LOAD, addr: addr_t'(4 * a)};
        @(negedge clk); req_valid = 0;
        check(rsp_valid && rsp.word == ref_m[a] && rsp.src == 8'(k), $sformatf("load %0d", a));
      end
    end
    // back-pressure
    @(negedge clk);
    rsp_ready = 0;
    req_valid = 1; req = '{src: 8'd1, wdata: '0, op: OP_LOAD, addr: 32'h10};
    @(negedge clk);
    req = '{src: 8'd2, wdata: '0, op: OP_LOAD, addr: 32'h20};
    #1 check(rsp_valid && !req_ready, "stalled response holds requests");
    @(negedge clk);
    rsp_ready = 1;
    #1 check(rsp.src == 8'd1 && rsp.word == ref_m[4], "held response kept");
    @(negedge clk); req_valid = 0;
    check(rsp.src == 8'd2 && rsp.word == ref_m[8], "next response");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
