// tb_work_status_queue: the LCP pushes random work items to random GPEs and
// the GPEs pop them at random; the GPEs post status words that the LCP
// collects. Checks order per GPE against reference queues, the FIFO depth
// (push refused when full) and that nothing is lost.
module tb_work_status_queue;
  import tm_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wq_push_valid, wq_push_ready, sq_pop_valid, sq_pop_ready;
  logic [3:0] wq_push_gpe, sq_pop_gpe;
  word_t wq_push_data, sq_pop_data;
  logic [N-1:0] wq_pop_valid, wq_pop_ready, sq_push_valid, sq_push_ready;
  word_t wq_pop_data [N]; word_t sq_push_data [N];
  work_status_queue dut (.*);

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

  word_t wref [N][$];
  word_t sref [N][$];
  initial begin
    wq_push_valid = 0; sq_pop_ready = 0; wq_push_gpe = 0; sq_pop_gpe = 0; wq_push_data = 0;
    wq_pop_ready = '0; sq_push_valid = '0;
    for (int g = 0; g < N; g++) sq_push_data[g] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // depth: 4 pushes fit, the 5th is refused
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); wq_push_valid = 1; wq_push_gpe = 4'd3; wq_push_data = word_t'(100 + i);
      #1 check(wq_push_ready, "push fits"); wref[3].push_back(word_t'(100 + i));
    end
    @(negedge clk); #1 check(!wq_push_ready, "full queue refuses");
    wq_push_valid = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      // GPE side: check and pop heads at random, post status
      for (int g = 0; g < N; g++) begin
        wq_pop_ready[g] = 0;
        if (wq_pop_valid[g] && $urandom_range(0, 1)) begin
          check(wref[g].size() > 0 && wq_pop_data[g] == wref[g][0], $sformatf("work order gpe %0d", g));
          void'(wref[g].pop_front());
          wq_pop_ready[g] = 1;
        end
        sq_push_valid[g] = 0;
        if (sq_push_ready[g] && $urandom_range(0, 7) == 0) begin
          sq_push_valid[g] = 1; sq_push_data[g] = $urandom; sref[g].push_back(sq_push_data[g]);
        end
      end
      // LCP side
      wq_push_valid = 0; sq_pop_ready = 0;
      wq_push_gpe = 4'($urandom); wq_push_data = $urandom;
      sq_pop_gpe  = 4'($urandom);
      #1;
      if (wq_push_ready) begin wq_push_valid = 1; wref[wq_push_gpe].push_back(wq_push_data); end
      if (sq_pop_valid) begin
        check(sref[sq_pop_gpe].size() > 0 && sq_pop_data == sref[sq_pop_gpe][0], "status order");
        void'(sref[sq_pop_gpe].pop_front());
        sq_pop_ready = 1;
      end
    end
    @(negedge clk); wq_push_valid = 0; sq_pop_ready = 0; sq_push_valid = '0; wq_pop_ready = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
