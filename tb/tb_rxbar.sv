// tb_rxbar: the GPE-to-L1 R-XBar at its default 16x16 size. In shared mode
// a request must reach the bank given by cache colouring of its line
// address; in private mode requester i must reach bank i whatever the
// address. Also checks the per-cycle serialisation when all requesters hit
// one bank, which shows up in the contention counter.
module tb_rxbar;
  import tm_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic shared;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [MEM_REQ_W-1:0] in_data [N];
  logic [MEM_REQ_W-1:0] out_data [N];
  logic [3:0] out_src [N];
  logic [31:0] stat_fwd, stat_wait;
  rxbar #(.N_IN(N), .N_OUT(N)) dut (.*);

  int checks = 0, failures = 0, got = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n)
    for (int o = 0; o < N; o++) if (out_valid[o]) begin
      mem_req_t r;
      r = mem_req_t'(out_data[o]);
      got++;
      if (shared) check(int'(r.addr[9:6]) == o, $sformatf("shared: %h at bank %0d", r.addr, o));
      else        check(int'(out_src[o]) == o && int'(r.src) == o, "private: own bank");
    end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_all(input addr_t base, input bit same);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      mem_req_t r;
      r = '{src: SRC_W'(i), wdata: '0, op: OP_LOAD,
            addr: same ? base : base + addr_t'($urandom_range(0, 255) * 64 + 4 * i)};
      in_data[i] = r;
    end
    in_valid = '1;
    while (in_valid != '0) begin
      logic [N-1:0] acc;
      #1 acc = in_valid & in_ready;   // sampled while inputs are stable
      @(negedge clk);
      in_valid = in_valid & ~acc;
    end
  endtask

  initial begin
    shared = 1; in_valid = '0; out_ready = '1;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 20; k++) send_all(32'h0010_0000, 0);
    // all to one bank: needs 16 cycles, contention grows
    begin
      longint w0; int n0; int t;
      repeat (4) @(negedge clk);
      w0 = stat_wait; n0 = got; t = 0;
      send_all(32'h0020_0140, 1);
      repeat (4) @(negedge clk);
      check(got == n0 + N, "hot bank: all delivered");
      check(stat_wait - w0 >= (N * (N - 1)) / 2, "hot bank: serialised one per cycle");
    end
    repeat (4) @(negedge clk);
    shared = 0;
    for (int k = 0; k < 20; k++) send_all(32'h0030_0000, 0);
    repeat (4) @(negedge clk);
    check(got == 20 * N + N + 20 * N, $sformatf("all delivered (%0d)", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
