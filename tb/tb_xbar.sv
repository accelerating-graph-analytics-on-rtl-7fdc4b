// tb_xbar: random traffic through a 5x4 crossbar with random output
// back-pressure. Every packet carries its source, destination and a per-
// source sequence number; the checker expects each to arrive at the right
// output, with the right out_src, in order per source/destination pair, and
// all of them to arrive. It also checks the serialisation rule (two inputs
// to one output: one packet per cycle) and the contention counters.
module tb_xbar;
  localparam int NI = 5, NO = 4, W = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NI-1:0] in_valid, in_ready;
  logic [1:0]    in_dest [NI];
  logic [W-1:0]  in_data [NI];
  logic [NO-1:0] out_valid, out_ready;
  logic [W-1:0]  out_data [NO];
  logic [2:0]    out_src [NO];
  logic [31:0]   stat_fwd, stat_wait;
  xbar #(.N_IN(NI), .N_OUT(NO), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int sent [NI][NO];
  int got  [NI][NO];
  int total_sent = 0, total_got = 0;
  localparam int PKTS = 400;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receivers
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NO; o++) if (out_valid[o] && out_ready[o]) begin
      int s, d, n;
      s = int'(out_data[o][23:20]); d = int'(out_data[o][19:16]); n = int'(out_data[o][15:0]);
      checks++;
      if (d != o || s != int'(out_src[o]) || n != got[s][o]) begin
        failures++;
        $display("FAIL: out %0d got src %0d dst %0d seq %0d (expect seq %0d)", o, s, d, n, got[s][o]);
      end
      got[s][o]++; total_got++;
    end
  end

  // senders
  for (genvar i = 0; i < NI; i++) begin : g_src
    initial begin
      int d;
      in_valid[i] = 0; in_dest[i] = '0; in_data[i] = '0;
      wait (rst_n);
      for (int k = 0; k < PKTS / NI; k++) begin
        @(negedge clk);
        d = $urandom_range(0, NO - 1);
        in_valid[i] = 1; in_dest[i] = 2'(d);
        in_data[i]  = {4'(i), 4'(d), 16'(sent[i][d])};
        do @(posedge clk); while (!in_ready[i]);
        sent[i][d]++; total_sent++;
        @(negedge clk); in_valid[i] = 0;
        if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
      end
    end
  end

  initial begin
    out_ready = '1;
    repeat (2) @(negedge clk); rst_n = 1;
    forever begin
      @(negedge clk);
      out_ready = 4'($urandom) | 4'b0001;
      if (total_sent == PKTS) break;
    end
    out_ready = '1;
    repeat (20) @(negedge clk);
    check(total_got == PKTS, $sformatf("all packets delivered (%0d)", total_got));
    check(stat_fwd == 32'(PKTS), "forward counter");
    check(stat_wait > 0, "contention counted");
    // serialisation: inputs 0 and 1 to output 2 in the same cycles
    begin
      int n0;
      n0 = total_got;
      @(negedge clk);
      in_valid[0] = 1; in_dest[0] = 2; in_data[0] = {4'd0, 4'd2, 16'(sent[0][2])};
      in_valid[1] = 1; in_dest[1] = 2; in_data[1] = {4'd1, 4'd2, 16'(sent[1][2])};
      #1 check($countones(in_ready) == 1, "one packet per output per cycle");
      if (in_ready[0]) begin sent[0][2]++; @(negedge clk); in_valid[0] = 0; end
      else begin sent[1][2]++; @(negedge clk); in_valid[1] = 0; end
      #1 check(in_ready[0] || in_ready[1], "second packet next cycle");
      @(negedge clk); in_valid = '0;
      repeat (5) @(negedge clk);
      check(total_got == n0 + 2, "both delivered");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
