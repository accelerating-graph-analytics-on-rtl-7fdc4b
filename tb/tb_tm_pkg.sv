// tb_tm_pkg: checks the shared definitions: the cache-colouring bank map
// (line address modulo the number of banks) against integer arithmetic for
// random addresses and bank counts, the line-base function, and the widths
// and field order of the request/response packets that the networks carry
// as flat bit vectors.
module tb_tm_pkg;
  import tm_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    mem_req_t r;
    logic [MEM_REQ_W-1:0] flat;
    int unsigned nb [5] = '{1, 2, 4, 16, 64};
    for (int k = 0; k < 400; k++) begin
      addr_t a;
      longint unsigned la;
      a = $urandom;
      la = longint'(a) / 64;
      foreach (nb[j])
        check(color_bank(a, nb[j]) == int'(la % nb[j]),
              $sformatf("colour of %h over %0d banks", a, nb[j]));
      check(line_of(a) == addr_t'(la * 64), $sformatf("line of %h", a));
    end
    // consecutive lines go to consecutive banks
    for (int i = 0; i < 32; i++)
      check(color_bank(addr_t'(32'h0040_0000 + 64 * i + 4), 16) == (i % 16), "stride colouring");
    check(LINE_W == 512 && WORDS_PER_LINE == 16 && OFF_W == 6, "line geometry");
    check(MEM_REQ_W == SRC_W + WORD_W + $bits(mem_op_e) + ADDR_W, "request width");
    check(MEM_RSP_W == SRC_W + LINE_W + WORD_W + ADDR_W, "response width");
    r = '{src: 8'hA5, wdata: 32'h1234_5678, op: OP_STORE, addr: 32'hDEAD_BEE0};
    flat = r;
    check(flat[ADDR_W-1:0] == 32'hDEAD_BEE0, "address in the low bits");
    check(mem_req_t'(flat) == r, "round trip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
