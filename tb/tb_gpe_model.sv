// tb_gpe_model: behavioural stand-in for a GPE core running a pull-mode
// graph kernel. It pops a work item {count[31:16], first vertex[15:0]} from
// its work queue; for each vertex v it loads offsets[v] and offsets[v+1],
// then for each in-edge j the neighbour id nbrs[j] and the property
// prop[nbr], and sums the properties. It stores the sum to RES_BASE+4v and
// reads it back. After the item it posts the sum over all its vertices to
// its status queue and stores it to scratchpad word gid. Every loaded value
// is compared with the memory formula (n_err). One memory request in flight,
// as an in-order core would have. Not synthesizable; test use only.
module tb_gpe_model
  import tm_pkg::*;
  import tb_mem_pkg::*;
(
  input  int       gid,           // GPE number, sets its scratchpad word
  input  logic     clk,
  input  logic     rst_n,
  output logic     req_valid,
  output mem_req_t req,
  input  logic     req_ready,
  input  logic     rsp_valid,
  input  mem_rsp_t rsp,
  output logic     rsp_ready,
  input  logic     wq_valid,
  input  word_t    wq_data,
  output logic     wq_ready,
  output logic     sq_valid,
  output word_t    sq_data,
  input  logic     sq_ready,
  output logic     sync_valid,
  output mem_req_t sync_req,
  input  logic     sync_ready,
  input  logic     sync_rsp_valid,
  input  mem_rsp_t sync_rsp,
  output logic     sync_rsp_ready
);
  int n_err = 0, n_vert = 0, n_items = 0, n_loads = 0;

  task automatic load(addr_t a, output word_t d);
    @(negedge clk);
    req_valid = 1; req = '{src: '0, wdata: '0, op: OP_LOAD, addr: a};
    do @(posedge clk); while (!req_ready);
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    d = rsp.word;
    n_loads++;
    if (rsp.addr != a) begin
      n_err++; $display("GPE %0d: response for %h, expected %h", gid, rsp.addr, a);
    end
  endtask

  task automatic store(addr_t a, word_t v);
    @(negedge clk);
    req_valid = 1; req = '{src: '0, wdata: v, op: OP_STORE, addr: a};
    do @(posedge clk); while (!req_ready);
    @(negedge clk); req_valid = 0;
  endtask

  task automatic expect_word(addr_t a, word_t got, word_t exp);
    if (got != exp) begin
      n_err++; $display("GPE %0d: %h read %h, expected %h", gid, a, got, exp);
    end
  endtask

  initial begin
    req_valid = 0; req = '0; rsp_ready = 1; wq_ready = 0; sq_valid = 0; sq_data = '0;
    sync_valid = 0; sync_req = '0; sync_rsp_ready = 1;
    wait (rst_n);
    forever begin
      word_t item, total;
      int v0, cnt;
      @(negedge clk);
      while (!wq_valid) @(negedge clk);
      item = wq_data;
      wq_ready = 1; @(negedge clk); wq_ready = 0;
      v0 = int'(item[15:0]); cnt = int'(item[31:16]);
      total = '0;
      for (int v = v0; v < v0 + cnt; v++) begin
        word_t lo, hi, nb, pr, s, rb;
        addr_t a;
        a = OFF_BASE + addr_t'(4 * v);     load(a, lo); expect_word(a, lo, mem_word(a));
        a = OFF_BASE + addr_t'(4 * v + 4); load(a, hi); expect_word(a, hi, mem_word(a));
        s = '0;
        for (int j = int'(lo); j < int'(hi); j++) begin
          a = NBR_BASE + addr_t'(4 * j);  load(a, nb); expect_word(a, nb, mem_word(a));
          a = PROP_BASE + 4 * nb;         load(a, pr); expect_word(a, pr, mem_word(a));
          s += pr;
        end
        store(RES_BASE + addr_t'(4 * v), s);
        load(RES_BASE + addr_t'(4 * v), rb);
        expect_word(RES_BASE + addr_t'(4 * v), rb, s);
        total += s;
        n_vert++;
      end
      // status to the LCP, result to the scratchpad
      @(negedge clk);
      sq_valid = 1; sq_data = total;
      do @(posedge clk); while (!sq_ready);
      @(negedge clk); sq_valid = 0;
      sync_valid = 1; sync_req = '{src: '0, wdata: total, op: OP_STORE, addr: addr_t'(4 * gid)};
      do @(posedge clk); while (!sync_ready);
      @(negedge clk); sync_valid = 0;
      n_items++;
    end
  end
endmodule
