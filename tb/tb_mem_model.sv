// tb_mem_model: behavioural model of a memory below a cache (an HBM
// pseudo-channel, or the next cache level in a unit test). Loads are
// answered with the whole line after LAT cycles, in order, one per cycle;
// stores are taken at once and remembered on top of the formula contents of
// tb_mem_pkg. Not synthesizable; test use only.
module tb_mem_model
  import tm_pkg::*;
  import tb_mem_pkg::*;
#(
  parameter int LAT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  input  mem_req_t req,
  output logic     req_ready,
  output logic     rsp_valid,
  output mem_rsp_t rsp,
  input  logic     rsp_ready
);
  typedef struct { longint t; mem_req_t r; } pend_t;
  pend_t  q[$];
  word_t  over[addr_t];
  longint now;
  int unsigned n_loads, n_stores;

  function automatic line_t read_line(addr_t a);
    line_t l;
    l = mem_line(a);
    for (int i = 0; i < WORDS_PER_LINE; i++)
      if (over.exists(line_of(a) + addr_t'(4 * i)))
        l[i*WORD_W +: WORD_W] = over[line_of(a) + addr_t'(4 * i)];
    return l;
  endfunction

  function automatic word_t peek(addr_t a);
    addr_t w;
    w = {a[ADDR_W-1:2], 2'b00};
    return over.exists(w) ? over[w] : mem_word(w);
  endfunction

  assign req_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now       <= 0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
      n_loads   <= 0;
      n_stores  <= 0;
      q.delete();
    end else begin
      now <= now + 1;
      if (req_valid) begin
        if (req.op == OP_STORE) begin
          over[{req.addr[ADDR_W-1:2], 2'b00}] = req.wdata;
          n_stores <= n_stores + 1;
        end else begin
          q.push_back('{t: now + LAT, r: req});
          n_loads <= n_loads + 1;
        end
      end
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if ((!rsp_valid || rsp_ready) && q.size() > 0 && q[0].t <= now) begin
        pend_t p;
        p = q.pop_front();
        rsp_valid <= 1'b1;
        rsp.src   <= p.r.src;
        rsp.addr  <= p.r.addr;
        rsp.line  <= read_line(p.r.addr);
        rsp.word  <= peek(p.r.addr);
      end
    end
  end
endmodule
