// tb_mem_pkg: the contents of simulated main memory, given by formula so
// that no data file is needed. It holds a synthetic graph in compressed
// sparse column form used by the prefetcher tests:
//   offsets[v]  at OFF_BASE  + 4*v : v*DEG           (v = 0..V)
//   nbrs[j]     at NBR_BASE  + 4*j : (j*2654435761 >> 8) mod V
//   every other word               : address XOR 0x5A5A0000
// Stores made during a test are kept by the memory model on top of this.
package tb_mem_pkg;
  import tm_pkg::*;

  localparam addr_t OFF_BASE  = 32'h0010_0000;
  localparam addr_t NBR_BASE  = 32'h0020_0000;
  localparam addr_t PROP_BASE = 32'h0040_0000;
  localparam int    V         = 16384;
  localparam int    DEG       = 4;
  localparam addr_t RES_BASE  = 32'h0080_0000;

  // What a pull-mode kernel computes for vertex v: the sum of the property
  // words of its in-neighbours.
  function automatic word_t vertex_sum(int unsigned v);
    word_t s;
    s = '0;
    for (int unsigned j = v * DEG; j < (v + 1) * DEG; j++)
      s += mem_word(PROP_BASE + 4 * nbr_of(j));
    return s;
  endfunction

  function automatic word_t nbr_of(int unsigned j);
    logic [63:0] h;
    h = 64'(j) * 64'd2654435761;
    return word_t'((h >> 8) % V);
  endfunction

  function automatic word_t mem_word(addr_t a);
    addr_t w;
    w = {a[ADDR_W-1:2], 2'b00};
    if (w >= OFF_BASE && w < OFF_BASE + 4 * (V + 1))
      return word_t'(((w - OFF_BASE) >> 2) * DEG);
    if (w >= NBR_BASE && w < NBR_BASE + 4 * V * DEG)
      return nbr_of((w - NBR_BASE) >> 2);
    return w ^ 32'h5A5A_0000;
  endfunction

  function automatic line_t mem_line(addr_t a);
    line_t l;
    for (int i = 0; i < WORDS_PER_LINE; i++)
      l[i*WORD_W +: WORD_W] = mem_word(line_of(a) + addr_t'(4 * i));
    return l;
  endfunction
endpackage
