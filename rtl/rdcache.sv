// rdcache: one reconfigurable data-cache bank (R-DCache). The same module is
// the L1 bank next to each GPE (16 kB), an L2 bank (4 kB) and the LCP's D$.
//
// Organisation (per the evaluated configuration): set-associative, 64-byte
// lines, one array port, non-coherent, MSHRs for outstanding line misses.
// Demand accesses are word-granular: a load returns the addressed word and,
// for an upper level, the whole line. Prefetch requests come on their own
// port from the PF engine; they allocate an MSHR but produce no response.
//
// Each cycle the single array port does one of, in priority order:
//   1. a line fill from below (frees its MSHR, answers the waiting load),
//   2. a demand load/store from above,
//   3. a prefetch.
// Hit latency is one cycle: the response is registered. Stores are
// write-through, no write-allocate, sent below through a one-entry slot.
// Each MSHR holds one waiting load; a load that meets an MSHR opened by a
// prefetch attaches to it (a "late" prefetch), a second one waits.
// Replacement takes an invalid way first, otherwise a per-set round-robin
// victim. Write policy, replacement and MSHR target count are choices of
// this design; size, ways, line size, MSHR count and the 1-cycle access are
// the paper's.
//
// Snoop outputs feed the PF engine: every accepted demand access
// (snp_dem_*), every line that arrives from below or that a prefetch finds
// already present (snp_line_*), plus events for a late prefetch, for the
// eviction of a prefetched line never used, and for any replacement.
module rdcache
  import tm_pkg::*;
#(
  parameter int                SIZE_BYTES = 16384,
  parameter int                WAYS       = 4,
  parameter int                MSHRS      = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SRC_W-1:0] cache_id,       // tied constant: source ID of this bank's misses
  input  logic             flush,          // invalidate every line (mode switch)
  // demand side (from GPE R-XBar, or from the L1-to-L2 R-XBar for an L2 bank)
  input  logic             req_valid,
  input  mem_req_t         req,
  output logic             req_ready,
  output logic             rsp_valid,
  output mem_rsp_t         rsp,
  input  logic             rsp_ready,
  // prefetch port (from the PF engine)
  input  logic             pf_valid,
  input  addr_t            pf_addr,
  output logic             pf_ready,
  // next level
  output logic             dn_req_valid,
  output mem_req_t         dn_req,
  input  logic             dn_req_ready,
  input  logic             dn_rsp_valid,
  input  mem_rsp_t         dn_rsp,
  output logic             dn_rsp_ready,
  // snoop / event outputs
  output logic             snp_dem_valid,
  output addr_t            snp_dem_addr,
  output logic [SRC_W-1:0] snp_dem_src,
  output logic             snp_line_valid,
  output addr_t            snp_line_addr,
  output line_t            snp_line_data,
  output logic             evt_hit,
  output logic             evt_miss,
  output logic             evt_late_pf,
  output logic             evt_pf_evict,
  output logic             evt_replace
);

  localparam int SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int IDX_W = $clog2(SETS);
  localparam int TAG_W = ADDR_W - OFF_W - IDX_W;
  localparam int WAY_W = $clog2(WAYS);
  localparam int MS_W  = $clog2(MSHRS);

  typedef struct packed {
    logic             valid;
    logic             issued;    // line request already sent below
    logic             has_tgt;   // a demand load waits for this line
    logic [SRC_W-1:0] tsrc;
    addr_t            taddr;
    addr_t            line;
  } mshr_t;

  logic [WAYS-1:0]  vld      [SETS];
  logic [WAYS-1:0]  pfb      [SETS];   // line brought by a prefetch, not yet used
  logic [WAY_W-1:0] vptr     [SETS];
  logic [TAG_W-1:0] tags     [SETS][WAYS];
  line_t            data     [SETS][WAYS];
  mshr_t            mshr     [MSHRS];

  logic             st_valid;
  mem_req_t         st_req;
  logic             rsp_q_valid;
  mem_rsp_t         rsp_q;

  function automatic logic [IDX_W-1:0] idx_of(addr_t a);
    return a[OFF_W +: IDX_W];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(addr_t a);
    return a[ADDR_W-1 -: TAG_W];
  endfunction
  function automatic word_t word_at(line_t l, addr_t a);
    return l[a[OFF_W-1:2]*WORD_W +: WORD_W];
  endfunction

  logic stall;
  assign stall = rsp_q_valid && !rsp_ready;

  // ---------------- fill path ----------------
  logic             do_fill;
  logic             f_found;
  logic [MS_W-1:0]  f_ms;
  logic [IDX_W-1:0] f_idx;
  logic [WAY_W-1:0] f_way;
  logic             f_has_inv;
  always_comb begin
    f_found = 1'b0;
    f_ms    = '0;
    for (int i = MSHRS-1; i >= 0; i--)
      if (mshr[i].valid && mshr[i].issued && mshr[i].line == line_of(dn_rsp.addr)) begin
        f_found = 1'b1;
        f_ms    = MS_W'(i);
      end
    f_idx     = idx_of(dn_rsp.addr);
    f_has_inv = 1'b0;
    f_way     = vptr[f_idx];
    for (int w = WAYS-1; w >= 0; w--)
      if (!vld[f_idx][w]) begin
        f_has_inv = 1'b1;
        f_way     = WAY_W'(w);
      end
  end
  assign dn_rsp_ready = !stall;
  assign do_fill      = dn_rsp_valid && !stall;

  // ---------------- demand path ----------------
  logic [IDX_W-1:0] r_idx;
  logic             r_hit;
  logic [WAY_W-1:0] r_way;
  logic             r_mmatch;
  logic [MS_W-1:0]  r_mi;
  logic             m_free;
  logic [MS_W-1:0]  m_fi;
  always_comb begin
    r_idx = idx_of(req.addr);
    r_hit = 1'b0;
    r_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (vld[r_idx][w] && tags[r_idx][w] == tag_of(req.addr)) begin
        r_hit = 1'b1;
        r_way = WAY_W'(w);
      end
    r_mmatch = 1'b0;
    r_mi     = '0;
    for (int i = MSHRS-1; i >= 0; i--)
      if (mshr[i].valid && mshr[i].line == line_of(req.addr)) begin
        r_mmatch = 1'b1;
        r_mi     = MS_W'(i);
      end
    m_free = 1'b0;
    m_fi   = '0;
    for (int i = MSHRS-1; i >= 0; i--)
      if (!mshr[i].valid) begin
        m_free = 1'b1;
        m_fi   = MS_W'(i);
      end
  end

  always_comb begin
    req_ready = 1'b0;
    if (!do_fill && !stall) begin
      if (req.op == OP_STORE)
        req_ready = !st_valid && !r_mmatch;
      else if (r_hit)
        req_ready = 1'b1;
      else if (r_mmatch)
        req_ready = !mshr[r_mi].has_tgt;
      else
        req_ready = m_free;
    end
  end
  logic req_fire;
  assign req_fire = req_valid && req_ready;

  // ---------------- prefetch path ----------------
  logic [IDX_W-1:0] p_idx;
  logic             p_hit;
  logic [WAY_W-1:0] p_way;
  logic             p_mmatch;
  always_comb begin
    p_idx = idx_of(pf_addr);
    p_hit = 1'b0;
    p_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (vld[p_idx][w] && tags[p_idx][w] == tag_of(pf_addr)) begin
        p_hit = 1'b1;
        p_way = WAY_W'(w);
      end
    p_mmatch = 1'b0;
    for (int i = 0; i < MSHRS; i++)
      if (mshr[i].valid && mshr[i].line == line_of(pf_addr)) p_mmatch = 1'b1;
  end
  assign pf_ready = !do_fill && !stall && !req_fire && (p_hit || p_mmatch || m_free);
  logic pf_fire;
  assign pf_fire = pf_valid && pf_ready;

  // ---------------- downstream issue ----------------
  logic            u_any;
  logic [MS_W-1:0] u_i;
  always_comb begin
    u_any = 1'b0;
    u_i   = '0;
    for (int i = MSHRS-1; i >= 0; i--)
      if (mshr[i].valid && !mshr[i].issued) begin
        u_any = 1'b1;
        u_i   = MS_W'(i);
      end
    dn_req_valid = st_valid || u_any;
    if (st_valid) dn_req = st_req;
    else begin
      dn_req       = '0;
      dn_req.src   = cache_id;
      dn_req.op    = OP_LOAD;
      dn_req.addr  = mshr[u_i].line;
    end
  end

  // ---------------- events ----------------
  always_comb begin
    snp_dem_valid  = req_fire;
    snp_dem_addr   = req.addr;
    snp_dem_src    = req.src;
    snp_line_valid = (do_fill && f_found) || (pf_fire && p_hit);
    snp_line_addr  = do_fill ? line_of(dn_rsp.addr) : line_of(pf_addr);
    snp_line_data  = do_fill ? dn_rsp.line : data[p_idx][p_way];
    evt_hit        = req_fire && req.op == OP_LOAD && r_hit;
    evt_miss       = req_fire && req.op == OP_LOAD && !r_hit;
    evt_late_pf    = req_fire && req.op == OP_LOAD && !r_hit && r_mmatch;
    evt_replace    = do_fill && f_found && !f_has_inv;
    evt_pf_evict   = evt_replace && pfb[f_idx][f_way];
  end

  assign rsp_valid = rsp_q_valid;
  assign rsp       = rsp_q;

  // ---------------- state: control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vld[s]  <= '0;
        pfb[s]  <= '0;
        vptr[s] <= '0;
      end
      for (int i = 0; i < MSHRS; i++) mshr[i] <= '0;
      st_valid    <= 1'b0;
      st_req      <= '0;
      rsp_q_valid <= 1'b0;
      rsp_q       <= '0;
    end else begin
      if (rsp_q_valid && rsp_ready) rsp_q_valid <= 1'b0;
      // downstream issue
      if (dn_req_valid && dn_req_ready) begin
        if (st_valid) st_valid <= 1'b0;
        else          mshr[u_i].issued <= 1'b1;
      end
      if (do_fill && f_found) begin
        vld[f_idx][f_way] <= 1'b1;
        pfb[f_idx][f_way] <= !mshr[f_ms].has_tgt;
        if (!f_has_inv) vptr[f_idx] <= vptr[f_idx] + 1'b1;
        mshr[f_ms].valid <= 1'b0;
        if (mshr[f_ms].has_tgt) begin
          rsp_q_valid <= 1'b1;
          rsp_q.src   <= mshr[f_ms].tsrc;
          rsp_q.addr  <= mshr[f_ms].taddr;
          rsp_q.line  <= dn_rsp.line;
          rsp_q.word  <= word_at(dn_rsp.line, mshr[f_ms].taddr);
        end
      end
      if (req_fire) begin
        if (req.op == OP_STORE) begin
          st_valid <= 1'b1;
          st_req   <= req;
        end else if (r_hit) begin
          pfb[r_idx][r_way] <= 1'b0;
          rsp_q_valid <= 1'b1;
          rsp_q.src   <= req.src;
          rsp_q.addr  <= req.addr;
          rsp_q.line  <= data[r_idx][r_way];
          rsp_q.word  <= word_at(data[r_idx][r_way], req.addr);
        end else if (r_mmatch) begin
          mshr[r_mi].has_tgt <= 1'b1;
          mshr[r_mi].tsrc    <= req.src;
          mshr[r_mi].taddr   <= req.addr;
        end else begin
          mshr[m_fi] <= '{valid: 1'b1, issued: 1'b0, has_tgt: 1'b1, tsrc: req.src,
                          taddr: req.addr, line: line_of(req.addr)};
        end
      end
      if (pf_fire && !p_hit && !p_mmatch)
        mshr[m_fi] <= '{valid: 1'b1, issued: 1'b0, has_tgt: 1'b0, tsrc: '0,
                        taddr: pf_addr, line: line_of(pf_addr)};
      if (flush) begin
        for (int s = 0; s < SETS; s++) begin
          vld[s] <= '0;
          pfb[s] <= '0;
        end
      end
    end
  end

  // ---------------- state: arrays (no reset, valid bits guard them) ----------------
  always_ff @(posedge clk) begin
    if (do_fill && f_found) begin
      tags[f_idx][f_way] <= tag_of(dn_rsp.addr);
      data[f_idx][f_way] <= dn_rsp.line;
    end else if (req_fire && req.op == OP_STORE && r_hit)
      data[r_idx][r_way][req.addr[OFF_W-1:2]*WORD_W +: WORD_W] <= req.wdata;
  end

  // A line fill must always find the MSHR that requested it.
  a_fill_has_mshr: assert property (@(posedge clk) disable iff (!rst_n)
                                    do_fill |-> f_found);

endmodule
