// pf_engine: the prefetch (PF) engine attached to one L1 R-DCache bank. It
// holds a DIG table and the PF logic, and shares the tile's fused PFHR array
// with the other engines through its own PFHR port.
//
// How a prefetch sequence runs:
//  1. Trigger. A demand access seen on this bank that falls inside the
//     trigger node's array at element i yields a prefetch of element
//     i + distance of the same array.
//  2. Route (handshake). Every generated request goes to the engine of the
//     bank its address maps to: in shared mode by cache colouring, in
//     private mode always this engine. A request for another bank leaves on
//     hs_out (valid/ready) and is issued by that engine, never here.
//  3. Issue. Requests arriving on hs_in (first) or local ones are sent to
//     the cache's prefetch port; if the DIG node has outgoing edges the
//     request is also written into the PFHR array (alloc) so that the step
//     continues when its line arrives. A full array squashes an entry of the
//     same GPE (inside pfhr_fused).
//  4. Expand. Every line that arrives in this bank (or that a prefetch finds
//     present) is searched in the PFHR array. Each hit yields the element
//     value v; for every DIG edge leaving the entry's node a new request is
//     generated: single-valued, dst.base + v*size; ranged, the elements
//     dst[v .. v_next-1] (v_next read from the same line), at most
//     MAX_RANGE elements. The search repeats until it misses.
// The distance starts at the programmed value, grows by one when a demand
// load meets a prefetch still in flight (late) and shrinks by one when a
// prefetched line is evicted unused, within 1..DIST_MAX.
//
// What follows the paper: trigger/expand along DIG edges, adaptive distance,
// the handshake that makes the home bank's engine issue, GPE-ID tagged PFHR
// entries, shared/private use of the fused array. This design's choices:
// the edge arithmetic above, the FIFO depths, the range cap, the distance
// update rule, and that a PFHR-port conflict gives issue priority over
// search. Requests that find the generation FIFO full are dropped (counted).
module pf_engine
  import tm_pkg::*;
#(
  parameter int N_ENG     = 16,
  parameter int GEN_DEPTH = 4,
  parameter int FILL_DEPTH = 2,
  parameter int MAX_RANGE = 16,
  parameter int DIST_MAX  = 32,
  localparam int BW       = (N_ENG > 1) ? $clog2(N_ENG) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [BW-1:0]     eng_id,         // tied constant: index of this engine's bank
  input  logic              shared,
  input  logic              clear,          // mode switch: drop queued work
  input  dig_cfg_t          cfg,
  // snoop from the cache bank
  input  logic              snp_dem_valid,
  input  addr_t             snp_dem_addr,
  input  logic [SRC_W-1:0]  snp_dem_src,
  input  logic              snp_line_valid,
  input  addr_t             snp_line_addr,
  input  line_t             snp_line_data,
  input  logic              evt_late_pf,
  input  logic              evt_pf_evict,
  // prefetch port of the cache bank
  output logic              pf_valid,
  output addr_t             pf_addr,
  input  logic              pf_ready,
  // handshake network
  output logic              hs_out_valid,
  output logic [BW-1:0]     hs_out_dest,
  output pf_req_t           hs_out,
  input  logic              hs_out_ready,
  input  logic              hs_in_valid,
  input  pf_req_t           hs_in,
  output logic              hs_in_ready,
  // fused PFHR port
  output logic              pfhr_req_valid,
  output logic              pfhr_req_search,
  output pf_req_t           pfhr_req,
  input  logic              pfhr_gnt,
  input  logic              pfhr_hit,
  input  pf_req_t           pfhr_hit_entry,
  // status
  output logic [DIST_W-1:0] cur_dist,
  output logic              ev_trigger,
  output logic              ev_forward,
  output logic              ev_issue,
  output logic              ev_expand,
  output logic              ev_drop
);

  localparam int NODES = 1 << NODE_W;
  localparam int EDGES = 1 << EDGE_W;

  // ---------------- DIG table ----------------
  addr_t             n_base  [NODES];
  addr_t             n_bound [NODES];
  logic [1:0]        n_size  [NODES];
  logic [NODES-1:0]  n_out;
  logic [EDGES-1:0]  e_valid, e_ranged;
  logic [NODE_W-1:0] e_src [EDGES];
  logic [NODE_W-1:0] e_dst [EDGES];
  logic              trig_en;
  logic [NODE_W-1:0] trig_node;
  logic              dist_we;
  logic [DIST_W-1:0] dist_val;

  dig_table #(.NODES(NODES), .EDGES(EDGES)) u_dig (
    .clk, .rst_n, .cfg,
    .node_base(n_base), .node_bound(n_bound), .node_size(n_size), .node_has_out(n_out),
    .edge_valid(e_valid), .edge_src(e_src), .edge_dst(e_dst), .edge_ranged(e_ranged),
    .trig_en, .trig_node, .dist_we, .dist_val
  );

  // ---------------- adaptive distance ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cur_dist <= DIST_W'(1);
    else if (dist_we) cur_dist <= (dist_val == '0) ? DIST_W'(1) : dist_val;
    else if (evt_late_pf && !evt_pf_evict && int'(cur_dist) < DIST_MAX) cur_dist <= cur_dist + 1'b1;
    else if (evt_pf_evict && !evt_late_pf && cur_dist > DIST_W'(1))      cur_dist <= cur_dist - 1'b1;
  end

  // ---------------- generation FIFO ----------------
  logic    gen_push, gen_push_ready, gen_pop_valid, gen_pop;
  pf_req_t gen_in, gen_head;
  sync_fifo #(.W(PF_REQ_W), .DEPTH(GEN_DEPTH)) u_gen (
    .clk, .rst_n, .clear,
    .push_valid(gen_push), .push_data(gen_in), .push_ready(gen_push_ready),
    .pop_valid(gen_pop_valid), .pop_data(gen_head), .pop_ready(gen_pop), .count()
  );

  // ---------------- trigger ----------------
  logic    trig_hit;
  addr_t   trig_target;
  addr_t   last_trig;
  always_comb begin
    addr_t tb, idx;
    tb          = n_base[trig_node];
    idx         = (snp_dem_addr - tb) >> n_size[trig_node];
    trig_target = tb + ((idx + addr_t'(cur_dist)) << n_size[trig_node]);
    trig_hit    = trig_en && snp_dem_valid &&
                  snp_dem_addr >= tb && snp_dem_addr < n_bound[trig_node] &&
                  trig_target < n_bound[trig_node] &&
                  snp_dem_addr != last_trig;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) last_trig <= '1;
    else if (trig_hit) last_trig <= snp_dem_addr;

  // ---------------- expansion FSM ----------------
  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_EDGE, S_RANGE} xstate_e;
  xstate_e           xs;
  logic              fill_valid, fill_pop;
  logic [ADDR_W+LINE_W-1:0] fill_head;
  addr_t             fill_addr;
  line_t             fill_data;
  pf_req_t           x_ent;         // PFHR entry being expanded
  addr_t             x_v0, x_v1;
  logic              x_v1_ok;
  logic [EDGE_W-1:0] x_e;
  addr_t             r_cur, r_end;  // ranged: current element address, end
  logic [$clog2(MAX_RANGE+1)-1:0] r_cnt;
  logic              x_push;
  pf_req_t           x_req;
  logic              fill_drop;
  logic [$clog2(FILL_DEPTH+1)-1:0] fill_cnt;

  sync_fifo #(.W(ADDR_W + LINE_W), .DEPTH(FILL_DEPTH)) u_fill (
    .clk, .rst_n, .clear,
    .push_valid(snp_line_valid), .push_data({snp_line_addr, snp_line_data}), .push_ready(),
    .pop_valid(fill_valid), .pop_data(fill_head), .pop_ready(fill_pop), .count(fill_cnt)
  );
  assign fill_addr = fill_head[ADDR_W+LINE_W-1:LINE_W];
  assign fill_data = fill_head[LINE_W-1:0];
  assign fill_drop = snp_line_valid && fill_cnt == ($clog2(FILL_DEPTH+1))'(FILL_DEPTH);

  function automatic addr_t elem_val(line_t l, addr_t a, logic [1:0] sz);
    word_t w;
    w = l[a[OFF_W-1:2]*WORD_W +: WORD_W];
    unique case (sz)
      2'd0:    return addr_t'(w[a[1:0]*8 +: 8]);
      2'd1:    return addr_t'(w[a[1]*16 +: 16]);
      default: return addr_t'(w);
    endcase
  endfunction

  // Issue stage signals (declared before the FSM uses the PFHR port).
  logic    iss_valid, iss_from_hs, iss_need_pfhr, iss_fire;
  pf_req_t iss_req;
  logic    loc_home;

  always_comb begin
    loc_home = !shared || (color_bank(gen_head.addr, N_ENG) == int'(eng_id));
    iss_from_hs = hs_in_valid;
    iss_req     = hs_in_valid ? hs_in : gen_head;
    iss_valid   = hs_in_valid || (gen_pop_valid && loc_home);
    iss_need_pfhr = n_out[iss_req.node];
  end

  // PFHR port: issue (alloc) has priority over search.
  logic want_alloc, want_search;
  assign want_alloc  = iss_valid && pf_ready && iss_need_pfhr;
  assign want_search = (xs == S_SEARCH) && !want_alloc;
  always_comb begin
    pfhr_req_valid  = want_alloc || want_search;
    pfhr_req_search = !want_alloc;
    pfhr_req        = want_alloc ? iss_req : '{gpe: '0, node: '0, addr: fill_addr};
  end

  assign iss_fire = iss_valid && pf_ready && (!iss_need_pfhr || pfhr_gnt);
  assign pf_valid = iss_valid && (!iss_need_pfhr || pfhr_gnt);
  assign pf_addr  = iss_req.addr;
  assign hs_in_ready = iss_fire && iss_from_hs;

  // Forward to the home engine.
  assign hs_out_valid = gen_pop_valid && !loc_home;
  assign hs_out_dest  = BW'(color_bank(gen_head.addr, N_ENG));
  assign hs_out       = gen_head;
  assign gen_pop      = (hs_out_valid && hs_out_ready) || (iss_fire && !iss_from_hs);

  // Expansion request generation.
  logic [NODE_W-1:0] x_dst;
  always_comb begin
    x_dst  = e_dst[x_e];
    x_push = 1'b0;
    x_req  = '{gpe: x_ent.gpe, node: x_dst, addr: '0};
    if (xs == S_EDGE && e_valid[x_e] && e_src[x_e] == x_ent.node && !e_ranged[x_e]) begin
      x_req.addr = n_base[x_dst] + (x_v0 << n_size[x_dst]);
      x_push     = x_req.addr < n_bound[x_dst];
    end else if (xs == S_RANGE) begin
      x_req.addr = r_cur;
      x_push     = 1'b1;
    end
  end

  always_comb begin
    gen_push = 1'b0;
    gen_in   = x_req;
    if (x_push) gen_push = gen_push_ready;
    else if (trig_hit) begin
      gen_push = gen_push_ready;
      gen_in   = '{gpe: snp_dem_src[GPE_W-1:0], node: trig_node, addr: trig_target};
    end
  end

  assign fill_pop = (xs == S_SEARCH) && want_search && pfhr_gnt && !pfhr_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs      <= S_IDLE;
      x_ent   <= '0;
      x_v0    <= '0;
      x_v1    <= '0;
      x_v1_ok <= 1'b0;
      x_e     <= '0;
      r_cur   <= '0;
      r_end   <= '0;
      r_cnt   <= '0;
    end else if (clear) begin
      xs <= S_IDLE;
    end else begin
      unique case (xs)
        S_IDLE: if (fill_valid) xs <= S_SEARCH;
        S_SEARCH: if (want_search && pfhr_gnt) begin
          if (pfhr_hit) begin
            addr_t nxt;
            x_ent   <= pfhr_hit_entry;
            x_v0    <= elem_val(fill_data, pfhr_hit_entry.addr, n_size[pfhr_hit_entry.node]);
            nxt      = pfhr_hit_entry.addr + (addr_t'(1) << n_size[pfhr_hit_entry.node]);
            x_v1    <= elem_val(fill_data, nxt, n_size[pfhr_hit_entry.node]);
            x_v1_ok <= line_of(nxt) == line_of(pfhr_hit_entry.addr);
            x_e     <= '0;
            xs      <= S_EDGE;
          end else begin
            xs <= S_IDLE;
          end
        end
        S_EDGE: begin
          logic adv;
          adv = 1'b1;
          if (e_valid[x_e] && e_src[x_e] == x_ent.node) begin
            if (!e_ranged[x_e]) begin
              if (x_push && !gen_push_ready) adv = 1'b0;   // wait for room
            end else if (x_v1_ok && x_v1 > x_v0) begin
              r_cur <= n_base[x_dst] + (x_v0 << n_size[x_dst]);
              r_end <= n_base[x_dst] + (x_v1 << n_size[x_dst]);
              r_cnt <= '0;
              xs    <= S_RANGE;
              adv   = 1'b0;
            end
          end
          if (adv) begin
            if (x_e == EDGE_W'(EDGES-1)) xs <= S_SEARCH;
            x_e <= x_e + 1'b1;
          end
        end
        S_RANGE: if (gen_push_ready) begin
          addr_t nx;
          nx     = r_cur + (addr_t'(1) << n_size[x_dst]);
          r_cur <= nx;
          r_cnt <= r_cnt + 1'b1;
          if (nx >= r_end || nx >= n_bound[x_dst] || int'(r_cnt) == MAX_RANGE-1) begin
            if (x_e == EDGE_W'(EDGES-1)) xs <= S_SEARCH;
            else                        xs <= S_EDGE;
            x_e <= x_e + 1'b1;
          end
        end
        default: xs <= S_IDLE;
      endcase
    end
  end

  assign ev_trigger = trig_hit && !x_push && gen_push_ready;
  assign ev_forward = hs_out_valid && hs_out_ready;
  assign ev_issue   = iss_fire;
  assign ev_expand  = want_search && pfhr_gnt && pfhr_hit;
  assign ev_drop    = (trig_hit && !(gen_push && !x_push)) || fill_drop;

endmodule
