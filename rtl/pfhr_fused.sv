// pfhr_fused: the fused array of PreFetch status Handling Registers (PFHRs)
// of one tile. Each PFHR entry records one live step of a prefetch sequence:
// the address of the element whose line is awaited, its DIG node and the id
// of the GPE whose demand access started the sequence (GPE-ID).
//
// The array is split into N_ENG banks of ENTRIES entries, one bank per
// L1/PF engine, each bank with a single read/write port (paper). The mode
// input selects how the banks are used:
//   private (shared=0): engine e owns bank e; all engines work in parallel.
//   shared  (shared=1): one engine per cycle, chosen round robin among the
//                       requesters, works on the whole array.
// Two operations, both answered in the cycle of the grant (CAM search):
//   search (req_search=1): find an entry waiting for the same 64-byte line,
//          return it and free it.
//   alloc  (req_search=0): write the request into a free entry; if there is
//          none, squash (overwrite) an entry with the same GPE-ID; if there is
//          none either, the allocation fails (hit=0). Only matching GPE-ID
//          entries are ever squashed (paper).
// Lowest index wins every choice (free entry, squash victim, search hit);
// this tie-break is this design's choice. clear empties the array (used on a
// cache-mode switch).
module pfhr_fused
  import tm_pkg::*;
#(
  parameter int N_ENG   = 16,
  parameter int ENTRIES = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shared,
  input  logic             clear,
  input  logic [N_ENG-1:0] req_valid,
  input  logic [N_ENG-1:0] req_search,
  input  pf_req_t          req        [N_ENG],
  output logic [N_ENG-1:0] gnt,
  output logic [N_ENG-1:0] hit,        // search found / alloc succeeded
  output logic [N_ENG-1:0] squash,     // alloc overwrote a live entry
  output pf_req_t          hit_entry  [N_ENG]
);

  localparam int EW = $clog2(ENTRIES);
  localparam int BW = (N_ENG > 1) ? $clog2(N_ENG) : 1;

  pfhr_entry_t ent [N_ENG][ENTRIES];
  logic [BW-1:0] rr_last;

  // ---------------- round-robin winner for shared mode ----------------
  logic          win_any;
  logic [BW-1:0] win;
  always_comb begin
    win_any = 1'b0;
    win     = '0;
    for (int k = N_ENG; k >= 1; k--) begin
      int unsigned c;
      c = (int'(rr_last) + k) % N_ENG;
      if (req_valid[c]) begin
        win_any = 1'b1;
        win     = BW'(c);
      end
    end
  end

  // ---------------- per-bank lookup with the operation routed to it ----------------
  logic [N_ENG-1:0] b_act, b_srch;
  pf_req_t          b_req [N_ENG];
  logic [N_ENG-1:0] b_match, b_free, b_same;
  logic [EW-1:0]    b_mi [N_ENG];
  logic [EW-1:0]    b_fi [N_ENG];
  logic [EW-1:0]    b_si [N_ENG];
  always_comb begin
    for (int b = 0; b < N_ENG; b++) begin
      if (shared) begin
        b_act[b]  = win_any;
        b_srch[b] = req_search[win];
        b_req[b]  = req[win];
      end else begin
        b_act[b]  = req_valid[b];
        b_srch[b] = req_search[b];
        b_req[b]  = req[b];
      end
      b_match[b] = 1'b0; b_mi[b] = '0;
      b_free[b]  = 1'b0; b_fi[b] = '0;
      b_same[b]  = 1'b0; b_si[b] = '0;
      for (int i = ENTRIES-1; i >= 0; i--) begin
        if (ent[b][i].valid && line_of(ent[b][i].addr) == line_of(b_req[b].addr)) begin
          b_match[b] = 1'b1; b_mi[b] = EW'(i);
        end
        if (!ent[b][i].valid) begin
          b_free[b] = 1'b1; b_fi[b] = EW'(i);
        end
        if (ent[b][i].valid && ent[b][i].gpe == b_req[b].gpe) begin
          b_same[b] = 1'b1; b_si[b] = EW'(i);
        end
      end
    end
  end

  // ---------------- choose the bank that performs the update ----------------
  // upd[b]: bank b writes/frees entry upd_i[b]; upd_alloc[b]: write, else free.
  logic [N_ENG-1:0] upd, upd_alloc;
  logic [EW-1:0]    upd_i [N_ENG];
  logic             sh_match, sh_free, sh_same;
  logic [BW-1:0]    sh_mb, sh_fb, sh_sb;
  always_comb begin
    upd = '0; upd_alloc = '0;
    for (int b = 0; b < N_ENG; b++) upd_i[b] = '0;
    gnt = '0; hit = '0; squash = '0;
    for (int e = 0; e < N_ENG; e++) hit_entry[e] = '0;
    sh_match = 1'b0; sh_free = 1'b0; sh_same = 1'b0;
    sh_mb = '0; sh_fb = '0; sh_sb = '0;
    for (int b = N_ENG-1; b >= 0; b--) begin
      if (b_match[b]) begin sh_match = 1'b1; sh_mb = BW'(b); end
      if (b_free[b])  begin sh_free  = 1'b1; sh_fb = BW'(b); end
      if (b_same[b])  begin sh_same  = 1'b1; sh_sb = BW'(b); end
    end
    if (!shared) begin
      for (int b = 0; b < N_ENG; b++) begin
        gnt[b] = b_act[b];
        if (b_act[b] && b_srch[b]) begin
          hit[b] = b_match[b];
          hit_entry[b] = '{gpe: ent[b][b_mi[b]].gpe, node: ent[b][b_mi[b]].node,
                           addr: ent[b][b_mi[b]].addr};
          upd[b] = b_match[b]; upd_i[b] = b_mi[b];
        end else if (b_act[b]) begin
          hit[b]       = b_free[b] || b_same[b];
          squash[b]    = !b_free[b] && b_same[b];
          upd[b]       = b_free[b] || b_same[b];
          upd_alloc[b] = 1'b1;
          upd_i[b]     = b_free[b] ? b_fi[b] : b_si[b];
        end
      end
    end else if (win_any) begin
      gnt[win] = 1'b1;
      if (req_search[win]) begin
        hit[win] = sh_match;
        hit_entry[win] = '{gpe: ent[sh_mb][b_mi[sh_mb]].gpe, node: ent[sh_mb][b_mi[sh_mb]].node,
                           addr: ent[sh_mb][b_mi[sh_mb]].addr};
        upd[sh_mb]   = sh_match; upd_i[sh_mb] = b_mi[sh_mb];
      end else begin
        hit[win]    = sh_free || sh_same;
        squash[win] = !sh_free && sh_same;
        if (sh_free) begin
          upd[sh_fb] = 1'b1; upd_alloc[sh_fb] = 1'b1; upd_i[sh_fb] = b_fi[sh_fb];
        end else if (sh_same) begin
          upd[sh_sb] = 1'b1; upd_alloc[sh_sb] = 1'b1; upd_i[sh_sb] = b_si[sh_sb];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_last <= BW'(N_ENG-1);
      for (int b = 0; b < N_ENG; b++)
        for (int i = 0; i < ENTRIES; i++) ent[b][i] <= '0;
    end else if (clear) begin
      for (int b = 0; b < N_ENG; b++)
        for (int i = 0; i < ENTRIES; i++) ent[b][i].valid <= 1'b0;
    end else begin
      if (shared && win_any) rr_last <= win;
      for (int b = 0; b < N_ENG; b++)
        if (upd[b]) begin
          if (upd_alloc[b])
            ent[b][upd_i[b]] <= '{valid: 1'b1, gpe: b_req[b].gpe, node: b_req[b].node,
                                  addr: b_req[b].addr};
          else
            ent[b][upd_i[b]].valid <= 1'b0;
        end
    end
  end

  // At most one engine is granted per cycle in shared mode.
  a_one_grant_shared: assert property (@(posedge clk) disable iff (!rst_n)
                                       shared |-> $onehot0(gnt));

endmodule
