// tm_pkg: types and constants shared by the Transmuter cluster with the
// data-indirect prefetcher.
//
// The 64-byte line and 16-words-per-line geometry follow the cache
// parameters of the evaluated configuration. The 32-bit address and word,
// the request/response record layout, the DIG configuration record and the
// cache-colouring function (line-address interleaving across banks) are
// choices of this design; the paper does not fix them.
package tm_pkg;

  localparam int ADDR_W         = 32;
  localparam int WORD_W         = 32;
  localparam int LINE_BYTES     = 64;
  localparam int LINE_W         = LINE_BYTES * 8;
  localparam int WORDS_PER_LINE = LINE_BYTES / (WORD_W / 8);
  localparam int OFF_W          = $clog2(LINE_BYTES);       // 6 byte-offset bits
  localparam int WOFF_W         = $clog2(WORDS_PER_LINE);   // 4 word-offset bits
  localparam int SRC_W          = 8;    // requester id carried through the networks
  localparam int NODE_W         = 3;    // DIG node index
  localparam int EDGE_W         = 3;    // DIG edge index
  localparam int GPE_W          = 6;    // GPE id inside a tile (PFHR GPE-ID field)
  localparam int DIST_W         = 6;    // prefetch distance register

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [WORD_W-1:0] word_t;
  typedef logic [LINE_W-1:0] line_t;

  typedef enum logic [1:0] {
    OP_LOAD  = 2'd0,   // read; the response carries the word and its whole line
    OP_STORE = 2'd1    // write one word, posted (no response)
  } mem_op_e;

  typedef struct packed {
    logic [SRC_W-1:0] src;     // who sent it: responses are routed back by this
    word_t            wdata;
    mem_op_e          op;
    addr_t            addr;    // byte address, kept in the low bits on purpose
  } mem_req_t;

  typedef struct packed {
    logic [SRC_W-1:0] src;
    line_t            line;
    word_t            word;
    addr_t            addr;
  } mem_rsp_t;

  localparam int MEM_REQ_W = $bits(mem_req_t);
  localparam int MEM_RSP_W = $bits(mem_rsp_t);

  // A prefetch request travelling between PF engines (handshake network).
  typedef struct packed {
    logic [GPE_W-1:0]  gpe;    // GPE whose demand access started the sequence
    logic [NODE_W-1:0] node;   // DIG node the address belongs to
    addr_t             addr;   // byte address of the awaited element
  } pf_req_t;

  localparam int PF_REQ_W = $bits(pf_req_t);

  // PFHR entry: one live prefetch sequence step waiting for its line.
  typedef struct packed {
    logic              valid;
    logic [GPE_W-1:0]  gpe;
    logic [NODE_W-1:0] node;
    addr_t             addr;
  } pfhr_entry_t;

  typedef enum logic [1:0] {
    CFG_NODE = 2'd0,   // write node idx: base, bound, element size
    CFG_EDGE = 2'd1,   // write edge idx: src node, dst node, ranged
    CFG_TRIG = 2'd2,   // set trigger node and enable
    CFG_DIST = 2'd3    // set initial prefetch distance
  } cfg_kind_e;

  typedef struct packed {
    logic              we;
    cfg_kind_e         kind;
    logic [2:0]        idx;
    addr_t             base;
    addr_t             bound;      // exclusive upper byte address
    logic [1:0]        size_log2;  // element size 1/2/4/8 bytes
    logic [NODE_W-1:0] src;
    logic [NODE_W-1:0] dst;
    logic              ranged;     // 0: single-valued indirection, 1: ranged
    logic [DIST_W-1:0] pf_dist;
  } dig_cfg_t;

  // Event counters of one tile (for evaluation and for the testbenches).
  typedef struct packed {
    logic [31:0] l1_hit;
    logic [31:0] l1_miss;
    logic [31:0] l1_replace;
    logic [31:0] late_pf;
    logic [31:0] pf_evict_unused;
    logic [31:0] pf_trigger;
    logic [31:0] pf_forward;     // requests passed to another bank's engine
    logic [31:0] pf_issue;
    logic [31:0] pf_expand;      // PFHR search hits
    logic [31:0] pfhr_squash;
    logic [31:0] pf_drop;
    logic [31:0] xbar_fwd;       // GPE-to-L1 R-XBar packets passed
    logic [31:0] xbar_wait;      // and packet-cycles waiting
    logic [31:0] mode_switch;
  } tile_stats_t;

  // Cache colouring: consecutive lines go to consecutive banks.
  function automatic int unsigned color_bank(addr_t a, int unsigned nbanks);
    return int'((a >> OFF_W) % nbanks);
  endfunction

  function automatic addr_t line_of(addr_t a);
    return {a[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
  endfunction

endpackage
