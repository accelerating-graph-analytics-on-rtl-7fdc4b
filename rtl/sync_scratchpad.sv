// sync_scratchpad: the small, fast cluster-wide scratchpad that holds
// synchronisation variables. A single-ported word memory: one request per
// cycle, a load is answered one cycle later (registered response carrying
// the requester's src), a store is posted. Response back-pressure holds the
// request port. The size (WORDS) is this design's choice; the paper only
// calls the scratchpad small and fast. Addresses wrap modulo the size.
module sync_scratchpad
  import tm_pkg::*;
#(
  parameter int WORDS = 1024
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
  localparam int AW = $clog2(WORDS);
  word_t mem [WORDS];
  logic  [AW-1:0] a;
  assign a         = req.addr[AW+1:2];
  assign req_ready = !rsp_valid || rsp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if (req_valid && req_ready && req.op == OP_LOAD) begin
        rsp_valid <= 1'b1;
        rsp.src   <= req.src;
        rsp.addr  <= req.addr;
        rsp.word  <= mem[a];
        rsp.line  <= '0;
      end
    end
  end

  always_ff @(posedge clk)
    if (req_valid && req_ready && req.op == OP_STORE) mem[a] <= req.wdata;

endmodule
