// work_status_queue: the work/status queue interface between a tile's LCP
// and its GPEs. For every GPE there is a work FIFO (LCP pushes work items,
// the GPE pops them) and a status FIFO (the GPE pushes, the LCP pops). On
// the cores these FIFOs sit at memory-mapped addresses; the address decode
// belongs to the core side and is not part of this block, which exposes the
// FIFOs directly. The LCP selects the GPE by index for both of its ports.
// All ports are valid/ready; depth and width are this design's choices.
module work_status_queue
  import tm_pkg::*;
#(
  parameter int N_GPE = 16,
  parameter int DEPTH = 4,
  localparam int GW   = (N_GPE > 1) ? $clog2(N_GPE) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // LCP side
  input  logic             wq_push_valid,
  input  logic [GW-1:0]    wq_push_gpe,
  input  word_t            wq_push_data,
  output logic             wq_push_ready,
  input  logic [GW-1:0]    sq_pop_gpe,
  output logic             sq_pop_valid,
  output word_t            sq_pop_data,
  input  logic             sq_pop_ready,
  // GPE side
  output logic [N_GPE-1:0] wq_pop_valid,
  output word_t            wq_pop_data [N_GPE],
  input  logic [N_GPE-1:0] wq_pop_ready,
  input  logic [N_GPE-1:0] sq_push_valid,
  input  word_t            sq_push_data [N_GPE],
  output logic [N_GPE-1:0] sq_push_ready
);
  logic [N_GPE-1:0] w_ready, s_valid;
  word_t            s_data [N_GPE];

  for (genvar g = 0; g < N_GPE; g++) begin : g_q
    sync_fifo #(.W(WORD_W), .DEPTH(DEPTH)) u_work (
      .clk, .rst_n, .clear(1'b0),
      .push_valid(wq_push_valid && wq_push_gpe == GW'(g)), .push_data(wq_push_data),
      .push_ready(w_ready[g]),
      .pop_valid(wq_pop_valid[g]), .pop_data(wq_pop_data[g]), .pop_ready(wq_pop_ready[g]),
      .count()
    );
    sync_fifo #(.W(WORD_W), .DEPTH(DEPTH)) u_status (
      .clk, .rst_n, .clear(1'b0),
      .push_valid(sq_push_valid[g]), .push_data(sq_push_data[g]), .push_ready(sq_push_ready[g]),
      .pop_valid(s_valid[g]), .pop_data(s_data[g]),
      .pop_ready(sq_pop_ready && sq_pop_gpe == GW'(g)),
      .count()
    );
  end

  assign wq_push_ready = w_ready[wq_push_gpe];
  assign sq_pop_valid  = s_valid[sq_pop_gpe];
  assign sq_pop_data   = s_data[sq_pop_gpe];

endmodule
