// sync_fifo: small synchronous FIFO used by the crossbars, the PF engine and
// the work/status queues. Valid/ready on both sides; push_ready is !full, so
// the ready path never depends on the consumer in the same cycle. A push and
// a pop in the same cycle are both taken. Reset empties it.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         push_valid,
  input  logic [W-1:0] push_data,
  output logic         push_ready,
  output logic         pop_valid,
  output logic [W-1:0] pop_data,
  input  logic         pop_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd, wr;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  assign push_ready = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign pop_valid  = (cnt != '0);
  assign pop_data   = mem[rd];
  assign count      = cnt;

  logic do_push, do_pop;
  assign do_push = push_valid && push_ready;
  assign do_pop  = pop_valid && pop_ready;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd  <= '0;
      wr  <= '0;
      cnt <= '0;
    end else if (clear) begin
      rd  <= '0;
      wr  <= '0;
      cnt <= '0;
    end else begin
      if (do_push) wr <= inc(wr);
      if (do_pop)  rd <= inc(rd);
      cnt <= cnt + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  always_ff @(posedge clk)
    if (do_push) mem[wr] <= push_data;

endmodule
