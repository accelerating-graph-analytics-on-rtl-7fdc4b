// xbar: N_IN x N_OUT packet crossbar with valid/ready ports. Each input names
// its output (in_dest). Every output has a round-robin arbiter over the
// inputs that want it and a DEPTH-entry output buffer, so one packet per
// output per cycle moves and requests for the same output are serialised.
// The output also reports which input a packet came from (out_src).
// Latency: one cycle from an accepted input to the output buffer head.
//
// Two counters give the contention ratio used to study the L1-to-L2
// network: stat_fwd counts packets passed, stat_wait counts packet-cycles an
// input was valid but not taken. The arbiter kind and buffer depth are this
// design's choices. The module is used for the non-reconfigurable CrossBars,
// for the response networks, for the PF-engine handshake network and, inside
// rxbar, for the R-XBars.
module xbar #(
  parameter int N_IN  = 4,
  parameter int N_OUT = 4,
  parameter int W     = 8,
  parameter int DEPTH = 2,
  localparam int DW   = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int SW   = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_IN-1:0]  in_valid,
  input  logic [DW-1:0]    in_dest  [N_IN],
  input  logic [W-1:0]     in_data  [N_IN],
  output logic [N_IN-1:0]  in_ready,
  output logic [N_OUT-1:0] out_valid,
  output logic [W-1:0]     out_data [N_OUT],
  output logic [SW-1:0]    out_src  [N_OUT],
  input  logic [N_OUT-1:0] out_ready,
  output logic [31:0]      stat_fwd,
  output logic [31:0]      stat_wait
);

  logic [SW-1:0]    last  [N_OUT];
  logic [N_OUT-1:0] any;
  logic [SW-1:0]    pick  [N_OUT];
  logic [N_OUT-1:0] f_ready;
  logic [N_OUT-1:0] f_push;

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      any[o]  = 1'b0;
      pick[o] = '0;
      for (int k = N_IN; k >= 1; k--) begin
        int unsigned c;
        c = (int'(last[o]) + k) % N_IN;
        if (in_valid[c] && int'(in_dest[c]) == o) begin
          any[o]  = 1'b1;
          pick[o] = SW'(c);
        end
      end
      f_push[o] = any[o] && f_ready[o];
    end
    in_ready = '0;
    for (int o = 0; o < N_OUT; o++)
      if (f_push[o]) in_ready[pick[o]] = 1'b1;
  end

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    logic [SW+W-1:0] head;
    sync_fifo #(.W(SW + W), .DEPTH(DEPTH)) u_buf (
      .clk, .rst_n, .clear(1'b0),
      .push_valid(f_push[o]), .push_data({pick[o], in_data[pick[o]]}), .push_ready(f_ready[o]),
      .pop_valid(out_valid[o]), .pop_data(head), .pop_ready(out_ready[o]),
      .count()
    );
    assign out_src[o]  = head[SW+W-1:W];
    assign out_data[o] = head[W-1:0];
  end

  logic [31:0] n_fwd, n_wait;
  always_comb begin
    n_fwd  = '0;
    n_wait = '0;
    for (int i = 0; i < N_IN; i++) begin
      if (in_valid[i] && in_ready[i])  n_fwd++;
      if (in_valid[i] && !in_ready[i]) n_wait++;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_OUT; o++) last[o] <= SW'(N_IN-1);
      stat_fwd  <= '0;
      stat_wait <= '0;
    end else begin
      for (int o = 0; o < N_OUT; o++)
        if (f_push[o]) last[o] <= pick[o];
      stat_fwd  <= stat_fwd + n_fwd;
      stat_wait <= stat_wait + n_wait;
    end
  end

endmodule
