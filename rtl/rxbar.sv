// rxbar: reconfigurable crossbar (R-XBar). It carries memory requests from
// N_IN requesters (GPEs, or L1 banks) to N_OUT cache banks and picks each
// request's bank from the mode:
//   shared=1: cache colouring, bank = line address mod N_OUT, so every
//             requester can reach every bank and a line has one home bank;
//   shared=0: private, requester i always goes to bank i*N_OUT/N_IN.
// The address is taken from the low ADDR_W bits of the packet (the layout of
// tm_pkg::mem_req_t). Arbitration, buffering and the contention counters are
// those of xbar: one packet per output per cycle, round robin, latency one
// cycle. Interleaving on line address is this design's reading of "cache
// colouring"; the paper names the policy but not its mapping.
module rxbar
  import tm_pkg::*;
#(
  parameter int N_IN  = 16,
  parameter int N_OUT = 16,
  parameter int W     = MEM_REQ_W,
  parameter int DEPTH = 2,
  localparam int SW   = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shared,
  input  logic [N_IN-1:0]  in_valid,
  input  logic [W-1:0]     in_data  [N_IN],
  output logic [N_IN-1:0]  in_ready,
  output logic [N_OUT-1:0] out_valid,
  output logic [W-1:0]     out_data [N_OUT],
  output logic [SW-1:0]    out_src  [N_OUT],
  input  logic [N_OUT-1:0] out_ready,
  output logic [31:0]      stat_fwd,
  output logic [31:0]      stat_wait
);
  localparam int DW = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  logic [DW-1:0] dest [N_IN];
  always_comb
    for (int i = 0; i < N_IN; i++)
      dest[i] = shared ? DW'(color_bank(addr_t'(in_data[i][ADDR_W-1:0]), N_OUT))
                       : DW'((i * N_OUT) / N_IN);

  xbar #(.N_IN(N_IN), .N_OUT(N_OUT), .W(W), .DEPTH(DEPTH)) u_xbar (
    .clk, .rst_n,
    .in_valid, .in_dest(dest), .in_data, .in_ready,
    .out_valid, .out_data, .out_src, .out_ready,
    .stat_fwd, .stat_wait
  );

endmodule
