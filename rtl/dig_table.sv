// dig_table: storage for the Data Indirection Graph (DIG) that programs one
// PF engine. A DIG node describes one array of the program (base address,
// exclusive bound, element size); a DIG edge says that the values of the
// source array index the destination array, either one element per value
// (single-valued indirection) or a range between two consecutive values
// (ranged indirection, e.g. a CSC offset array into its edge array). One
// node is the trigger: demand accesses to it start prefetch sequences.
//
// The table is written through a configuration record (one write per
// cycle, any engine listening). All contents are visible as outputs and are
// read combinationally by the PF logic. Table sizes and field layout are
// this design's; the paper only names the table.
module dig_table
  import tm_pkg::*;
#(
  parameter int NODES = 8,
  parameter int EDGES = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  dig_cfg_t          cfg,
  output addr_t             node_base  [NODES],
  output addr_t             node_bound [NODES],
  output logic [1:0]        node_size  [NODES],
  output logic [NODES-1:0]  node_has_out,        // node is the source of an edge
  output logic [EDGES-1:0]  edge_valid,
  output logic [NODE_W-1:0] edge_src   [EDGES],
  output logic [NODE_W-1:0] edge_dst   [EDGES],
  output logic [EDGES-1:0]  edge_ranged,
  output logic              trig_en,
  output logic [NODE_W-1:0] trig_node,
  output logic              dist_we,              // pulse: a new initial distance
  output logic [DIST_W-1:0] dist_val
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < NODES; n++) begin
        node_base[n]  <= '0;
        node_bound[n] <= '0;
        node_size[n]  <= '0;
      end
      for (int e = 0; e < EDGES; e++) begin
        edge_src[e] <= '0;
        edge_dst[e] <= '0;
      end
      edge_valid  <= '0;
      edge_ranged <= '0;
      trig_en     <= 1'b0;
      trig_node   <= '0;
      dist_we     <= 1'b0;
      dist_val    <= '0;
    end else begin
      dist_we <= 1'b0;
      if (cfg.we) begin
        unique case (cfg.kind)
          CFG_NODE: begin
            node_base[cfg.idx[$clog2(NODES)-1:0]]  <= cfg.base;
            node_bound[cfg.idx[$clog2(NODES)-1:0]] <= cfg.bound;
            node_size[cfg.idx[$clog2(NODES)-1:0]]  <= cfg.size_log2;
          end
          CFG_EDGE: begin
            edge_valid[cfg.idx[$clog2(EDGES)-1:0]]  <= 1'b1;
            edge_src[cfg.idx[$clog2(EDGES)-1:0]]    <= cfg.src;
            edge_dst[cfg.idx[$clog2(EDGES)-1:0]]    <= cfg.dst;
            edge_ranged[cfg.idx[$clog2(EDGES)-1:0]] <= cfg.ranged;
          end
          CFG_TRIG: begin
            trig_en   <= 1'b1;
            trig_node <= cfg.src;
          end
          CFG_DIST: begin
            dist_we  <= 1'b1;
            dist_val <= cfg.pf_dist;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    node_has_out = '0;
    for (int e = 0; e < EDGES; e++)
      if (edge_valid[e]) node_has_out[edge_src[e][$clog2(NODES)-1:0]] = 1'b1;
  end

endmodule
