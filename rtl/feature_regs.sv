// feature_regs -- node-feature, aggregated-neighbour and edge-weight registers.
//
// x[bank][node][feature] are the input and output node registers of the layer
// pipeline.  The paper copies the output node register into the input node
// register at the start of each layer; here the two banks swap roles instead
// (layer i reads bank i%2 and writes bank 1-i%2), which has the same effect
// without a copy cycle.  Bank 0 is also where the graph's input features are
// loaded.  agg[node][feature] holds the aggregated neighbours sum_j e_ij*x_j of
// the current GraphConv layer, e[i][j] the edge weights (zero where i and j are
// not connected).
// Writeback: each cycle the adder-tree stage presents the descriptor of the
// cycle it finishes (wb) and one rounded value per tree output; output g belongs
// to output index q = wb.q0 + g, which maps to (node, feature) as
//   OP_AGG  : node = q / din_pad, feature = q % din_pad   -> agg
//   OP_NODE : node = q / dout,    feature = q % dout      -> x[!par]
//   OP_DENSE: node 0, feature q;  OP_GMP: node 0, feature g -> x[!par]
// Outputs for nodes >= n_nodes or features beyond the layer width are dropped.
// Loading (only while the decoder is idle): node features one node per cycle,
// edge weights one row of the adjacency matrix per cycle.  Writes land at the clock
// edge; reads are combinational.
module feature_regs
  import gnn_pkg::*;
#(
  parameter int MODEL = MODEL_MAXLAT,
  parameter int NMAX  = 30,
  parameter int MULTS = 8192,
  parameter int FW    = 17,
  localparam int NW   = $clog2(NMAX + 1),
  localparam int NIW  = $clog2(NMAX)
) (
  input  logic                  clk,
  // graph loading
  input  logic                  ld_node_we,
  input  logic [NIW-1:0]        ld_node_idx,
  input  logic signed [FW-1:0]  ld_node_feat [NIN],
  input  logic                  ld_edge_we,
  input  logic [NIW-1:0]        ld_edge_idx,
  input  logic [WW-1:0]         ld_edge_row [NMAX],
  // writeback from the adder-tree stage
  input  issue_t                wb,
  input  logic signed [FW-1:0]  wb_val [MULTS],
  input  logic [NW-1:0]         n_nodes,
  // register contents
  output logic signed [FW-1:0]  x   [2][NMAX][DMAX],
  output logic signed [FW-1:0]  agg [NMAX][DMAX],
  output logic [WW-1:0]         e   [NMAX][NMAX]
);
  localparam int LGA = clog2i(NMAX);   // aggregation group: one lane per neighbour

  int din, dout, lu, lg;
  always_comb begin
    din  = l_din(MODEL, int'(wb.li));
    dout = l_dout(MODEL, int'(wb.li));
    lu   = l_lu_agg(MODEL, int'(wb.li));
    lg   = l_lg(MODEL, int'(wb.li));
  end

  always_ff @(posedge clk) begin
    if (ld_node_we)
      for (int k = 0; k < NIN; k++) x[0][ld_node_idx][k] <= ld_node_feat[k];
    if (ld_edge_we)
      for (int j = 0; j < NMAX; j++) e[ld_edge_idx][j] <= ld_edge_row[j];

    unique case (wb.op)
      OP_AGG: begin
        for (int g = 0; g < (MULTS >> LGA); g++) begin
          automatic int q = int'(wb.q0) + g;
          automatic int i = q >> lu;
          automatic int f = q & ((1 << lu) - 1);
          if (i < int'(n_nodes) && f < din) agg[i][f] <= wb_val[g];
        end
      end
      OP_NODE: begin
        for (int g = 0; g < MULTS; g++) begin
          automatic int q = int'(wb.q0) + g;
          automatic int i = q / dout;
          automatic int f = q % dout;
          if (g < (MULTS >> lg) && i < int'(n_nodes)) x[!wb.par][i][f] <= wb_val[g];
        end
      end
      OP_DENSE: begin
        for (int g = 0; g < MULTS; g++) begin
          automatic int f = int'(wb.q0) + g;
          if (g < (MULTS >> lg) && f < dout) x[!wb.par][0][f] <= wb_val[g];
        end
      end
      OP_GMP: begin
        for (int g = 0; g < DMAX; g++) x[!wb.par][0][g] <= wb_val[g];
      end
      default: ;
    endcase
  end
endmodule
