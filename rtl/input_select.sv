// input_select -- pipeline stage 1: operand selection for the multiplier array.
//
// For the issue cycle described by iss it picks, for every multiplier lane p, the
// feature operand a and (for aggregation) the edge-weight operand eb, and
// registers them together with the descriptor.  The weight operand of node, GMP
// and dense cycles comes from the weight store, whose registered read lines up
// with these registers.  Lane mapping (g = group = one dot product, o = lane
// inside the group):
//   OP_AGG  : groups of 2**clog2(NMAX) lanes, one lane per neighbour j.  Group g
//             computes agg[i][f] = sum_j e[i][j]*x[j][f] for (i,f) from
//             q = q0+g; several nodes are aggregated in the same cycle.
//   OP_NODE : groups of 2**lg lanes holding [x_i ; agg_i] (self features, then
//             aggregated neighbours), so one group computes one GraphConv output
//             W1*x_i + W2*agg_i.  Several nodes per cycle when the layer is small
//             (GraphConv0), one node per cycle (GraphConv1) or one node over
//             several cycles (GraphConv2).
//   OP_DENSE: groups of 2**lg lanes, all holding the single pooled vector.
//   OP_GMP  : lane f holds sum over nodes of x[n][f] from the node adder tree
//             of this stage; the weight row supplies the factor 1/N.
// Unused lanes get a zero operand.  The lane packing is this design's own
// choice; the paper gives the three strategies (many nodes, node plus
// aggregated neighbours, or split over cycles) and the node-sum tree in this stage.
// Timing: one register stage; outputs belong to the cycle after iss.
module input_select
  import gnn_pkg::*;
#(
  parameter int MODEL = MODEL_MAXLAT,
  parameter int NMAX  = 30,
  parameter int MULTS = 8192,
  parameter int FW    = 17,
  localparam int SW   = FW + $clog2(NMAX + 1),
  localparam int NW   = $clog2(NMAX + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  issue_t                iss,
  input  logic [NW-1:0]         n_nodes,
  input  logic signed [FW-1:0]  x   [2][NMAX][DMAX],
  input  logic signed [FW-1:0]  agg [NMAX][DMAX],
  input  logic [WW-1:0]         e   [NMAX][NMAX],
  output issue_t                iss_q,
  output logic signed [SW-1:0]  a_q  [MULTS],
  output logic [WW-1:0]         eb_q [MULTS]
);
  localparam int LGA = clog2i(NMAX);

  logic signed [SW-1:0] gsum [DMAX];
  logic signed [SW-1:0] a_d  [MULTS];
  logic [WW-1:0]        eb_d [MULTS];
  int din, dout, lg, lu, nn;

  always_comb begin
    din  = l_din(MODEL, int'(iss.li));
    dout = l_dout(MODEL, int'(iss.li));
    lg   = l_lg(MODEL, int'(iss.li));
    lu   = l_lu_agg(MODEL, int'(iss.li));
    nn   = int'(n_nodes);
  end

  // Node-sum adder tree for global mean pooling.
  always_comb begin
    for (int f = 0; f < DMAX; f++) begin
      gsum[f] = '0;
      for (int n = 0; n < NMAX; n++)
        if (n < nn) gsum[f] = gsum[f] + SW'(x[iss.par][n][f]);
    end
  end

  always_comb begin
    for (int p = 0; p < MULTS; p++) begin
      a_d[p]  = '0;
      eb_d[p] = '0;
      unique case (iss.op)
        OP_AGG: begin
          automatic int g = p >> LGA;
          automatic int j = p & ((1 << LGA) - 1);
          automatic int q = int'(iss.q0) + g;
          automatic int i = q >> lu;
          automatic int f = q & ((1 << lu) - 1);
          if (j < nn && f < din) a_d[p] = SW'(x[iss.par][j][f]);
          if (j < nn && i < nn)  eb_d[p] = e[i][j];
        end
        OP_NODE: begin
          automatic int g = p >> lg;
          automatic int o = p & ((1 << lg) - 1);
          automatic int i = (int'(iss.q0) + g) / dout;
          if (i < nn) begin
            if (o < din)          a_d[p] = SW'(x[iss.par][i][o]);
            else if (o < 2 * din) a_d[p] = SW'(agg[i][o - din]);
          end
        end
        OP_DENSE: begin
          automatic int o = p & ((1 << lg) - 1);
          if (o < din) a_d[p] = SW'(x[iss.par][0][o]);
        end
        OP_GMP: begin
          if (p < din) a_d[p] = gsum[p];
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss_q <= '{op: OP_NONE, li: '0, q0: '0, par: 1'b0};
    end else begin
      iss_q <= iss;
    end
  end

  always_ff @(posedge clk) begin
    a_q  <= a_d;
    eb_q <= eb_d;
  end
endmodule
