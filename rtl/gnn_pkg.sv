// gnn_pkg -- fixed-point formats and the static layer schedule of the GNN decoder.
//
// The decoder runs one of two pruned graph neural networks. Both share the layer
// chain GraphConv0 (5->32), GraphConv1 (32->128), GraphConv2, optional GraphConv6,
// global mean pooling (GMP) and four dense layers (256->256->128->64->1):
//   MODEL_MAXLAT (default): GraphConv2 computes only 128 of its 256 outputs, the
//                           others are zero; no GraphConv6.  Graphs of up to 30 nodes.
//   MODEL_AVGLAT          : GraphConv2 computes all 256 outputs and GraphConv6
//                           (256->256) follows.  Graphs of up to 32 nodes.
// Number formats (signed two's complement, Qi.f = i integer bits incl. sign, f fraction):
//   weights and edge weights Q4.10 (14 bit), node features Q12.5 (17 bit),
//   biases Q1.4 (5 bit), accumulation Q12.15 (27 bit).  The average-latency model uses
//   Q18.5 features and Q13.15 accumulation; those widths are module parameters.
//
// Every multiplier cycle multiplies MULTS feature/weight pairs.  A layer's dot
// products are packed into power-of-two groups of 2**lg lanes (the adder tree is
// tapped at level lg), so MULTS>>lg outputs come out per cycle; layers whose
// outputs do not fit are folded over several cycles, each with its own weight row.
// Everything below is computed from the layer table, so that the controller,
// the datapath and a testbench's weight loader all agree on one layout.
// The layer shapes follow the paper's multiplication counts; the lane packing,
// the row layout and the position of the kept GraphConv2 features (0..127) are
// this design's choices.
package gnn_pkg;

  localparam int WW = 14;   // weight / edge weight width
  localparam int WF = 10;   // weight fraction bits
  localparam int FF = 5;    // feature fraction bits
  localparam int AF = 15;   // accumulator fraction bits (= FF + WF)
  localparam int BW = 5;    // bias width
  localparam int BF = 4;    // bias fraction bits
  localparam int NIN = 5;   // input node feature length
  localparam int DMAX = 256;  // widest feature vector
  localparam int WPA = 5;   // weights packed per BRAM address

  localparam int MODEL_MAXLAT = 0;
  localparam int MODEL_AVGLAT = 1;

  typedef enum logic [1:0] {L_GCONV = 2'd0, L_GMP = 2'd1, L_DENSE = 2'd2} lkind_e;
  typedef enum logic [2:0] {OP_NONE = 3'd0, OP_AGG = 3'd1, OP_NODE = 3'd2,
                            OP_GMP = 3'd3, OP_DENSE = 3'd4} op_e;

  // One multiplier-array cycle as it travels down the three pipeline stages.
  typedef struct packed {
    op_e         op;     // what the lanes compute
    logic [3:0]  li;     // layer index
    logic [15:0] q0;     // index of the first output produced in this cycle
    logic        par;    // which node-feature bank is this layer's input
  } issue_t;

  localparam int MAXL = 9;

  function automatic int num_layers(int model);
    return (model == MODEL_AVGLAT) ? 9 : 8;
  endfunction

  function automatic lkind_e l_kind(int model, int i);
    int gc = (model == MODEL_AVGLAT) ? 4 : 3;
    if (i < gc) return L_GCONV;
    if (i == gc) return L_GMP;
    return L_DENSE;
  endfunction

  function automatic int l_din(int model, int i);
    if (model == MODEL_AVGLAT) begin
      case (i)
        0: return 5;    1: return 32;   2: return 128;  3: return 256;
        4: return 256;  5: return 256;  6: return 256;  7: return 128;
        default: return 64;
      endcase
    end
    case (i)
      0: return 5;    1: return 32;   2: return 128;  3: return 128;
      4: return 256;  5: return 256;  6: return 128;
      default: return 64;
    endcase
  endfunction

  function automatic int l_dout(int model, int i);
    if (model == MODEL_AVGLAT) begin
      case (i)
        0: return 32;   1: return 128;  2: return 256;  3: return 256;
        4: return 256;  5: return 256;  6: return 128;  7: return 64;
        default: return 1;
      endcase
    end
    case (i)
      0: return 32;   1: return 128;  2: return 128;  3: return 256;
      4: return 256;  5: return 128;  6: return 64;
      default: return 1;
    endcase
  endfunction

  // ReLU on every GraphConv and hidden dense layer; not on GMP nor the output logit.
  function automatic bit l_relu(int model, int i);
    return (l_kind(model, i) != L_GMP) && (i != num_layers(model) - 1);
  endfunction

  function automatic int clog2i(int v);
    for (int r = 0; r < 31; r++) if ((1 << r) >= v) return r;
    return 31;
  endfunction

  // log2 of the dot-product group in the node/dense phase (tree tap level).
  function automatic int l_lg(int model, int i);
    case (l_kind(model, i))
      L_GCONV: return clog2i(2 * l_din(model, i));
      L_DENSE: return clog2i(l_din(model, i));
      default: return 0;
    endcase
  endfunction

  // log2 of the padded per-node feature count used by the aggregation phase.
  function automatic int l_lu_agg(int model, int i);
    return clog2i(l_din(model, i));
  endfunction

  // Weight rows of one layer: one per distinct issue cycle pattern.
  function automatic int l_rows(int model, int i, int mults);
    int need;
    if (l_kind(model, i) == L_GMP) return 0;
    need = (l_dout(model, i) << l_lg(model, i)) / mults;
    return (need < 1) ? 1 : need;
  endfunction

  function automatic int l_wrow(int model, int i, int mults);
    int r = 0;
    for (int k = 0; k < MAXL; k++) if (k < i) r += l_rows(model, k, mults);
    return r;
  endfunction

  // The GMP normalisation factors 1/N follow the layer weights: row gmp_base+N.
  function automatic int gmp_base(int model, int mults);
    return l_wrow(model, num_layers(model), mults);
  endfunction

  function automatic int l_bbase(int model, int i);
    int r = 0;
    for (int k = 0; k < MAXL; k++)
      if (k < i && l_kind(model, k) != L_GMP) r += l_dout(model, k);
    return r;
  endfunction

  function automatic int total_bias(int model);
    return l_bbase(model, num_layers(model));
  endfunction

  // Smallest tap level of a layer that adds a bias (bounds the bias window).
  function automatic int min_bias_lg(int model);
    int m = 31;
    for (int k = 0; k < MAXL; k++)
      if (k < num_layers(model) && l_kind(model, k) != L_GMP && l_lg(model, k) < m)
        m = l_lg(model, k);
    return m;
  endfunction

  // Issue cycles of the aggregation phase and of the node/dense phase for n nodes.
  function automatic int agg_cycles(int model, int i, int n, int mults, int nmax);
    int opc = mults >> clog2i(nmax);
    if (l_kind(model, i) != L_GCONV) return 0;
    return ((n << l_lu_agg(model, i)) + opc - 1) / opc;
  endfunction

  function automatic int node_cycles(int model, int i, int n, int mults);
    int opc = mults >> l_lg(model, i);
    case (l_kind(model, i))
      L_GCONV: return (n * l_dout(model, i) + opc - 1) / opc;
      L_DENSE: return (l_dout(model, i) + opc - 1) / opc;
      default: return 1;
    endcase
  endfunction

  // First node-phase cycle of a GraphConv layer.  Node issue may overlap the two
  // drain cycles of the aggregation phase as long as no node is read before its
  // aggregated neighbours have been written back.
  function automatic int node_start(int model, int i, int n, int mults, int nmax);
    int ca, opca, last_node, first_use, s;
    ca = agg_cycles(model, i, n, mults, nmax);
    opca = mults >> clog2i(nmax);
    last_node = ((ca - 1) * opca) >> l_lu_agg(model, i);
    first_use = (last_node * l_dout(model, i)) / (mults >> l_lg(model, i));
    s = ca + 2 - ((first_use < 2) ? first_use : 2);
    return (s > ca) ? s : ca;
  endfunction

  // Cycles one layer occupies, including the two pipeline drain cycles.
  function automatic int layer_cycles(int model, int i, int n, int mults, int nmax);
    if (l_kind(model, i) == L_GCONV)
      return node_start(model, i, n, mults, nmax) + node_cycles(model, i, n, mults) + 2;
    return node_cycles(model, i, n, mults) + 2;
  endfunction

  // Whole decode: all layers plus one cycle for the sigmoid and result register.
  function automatic int decode_cycles(int model, int n, int mults, int nmax);
    int t = 1;
    for (int k = 0; k < MAXL; k++)
      if (k < num_layers(model)) t += layer_cycles(model, k, n, mults, nmax);
    return t;
  endfunction

endpackage
