// gnn_decoder_top -- low-latency GNN decoder for surface-code syndromes.
//
// Decodes one syndrome graph (detection events as nodes with 5 features,
// k-nearest-neighbour edges weighted 1/distance^2) into a single bit: whether a
// logical error occurred.  The network is a pruned graph neural network:
// GraphConv layers x_i' = ReLU(W1 x_i + W2 sum_j e_ij x_j + b), global mean
// pooling, four dense layers and a sigmoid (see gnn_pkg for the two models).
// All layers run on one three-stage pipeline built around MULTS multipliers:
//   stage 1  input_select  picks operands from the feature registers (and the
//                          GMP node sum); the weight store is read in parallel
//   stage 2  mult_array    MULTS multipliers (weight row or edge weight)
//   stage 3  adder_tree +  tapped reduction, bias, rounding, ReLU, writeback
//            output_stage  into feature_regs
// layer_ctrl sequences the layers; graph_filter discards graphs larger than
// NMAX nodes (answer: no error) and sigmoid_unit turns the final logit into the
// decision.  The pipeline structure, multiplier count, BRAM packing, number
// formats, graph bound and GMP-by-table follow the paper; ports, load protocol,
// lane packing and schedule details are this design's.
//
// Use: while idle, load weights (wld_*; rows laid out as in gnn_pkg), biases
// (bld_*), the node features of nodes 0..N-1 (ld_node_*) and the edge-weight rows
// (ld_edge_*, zero for non-neighbours).  Then pulse start with n_in = N.  done
// pulses with err/prob valid; discarded marks an oversize graph answered
// without decoding.  latency is the number of clock cycles the decode took
// (206 for the 30-node worst case of the default max-latency model).
module gnn_decoder_top
  import gnn_pkg::*;
#(
  parameter int MODEL = MODEL_MAXLAT,
  parameter int NMAX  = 30,
  parameter int MULTS = 8192,
  parameter int FW    = 17,
  parameter int AW    = 27,
  parameter int DEPTH = 512,
  localparam int NW   = $clog2(NMAX + 1),
  localparam int NIW  = $clog2(NMAX),
  localparam int SW   = FW + $clog2(NMAX + 1),
  localparam int NBANK = (MULTS + WPA - 1) / WPA,
  localparam int BKW  = $clog2(NBANK + 1),
  localparam int RAW  = $clog2(DEPTH),
  localparam int NB   = total_bias(MODEL),
  localparam int BAW  = $clog2(NB),
  localparam int BWIN = MULTS >> min_bias_lg(MODEL),
  localparam int LV   = $clog2(MULTS),
  localparam int TW   = $clog2(LV + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // graph
  input  logic                  ld_node_we,
  input  logic [NIW-1:0]        ld_node_idx,
  input  logic signed [FW-1:0]  ld_node_feat [NIN],
  input  logic                  ld_edge_we,
  input  logic [NIW-1:0]        ld_edge_idx,
  input  logic [WW-1:0]         ld_edge_row [NMAX],
  // weights (one block-RAM word per cycle) and biases
  input  logic                  wld_we,
  input  logic [BKW-1:0]        wld_bank,
  input  logic [RAW-1:0]        wld_addr,
  input  logic [WPA*WW-1:0]     wld_data,
  input  logic                  bld_we,
  input  logic [BAW-1:0]        bld_addr,
  input  logic signed [BW-1:0]  bld_data,
  // decode
  input  logic                  start,
  input  logic [7:0]            n_in,
  output logic                  busy,
  output logic                  done,
  output logic                  err,
  output logic [7:0]            prob,
  output logic                  discarded,
  output logic [15:0]           latency,
  output logic [3:0]            layer,
  output logic [1:0]            phase
);
  localparam int NL  = num_layers(MODEL);
  localparam int LGA = clog2i(NMAX);
  localparam bit LASTBANK = ((NL - 1) % 2) == 0;

  logic              go, bypass, oversize, ctrl_busy, sig;
  logic [NW-1:0]     n_nodes;
  issue_t            iss0, iss1, iss2;
  logic [RAW-1:0]    wrow;
  logic signed [WW-1:0] wdata [MULTS];
  logic signed [FW-1:0] x   [2][NMAX][DMAX];
  logic signed [FW-1:0] agg [NMAX][DMAX];
  logic [WW-1:0]        e   [NMAX][NMAX];
  logic signed [SW-1:0] a1  [MULTS];
  logic [WW-1:0]        eb1 [MULTS];
  logic signed [AW-1:0] prod2 [MULTS];
  logic signed [AW-1:0] sum3  [MULTS];
  logic signed [BW-1:0] bwin  [BWIN];
  logic signed [FW-1:0] val3  [MULTS];
  logic [TW-1:0]        tap;
  logic [7:0]           s_prob;
  logic                 s_err;
  logic [15:0]          cnt;

  graph_filter #(.NMAX(NMAX), .NINW(8)) u_filter (
    .clk, .rst_n, .start, .n_in, .busy(ctrl_busy || go),
    .go, .bypass, .oversize, .n_nodes
  );

  layer_ctrl #(.MODEL(MODEL), .NMAX(NMAX), .MULTS(MULTS), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .go, .n_nodes, .iss(iss0), .wrow, .busy(ctrl_busy), .sig,
    .layer, .phase
  );

  weight_store #(.MULTS(MULTS), .WPA(WPA), .WW(WW), .DEPTH(DEPTH)) u_wstore (
    .clk, .ld_we(wld_we), .ld_bank(wld_bank), .ld_addr(wld_addr), .ld_data(wld_data),
    .rd_addr(wrow), .rd_row(wdata)
  );

  bias_regs #(.MODEL(MODEL), .MULTS(MULTS)) u_bias (
    .clk, .ld_we(bld_we), .ld_addr(bld_addr), .ld_data(bld_data), .iss(iss2), .win(bwin)
  );

  feature_regs #(.MODEL(MODEL), .NMAX(NMAX), .MULTS(MULTS), .FW(FW)) u_feat (
    .clk, .ld_node_we, .ld_node_idx, .ld_node_feat, .ld_edge_we, .ld_edge_idx,
    .ld_edge_row, .wb(iss2), .wb_val(val3), .n_nodes, .x, .agg, .e
  );

  input_select #(.MODEL(MODEL), .NMAX(NMAX), .MULTS(MULTS), .FW(FW)) u_stage1 (
    .clk, .rst_n, .iss(iss0), .n_nodes, .x, .agg, .e, .iss_q(iss1), .a_q(a1), .eb_q(eb1)
  );

  mult_array #(.MULTS(MULTS), .SW(SW), .AW(AW)) u_stage2 (
    .clk, .rst_n, .iss(iss1), .a(a1), .w(wdata), .eb(eb1), .iss_q(iss2), .prod_q(prod2)
  );

  always_comb begin
    tap = '0;
    for (int k = 0; k < NL; k++)
      if (int'(iss2.li) == k) begin
        if (iss2.op == OP_AGG)                             tap = TW'(LGA);
        else if (iss2.op == OP_NODE || iss2.op == OP_DENSE) tap = TW'(l_lg(MODEL, k));
      end
  end

  adder_tree #(.MULTS(MULTS), .AW(AW)) u_tree (.tap, .prod(prod2), .sum(sum3));

  output_stage #(.MODEL(MODEL), .MULTS(MULTS), .FW(FW), .AW(AW)) u_out (
    .iss(iss2), .sum(sum3), .bias(bwin), .val(val3)
  );

  sigmoid_unit #(.FW(FW), .FF(FF)) u_sigmoid (
    .logit(x[LASTBANK][0][0]), .prob(s_prob), .err(s_err)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done      <= 1'b0;
      err       <= 1'b0;
      prob      <= '0;
      discarded <= 1'b0;
      latency   <= '0;
      cnt       <= '0;
    end else begin
      done <= 1'b0;
      if (go) cnt <= '0;
      else if (ctrl_busy) cnt <= cnt + 16'd1;
      if (sig) begin
        done      <= 1'b1;
        err       <= s_err;
        prob      <= s_prob;
        discarded <= 1'b0;
        latency   <= cnt + 16'd1;
      end else if (bypass) begin
        done      <= 1'b1;
        err       <= 1'b0;
        prob      <= '0;
        discarded <= oversize;
        latency   <= '0;
      end
    end
  end

  assign busy = ctrl_busy || go;
endmodule
