// layer_ctrl -- layer and cycle scheduler of the decoder.
//
// After go it walks the layer table of gnn_pkg once, keeping a layer index li
// and a cycle count t within the layer, and each cycle drives one issue
// descriptor (iss) into stage 1 together with the weight-row address (wrow).
//   GraphConv layer: aggregation cycles t = 0..ca-1 (several nodes' aggregated
//     neighbours per cycle), then node cycles from t = s on, where s = ca unless
//     the last aggregated nodes would be read before their writeback, in which
//     case the node phase waits (at most two cycles).  This lets node issue
//     overlap the pipeline drain of the aggregation phase, the paper's
//     interleaved edge computation.  Node cycle c uses weight row
//     wrow(li) + c % rows(li), the folding of the output columns.
//   GMP: one cycle reading row gmp_base + N (the factor 1/N).
//   Dense layer: cycles t = 0..cn-1, row wrow(li) + t.
// Each layer ends with two drain cycles so that its last results are written
// back before the next layer, which reads the other feature bank, starts.
// After the last layer one cycle (sig) registers the sigmoid; done pulses with
// it.  Issue counts depend on the node count N, so latency grows with the graph.
// The schedule shape follows the paper's description; the exact overlap rule is
// this design's.  Timing: iss/wrow are combinational from the state registers.
module layer_ctrl
  import gnn_pkg::*;
#(
  parameter int MODEL = MODEL_MAXLAT,
  parameter int NMAX  = 30,
  parameter int MULTS = 8192,
  parameter int DEPTH = 512,
  localparam int NW   = $clog2(NMAX + 1),
  localparam int AW_  = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            go,
  input  logic [NW-1:0]   n_nodes,
  output issue_t          iss,
  output logic [AW_-1:0]  wrow,
  output logic            busy,
  output logic            sig,
  output logic [3:0]      layer,
  output logic [1:0]      phase    // 0 idle/drain, 1 aggregation, 2 node/dense/GMP
);
  localparam int NL   = num_layers(MODEL);
  localparam int LGA  = clog2i(NMAX);
  localparam int OPCA = MULTS >> LGA;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_SIG} state_e;
  state_e     st;
  logic [3:0] li;
  logic [15:0] t;

  // per-layer quantities for the current layer and node count
  int ca, s, cn, tend, rows, wbase, opc;
  lkind_e kind;

  always_comb begin
    ca = 0; s = 0; cn = 0; rows = 1; wbase = 0; opc = 1; kind = L_GMP;
    for (int k = 0; k < NL; k++) begin
      if (int'(li) == k) begin
        kind  = l_kind(MODEL, k);
        ca    = agg_cycles(MODEL, k, int'(n_nodes), MULTS, NMAX);
        s     = (kind == L_GCONV) ? node_start(MODEL, k, int'(n_nodes), MULTS, NMAX) : 0;
        cn    = node_cycles(MODEL, k, int'(n_nodes), MULTS);
        rows  = l_rows(MODEL, k, MULTS);
        wbase = l_wrow(MODEL, k, MULTS);
        opc   = MULTS >> l_lg(MODEL, k);
      end
    end
    tend = s + cn + 1;
  end

  always_comb begin
    automatic int ti = int'(t);
    iss   = '{op: OP_NONE, li: li, q0: '0, par: li[0]};
    wrow  = '0;
    phase = 2'd0;
    if (st == S_RUN) begin
      if (kind == L_GCONV && ti < ca) begin
        iss.op = OP_AGG;
        iss.q0 = 16'(ti * OPCA);
        phase  = 2'd1;
      end else if (ti >= s && ti < s + cn) begin
        automatic int c = ti - s;
        phase = 2'd2;
        unique case (kind)
          L_GCONV: begin
            iss.op = OP_NODE;
            iss.q0 = 16'(c * opc);
            wrow   = AW_'(wbase + (c % rows));
          end
          L_DENSE: begin
            iss.op = OP_DENSE;
            iss.q0 = 16'(c * opc);
            wrow   = AW_'(wbase + (c % rows));
          end
          default: begin
            iss.op = OP_GMP;
            wrow   = AW_'(gmp_base(MODEL, MULTS) + int'(n_nodes));
          end
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      li <= '0;
      t  <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (go) begin
          st <= S_RUN;
          li <= '0;
          t  <= '0;
        end
        S_RUN: begin
          if (int'(t) >= tend) begin
            t <= '0;
            if (int'(li) == NL - 1) st <= S_SIG;
            else                    li <= li + 4'd1;
          end else begin
            t <= t + 16'd1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy  = (st != S_IDLE);
  assign sig   = (st == S_SIG);
  assign layer = li;

  // A new graph is only accepted while idle.
  a_go_idle: assert property (@(posedge clk) disable iff (!rst_n) go |-> st == S_IDLE);
endmodule
