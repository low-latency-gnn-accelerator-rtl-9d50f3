// input_select_tb -- operand selection of pipeline stage 1.
//
// Small instance (max-latency model, 8 nodes, 1,024 multipliers) with random
// node features, aggregates and edge weights for 6 valid nodes.  For issue
// cycles of every kind it works out, one cycle later, what each lane must hold:
// aggregation lanes (neighbour j of group g) the feature x[j][f] and the edge
// weight e[i][j]; GraphConv lanes the self features then the aggregated
// neighbours of their node; dense lanes the pooled vector repeated per group;
// GMP lanes the sum of the feature over the valid nodes.  Lanes of nodes or
// neighbours beyond n_nodes, and padding lanes, must be zero.
module input_select_tb;
  import gnn_pkg::*;
  localparam int MODEL = MODEL_MAXLAT, NMAX = 8, MULTS = 1024, FW = 17, SW = FW + 4;
  logic clk = 0, rst_n = 0;
  issue_t iss, iss_q;
  logic [3:0] n_nodes;
  logic signed [FW-1:0] x [2][NMAX][DMAX];
  logic signed [FW-1:0] agg [NMAX][DMAX];
  logic [WW-1:0] e [NMAX][NMAX];
  logic signed [SW-1:0] a_q [MULTS];
  logic [WW-1:0] eb_q [MULTS];
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  input_select #(.MODEL(MODEL), .NMAX(NMAX), .MULTS(MULTS), .FW(FW)) dut (.*);

  // din of each layer and log2 of its node/dense group (2*din for GraphConv)
  int din [8] = '{5, 32, 128, 128, 256, 256, 128, 64};
  int dout [8] = '{32, 128, 128, 256, 256, 128, 64, 1};
  int lg [8] = '{4, 6, 8, 0, 8, 8, 7, 6};
  int lu [8] = '{3, 5, 7, 0, 0, 0, 0, 0};

  function automatic int expect_a(int p);
    int l = int'(iss.li), q0 = int'(iss.q0), nn = int'(n_nodes);
    case (iss.op)
      OP_AGG: begin
        int g = p / 8, j = p % 8, q = q0 + g, f = q % (1 << lu[l]);
        return (j < nn && f < din[l]) ? int'(x[iss.par][j][f]) : 0;
      end
      OP_NODE: begin
        int g = p / (1 << lg[l]), o = p % (1 << lg[l]), i = (q0 + g) / dout[l];
        if (i >= nn) return 0;
        if (o < din[l]) return int'(x[iss.par][i][o]);
        if (o < 2 * din[l]) return int'(agg[i][o - din[l]]);
        return 0;
      end
      OP_DENSE: begin
        int o = p % (1 << lg[l]);
        return (o < din[l]) ? int'(x[iss.par][0][o]) : 0;
      end
      OP_GMP: begin
        int s = 0;
        if (p < din[l]) for (int i = 0; i < nn; i++) s += int'(x[iss.par][i][p]);
        return s;
      end
      default: return 0;
    endcase
  endfunction

  function automatic int expect_e(int p);
    int l = int'(iss.li), g = p / 8, j = p % 8, i = (int'(iss.q0) + g) >> lu[l];
    if (iss.op != OP_AGG || j >= int'(n_nodes) || i >= int'(n_nodes)) return 0;
    return int'(e[i][j]);
  endfunction

  initial begin
    op_e ops [8] = '{OP_AGG, OP_AGG, OP_AGG, OP_NODE, OP_NODE, OP_NODE, OP_DENSE, OP_GMP};
    int  lis [8] = '{0, 1, 2, 0, 1, 2, 5, 3};
    int  ea [MULTS], ee [MULTS];
    iss = '{op: OP_NONE, li: 0, q0: 0, par: 0};
    n_nodes = 4'd6;
    for (int b = 0; b < 2; b++) for (int i = 0; i < NMAX; i++) for (int f = 0; f < DMAX; f++) begin
      x[b][i][f] = FW'(int'($urandom_range(4000)) - 2000);
      if (b == 0) agg[i][f] = FW'(int'($urandom_range(4000)) - 2000);
    end
    for (int i = 0; i < NMAX; i++) for (int j = 0; j < NMAX; j++) e[i][j] = WW'($urandom_range(1024));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 48; it++) begin
      iss.op = ops[it % 8];
      iss.li = 4'(lis[it % 8]);
      iss.par = it[3];
      iss.q0 = 16'((it / 8) * ((iss.op == OP_AGG) ? 128 : (MULTS >> lg[lis[it % 8]])));
      #1;
      for (int p = 0; p < MULTS; p++) begin ea[p] = expect_a(p); ee[p] = expect_e(p); end
      @(negedge clk);
      checks++;
      if (iss_q != iss) begin failures++; $display("FAIL descriptor it %0d", it); end
      for (int p = 0; p < MULTS; p++) begin
        checks++;
        if (int'(a_q[p]) != ea[p] || int'(eb_q[p]) != ee[p]) begin
          failures++;
          if (failures < 10) $display("FAIL it %0d op %0d lane %0d: a %0d/%0d e %0d/%0d", it, iss.op, p, a_q[p], ea[p], eb_q[p], ee[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
