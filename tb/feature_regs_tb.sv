// feature_regs_tb -- loading and writeback mapping of the feature registers.
//
// Small instance (max-latency model, 8 nodes, 1,024 multipliers).  Loads node
// features and edge rows and reads them back, then presents writebacks of every
// kind with lane g carrying a value that encodes g, and checks that each lands
// at the (node, feature) worked out by hand for that layer: aggregation into agg
// with 8/32/128-wide padded rows, GraphConv outputs into the other bank with
// dout-wide rows, dense outputs and GMP outputs into node 0, and that nothing is
// written for nodes beyond n_nodes.
module feature_regs_tb;
  import gnn_pkg::*;
  localparam int MODEL = MODEL_MAXLAT, NMAX = 8, MULTS = 1024, FW = 17;
  logic clk = 0;
  logic ld_node_we = 0, ld_edge_we = 0;
  logic [2:0] ld_node_idx, ld_edge_idx;
  logic signed [FW-1:0] ld_node_feat [NIN];
  logic [WW-1:0] ld_edge_row [NMAX];
  issue_t wb;
  logic signed [FW-1:0] wb_val [MULTS];
  logic [3:0] n_nodes;
  logic signed [FW-1:0] x [2][NMAX][DMAX];
  logic signed [FW-1:0] agg [NMAX][DMAX];
  logic [WW-1:0] e [NMAX][NMAX];
  int checks = 0, failures = 0;
  int rn [NMAX][NIN], re [NMAX][NMAX];
  always #5 clk = !clk;

  feature_regs #(.MODEL(MODEL), .NMAX(NMAX), .MULTS(MULTS), .FW(FW)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic write(op_e op, int li, int q0, bit par);
    @(negedge clk);
    wb = '{op: op, li: 4'(li), q0: 16'(q0), par: par};
    for (int g = 0; g < MULTS; g++) wb_val[g] = FW'(1000 + g);
    @(negedge clk);
    wb.op = OP_NONE;
  endtask

  initial begin
    wb = '{op: OP_NONE, li: 0, q0: 0, par: 0};
    n_nodes = 4'd6;
    for (int i = 0; i < NMAX; i++) begin
      @(negedge clk);
      ld_node_we = 1; ld_edge_we = 1; ld_node_idx = 3'(i); ld_edge_idx = 3'(i);
      for (int k = 0; k < NIN; k++) begin rn[i][k] = int'($urandom_range(4000)) - 2000; ld_node_feat[k] = FW'(rn[i][k]); end
      for (int j = 0; j < NMAX; j++) begin re[i][j] = int'($urandom_range(1024)); ld_edge_row[j] = WW'(re[i][j]); end
    end
    @(negedge clk); ld_node_we = 0; ld_edge_we = 0;
    for (int i = 0; i < NMAX; i++) begin
      for (int k = 0; k < NIN; k++) check(int'(x[0][i][k]) == rn[i][k], $sformatf("node %0d feature %0d", i, k));
      for (int j = 0; j < NMAX; j++) check(int'(e[i][j]) == re[i][j], $sformatf("edge %0d,%0d", i, j));
    end
    // aggregation, GraphConv1 (32 features per node): 128 outputs per cycle, q0 = 0
    write(OP_AGG, 1, 0, 0);
    for (int i = 0; i < 4; i++)
      for (int f = 0; f < 32; f++) check(int'(agg[i][f]) == 1000 + i * 32 + f, $sformatf("agg GC1 node %0d f %0d", i, f));
    // aggregation, GraphConv0: rows padded to 8, only features 0..4 written
    write(OP_AGG, 0, 8, 0);
    for (int f = 0; f < 5; f++) check(int'(agg[1][f]) == 1000 + f, $sformatf("agg GC0 node 1 f %0d", f));
    check(int'(agg[1][5]) == 1000 + 32 + 5, "agg GC0 padding lane not written");
    // GraphConv1 node outputs: 16 per cycle, q0 = 128 -> node 1, features 0..15
    write(OP_NODE, 1, 128, 0);
    for (int f = 0; f < 16; f++) check(int'(x[1][1][f]) == 1000 + f, $sformatf("GC1 node 1 f %0d", f));
    // GraphConv0 node outputs into bank 1: 64 per cycle over 32 features, q0 = 64 -> nodes 2,3
    write(OP_NODE, 0, 64, 0);
    for (int f = 0; f < 32; f++) begin
      check(int'(x[1][2][f]) == 1000 + f, $sformatf("GC0 node 2 f %0d", f));
      check(int'(x[1][3][f]) == 1000 + 32 + f, $sformatf("GC0 node 3 f %0d", f));
    end
    // GraphConv2 from bank 1 writes bank 0: 4 outputs per cycle, q0 = 6*128 is node 6 -> dropped
    begin
      automatic int prev = int'(x[0][5][127]);
      write(OP_NODE, 2, 6 * 128, 1);
      check(int'(x[0][5][127]) == prev, "output of node beyond n_nodes dropped");
      write(OP_NODE, 2, 5 * 128 + 124, 1);
      for (int f = 0; f < 4; f++) check(int'(x[0][5][124 + f]) == 1000 + f, $sformatf("GC2 node 5 f %0d", 124 + f));
    end
    // GMP (layer 3, reads bank 1, writes bank 0): all 256 lanes into node 0
    write(OP_GMP, 3, 0, 1);
    for (int f = 0; f < DMAX; f++) check(int'(x[0][0][f]) == 1000 + f, $sformatf("GMP f %0d", f));
    // Dense2 (128 -> 64): 4 outputs per cycle, q0 = 60 -> features 60..63 into bank 1 (layer 6 reads bank 0)
    write(OP_DENSE, 6, 60, 0);
    for (int f = 0; f < 4; f++) check(int'(x[1][0][60 + f]) == 1000 + f, $sformatf("dense f %0d", 60 + f));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
