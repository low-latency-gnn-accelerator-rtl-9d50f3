// layer_ctrl_tb -- the static layer schedule at the decoder's full size.
//
// Runs the controller with its defaults (max-latency model, 8,192 multipliers,
// up to 30 nodes) on a worst-case 30-node graph and counts the cycles spent in
// each layer and in the whole decode.  Six of the per-layer counts must equal the
// paper's cycle table (GraphConv0 7, GraphConv2 137, the dense layers 10, 6, 3, 3),
// GraphConv1 and GMP the values this schedule gives (36 and 3, where the paper
// lists 38 and 2), and the decode 206 cycles including the sigmoid cycle, the
// paper's total.  Also checks the kinds of issue cycles, the weight rows used,
// that go is ignored while busy, and a small graph of 4 nodes.
module layer_ctrl_tb;
  import gnn_pkg::*;
  logic clk = 0, rst_n = 0, go = 0;
  logic [4:0] n_nodes;
  issue_t iss;
  logic [8:0] wrow;
  logic busy, sig;
  logic [3:0] layer;
  logic [1:0] phase;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  layer_ctrl dut (.*);

  int exp_cyc [8] = '{7, 36, 137, 3, 10, 6, 3, 3};
  // node/dense issue cycles per layer at N=30: 960/512, 30*128/16, 30*128/4, 1, 256, 128, 64/2, 1
  int exp_node [8] = '{2, 30, 120, 1, 8, 4, 1, 1};
  // aggregation cycles at N=30 with 256 groups per cycle: 30*8, 30*32, 30*128 lanes of features
  int exp_agg [8] = '{1, 4, 15, 0, 0, 0, 0, 0};

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(int n, output int total, output int lc [8], output int na [8], output int nn [8]);
    for (int l = 0; l < 8; l++) begin lc[l] = 0; na[l] = 0; nn[l] = 0; end
    total = 0;
    @(negedge clk);
    n_nodes = 5'(n); go = 1;
    @(negedge clk); go = 0;
    while (busy) begin
      total++;
      if (!sig) lc[layer]++;
      if (iss.op == OP_AGG) na[layer]++;
      if (iss.op == OP_NODE || iss.op == OP_DENSE || iss.op == OP_GMP) nn[layer]++;
      if (iss.op != OP_NONE && iss.op != OP_AGG && int'(wrow) > gmp_base(MODEL_MAXLAT, 8192) + 30)
        check(0, $sformatf("weight row %0d out of range", wrow));
      if (total == 50) begin go = 1; #1; go = 0; end  // ignored while busy
      @(negedge clk);
    end
  endtask

  initial begin
    int total, lc [8], na [8], nn [8];
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(30, total, lc, na, nn);
    check(total == 206, $sformatf("decode took %0d cycles, paper 206", total));
    for (int l = 0; l < 8; l++) begin
      check(lc[l] == exp_cyc[l], $sformatf("layer %0d took %0d cycles, expected %0d", l, lc[l], exp_cyc[l]));
      check(nn[l] == exp_node[l], $sformatf("layer %0d issued %0d node cycles, expected %0d", l, nn[l], exp_node[l]));
      check(na[l] == exp_agg[l], $sformatf("layer %0d issued %0d aggregation cycles, expected %0d", l, na[l], exp_agg[l]));
    end
    repeat (3) @(negedge clk);
    check(!busy, "controller returned to idle");
    run(4, total, lc, na, nn);
    check(total == decode_cycles(MODEL_MAXLAT, 4, 8192, 30), $sformatf("4-node decode took %0d cycles", total));
    check(nn[1] == 4 && nn[2] == 16, "4-node GraphConv1/2 node cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
