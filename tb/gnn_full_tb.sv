// gnn_full_tb -- full-size end-to-end test of gnn_decoder_top at its defaults.
//
// The decoder as specified: max-latency model, 8,192 multipliers, 1,639 weight
// block RAMs, graphs of up to 30 nodes.  Loads a random model, decodes a
// worst-case 30-node k-nearest-neighbour graph and a 31-node graph (discarded),
// and checks logit, probability and decision against the reference model of
// gnn_tb_pkg.  It checks the worst-case latency against 206 cycles, the total
// of the paper's per-layer cycle table (988.8 ns at 4.8 ns per cycle), and
// prints the per-layer cycle counts next to that table.
module gnn_full_tb
  import gnn_pkg::*;
  import gnn_tb_pkg::*;
;
  localparam int MODEL = MODEL_MAXLAT;
  localparam int NMAX  = 30;
  localparam int MULTS = 8192;
  localparam int FW    = 17;
  localparam int AW    = 27;
  localparam int NG    = 2;
  localparam int SEED  = 7;
  logic fin;
  int checks, failures;
  localparam int NIW   = $clog2(NMAX);
  localparam int NBANK = (MULTS + WPA - 1) / WPA;
  localparam int BKW   = $clog2(NBANK + 1);
  localparam int NB    = total_bias(MODEL);
  localparam int BAW   = $clog2(NB);
  localparam int NL    = num_layers(MODEL);
  localparam bit LASTBANK = ((NL - 1) % 2) == 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic                  ld_node_we = 0, ld_edge_we = 0, wld_we = 0, bld_we = 0, start = 0;
  logic [NIW-1:0]        ld_node_idx = '0, ld_edge_idx = '0;
  logic signed [FW-1:0]  ld_node_feat [NIN];
  logic [WW-1:0]         ld_edge_row [NMAX];
  logic [BKW-1:0]        wld_bank = '0;
  logic [8:0]            wld_addr = '0;
  logic [WPA*WW-1:0]     wld_data = '0;
  logic [BAW-1:0]        bld_addr = '0;
  logic signed [BW-1:0]  bld_data = '0;
  logic [7:0]            n_in = '0;
  logic busy, done, err, discarded;
  logic [7:0] prob;
  logic [15:0] latency;
  logic [3:0] layer;
  logic [1:0] phase;

  gnn_decoder_top dut (.*);

  // mechanism counters
  int n_agg, n_multi, n_fold, n_overlap, n_gmp, n_dense, n_discard, n_empty;
  int lcyc [MAXL];
  always @(posedge clk) if (rst_n) begin
    if (dut.iss0.op == OP_AGG) n_agg++;
    if (dut.iss0.op == OP_NODE && (MULTS >> l_lg(MODEL, int'(dut.iss0.li))) > l_dout(MODEL, int'(dut.iss0.li))) n_multi++;
    if (dut.iss0.op == OP_NODE && l_rows(MODEL, int'(dut.iss0.li), MULTS) > 1) n_fold++;
    if (dut.iss0.op == OP_NODE && (dut.iss1.op == OP_AGG || dut.iss2.op == OP_AGG)) n_overlap++;
    if (dut.iss0.op == OP_GMP) n_gmp++;
    if (dut.iss0.op == OP_DENSE) n_dense++;
    if (dut.u_ctrl.busy && !dut.u_ctrl.sig) lcyc[layer]++;
  end

  int wc_latency = 0;
  int lc_first [MAXL];
  int paper_cyc [8] = '{7, 38, 137, 2, 10, 6, 3, 3};
  always @(posedge clk) if (done && !discarded && wc_latency == 0) begin
    wc_latency = int'(latency);
    for (int l = 0; l < MAXL; l++) lc_first[l] = lcyc[l];
  end

  initial begin
    #100_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [model %0d]: %s", MODEL, what);
    end
  endtask

  task automatic load_model();
    for (int row = 0; row <= gmp_base(MODEL, MULTS) + NMAX; row++)
      for (int b = 0; b < NBANK; b++) begin
        logic [WPA*WW-1:0] w = '0;
        for (int k = 0; k < WPA; k++)
          if (b * WPA + k < MULTS)
            w[k*WW +: WW] = WW'(row_weight(MODEL, MULTS, NMAX, row, b * WPA + k));
        @(negedge clk);
        wld_we = 1; wld_bank = BKW'(b); wld_addr = 9'(row); wld_data = w;
      end
    for (int l = 0; l < NL; l++)
      if (l_kind(MODEL, l) != L_GMP)
        for (int f = 0; f < l_dout(MODEL, l); f++) begin
          @(negedge clk);
          wld_we = 0;
          bld_we = 1; bld_addr = BAW'(l_bbase(MODEL, l) + f); bld_data = BW'(bs[l][f]);
        end
    @(negedge clk);
    wld_we = 0; bld_we = 0;
  endtask

  task automatic decode(int n);
    int exp_logit = 0, t0, t1;
    if (n > 0 && n <= 64) gen_graph(n);
    for (int i = 0; i < n && i < NMAX; i++) begin
      @(negedge clk);
      ld_node_we = 1; ld_node_idx = NIW'(i);
      for (int k = 0; k < NIN; k++) ld_node_feat[k] = FW'(gx[i][k]);
      ld_edge_we = 1; ld_edge_idx = NIW'(i);
      for (int j = 0; j < NMAX; j++) ld_edge_row[j] = (j < n) ? WW'(ge[i][j]) : '0;
    end
    @(negedge clk);
    ld_node_we = 0; ld_edge_we = 0;
    if (n >= 1 && n <= NMAX) exp_logit = ref_logit(MODEL, n, FW, AW);
    start = 1; n_in = 8'(n);
    t0 = $time / 10;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    t1 = $time / 10;
    if (n == 0 || n > NMAX) begin
      check(err == 0 && prob == 0, $sformatf("n=%0d bypass must answer no error", n));
      check(discarded == (n > NMAX), $sformatf("n=%0d discarded flag", n));
      if (n > NMAX) n_discard++; else n_empty++;
    end else begin
      automatic int got = int'($signed(dut.x[LASTBANK][0][0]));
      automatic int ep  = ref_prob(exp_logit, FF);
      check(got == exp_logit, $sformatf("n=%0d logit %0d expected %0d", n, got, exp_logit));
      check(int'(prob) == ep, $sformatf("n=%0d prob %0d expected %0d", n, prob, ep));
      check(err == (exp_logit > 0), $sformatf("n=%0d err", n));
      check(discarded == 0, $sformatf("n=%0d not discarded", n));
      check(int'(latency) == decode_cycles(MODEL, n, MULTS, NMAX),
            $sformatf("n=%0d latency %0d expected %0d", n, latency, decode_cycles(MODEL, n, MULTS, NMAX)));
      check(t1 - t0 == int'(latency) + 2, $sformatf("n=%0d start-to-done %0d vs latency %0d", n, t1 - t0, latency));
      $display("model %0d n=%0d logit=%0d prob=%0d err=%0d latency=%0d cycles", MODEL, n, got, prob, err, latency);
    end
  endtask

  initial begin
    int sizes [NG];
    fin = 0; checks = 0; failures = 0;
    void'($urandom(SEED));
    gen_model(MODEL);
    for (int k = 0; k < NG; k++) sizes[k] = 1 + int'($urandom_range(NMAX - 1));
    sizes[0] = NMAX;
    sizes[1] = NMAX + 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_model();
    for (int k = 0; k < NG; k++) decode(sizes[k]);
    $display("model %0d mechanisms: agg=%0d multi-node=%0d folded=%0d overlap=%0d gmp=%0d dense=%0d discard=%0d empty=%0d",
             MODEL, n_agg, n_multi, n_fold, n_overlap, n_gmp, n_dense, n_discard, n_empty);
    check(n_agg > 0, "aggregation never ran");
    check(n_multi > 0, "several nodes per cycle never ran");
    check(n_fold > 0, "folded node computation never ran");
    check(n_overlap > 0, "node issue never overlapped the aggregation drain");
    check(n_gmp > 0, "mean pooling never ran");
    check(n_dense > 0, "dense layers never ran");
    check(n_discard > 0, "oversize discard never happened");
    check(wc_latency == 206, $sformatf("worst-case latency %0d, paper total 206", wc_latency));
    for (int l = 0; l < NL; l++)
      $display("layer %0d: %0d cycles (paper %0d)", l, lc_first[l], paper_cyc[l]);
    fin = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
