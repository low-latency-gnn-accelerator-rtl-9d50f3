// bias_regs_tb -- bias register file and the per-output bias window.
//
// Loads every bias of the max-latency model with a random Q1.4 value, then
// presents GraphConv node cycles (feature index wraps at dout, since several
// nodes share a cycle), dense cycles (window runs past dout -> zero) and
// aggregation cycles (no bias) and checks each window entry against the loaded
// values at the layer's bias base.  256 multipliers give a 16-entry window.
module bias_regs_tb;
  import gnn_pkg::*;
  localparam int MODEL = MODEL_MAXLAT, MULTS = 256;
  localparam int NB = total_bias(MODEL), BWIN = MULTS >> min_bias_lg(MODEL), BAW = $clog2(NB);
  logic clk = 0;
  logic ld_we = 0;
  logic [BAW-1:0] ld_addr;
  logic signed [BW-1:0] ld_data;
  issue_t iss;
  logic signed [BW-1:0] win [BWIN];
  int ref_b [NB];
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  bias_regs #(.MODEL(MODEL), .MULTS(MULTS)) dut (.*);

  // bias base of each layer, written out from the layer widths 32,128,128,-,256,128,64,1
  int base [8] = '{0, 32, 160, 288, 288, 544, 672, 736};
  int dout [8] = '{32, 128, 128, 256, 256, 128, 64, 1};

  initial begin
    iss = '{op: OP_NONE, li: 0, q0: 0, par: 0};
    checks++;
    if (NB != 737) begin failures++; $display("FAIL bias count %0d", NB); end
    for (int k = 0; k < NB; k++) begin
      @(negedge clk);
      ref_b[k] = int'($urandom_range(31)) - 16;
      ld_we = 1; ld_addr = BAW'(k); ld_data = BW'(ref_b[k]);
    end
    @(negedge clk); ld_we = 0;
    for (int it = 0; it < 300; it++) begin
      automatic int l = (it % 3 == 0) ? int'($urandom_range(2)) : (it % 3 == 1) ? 4 + int'($urandom_range(3)) : int'($urandom_range(2));
      automatic int q0 = int'($urandom_range(300));
      iss.li = 4'(l); iss.q0 = 16'(q0);
      iss.op = (it % 3 == 0) ? OP_NODE : (it % 3 == 1) ? OP_DENSE : OP_AGG;
      #1;
      for (int g = 0; g < BWIN; g++) begin
        automatic int e = 0;
        if (iss.op == OP_NODE) e = ref_b[base[l] + (q0 + g) % dout[l]];
        if (iss.op == OP_DENSE && q0 + g < dout[l]) e = ref_b[base[l] + q0 + g];
        checks++;
        if (int'(win[g]) != e) begin failures++; $display("FAIL op %0d li %0d q0 %0d g %0d: %0d vs %0d", iss.op, l, q0, g, win[g], e); end
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
