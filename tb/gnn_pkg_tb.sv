// gnn_pkg_tb -- checks the layer table and schedule arithmetic of gnn_pkg.
//
// Compares, at the default size (8,192 multipliers, 30 nodes), the layer shapes
// with the paper's multiplication counts, the parameter total with its 1.5e5,
// the per-layer cycle counts with its worst-case table where the schedule
// reproduces them, the 206-cycle total, and the 1,639 weight block RAMs.
module gnn_pkg_tb;
  import gnn_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int mul [8] = '{320, 8192, 32768, 256, 65536, 32768, 8192, 64};
    int mul_avg [9] = '{320, 8192, 65536, 131072, 256, 65536, 32768, 8192, 64};
    int params = 0;
    for (int l = 0; l < num_layers(MODEL_MAXLAT); l++) begin
      automatic int m = (l_kind(MODEL_MAXLAT, l) == L_GCONV) ? 2 * l_din(MODEL_MAXLAT, l) * l_dout(MODEL_MAXLAT, l)
            : (l_kind(MODEL_MAXLAT, l) == L_GMP) ? l_dout(MODEL_MAXLAT, l)
            : l_din(MODEL_MAXLAT, l) * l_dout(MODEL_MAXLAT, l);
      check(m == mul[l], $sformatf("max-latency layer %0d multiplies %0d, paper %0d", l, m, mul[l]));
      if (l_kind(MODEL_MAXLAT, l) != L_GMP) params += m + l_dout(MODEL_MAXLAT, l);
    end
    for (int l = 0; l < num_layers(MODEL_AVGLAT); l++) begin
      automatic int m = (l_kind(MODEL_AVGLAT, l) == L_GCONV) ? 2 * l_din(MODEL_AVGLAT, l) * l_dout(MODEL_AVGLAT, l)
            : (l_kind(MODEL_AVGLAT, l) == L_GMP) ? l_dout(MODEL_AVGLAT, l)
            : l_din(MODEL_AVGLAT, l) * l_dout(MODEL_AVGLAT, l);
      check(m == mul_avg[l], $sformatf("average-latency layer %0d multiplies %0d, paper %0d", l, m, mul_avg[l]));
    end
    check(params > 145000 && params < 155000, $sformatf("parameter count %0d, paper 1.5e5", params));
    check(layer_cycles(MODEL_MAXLAT, 0, 30, 8192, 30) == 7,   "GraphConv0 7 cycles");
    check(layer_cycles(MODEL_MAXLAT, 2, 30, 8192, 30) == 137, "GraphConv2 137 cycles");
    check(layer_cycles(MODEL_MAXLAT, 4, 30, 8192, 30) == 10,  "Dense0 10 cycles");
    check(layer_cycles(MODEL_MAXLAT, 5, 30, 8192, 30) == 6,   "Dense1 6 cycles");
    check(layer_cycles(MODEL_MAXLAT, 6, 30, 8192, 30) == 3,   "Dense2 3 cycles");
    check(layer_cycles(MODEL_MAXLAT, 7, 30, 8192, 30) == 3,   "DenseOut 3 cycles");
    check(decode_cycles(MODEL_MAXLAT, 30, 8192, 30) == 206,   "total 206 cycles");
    check((8192 + WPA - 1) / WPA == 1639, "1639 block RAMs");
    check(l_rows(MODEL_MAXLAT, 4, 8192) == 8, "Dense0 folded over 8 rows");
    check(gmp_base(MODEL_MAXLAT, 8192) + 30 < 512, "weights and 1/N factors fit one BRAM depth");
    check(total_bias(MODEL_MAXLAT) == 737, "737 biases");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
