// gnn_decoder_top_tb -- end-to-end test of the decoder, both models, reduced size.
//
// Runs gnn_top_harness twice: the max-latency model (Q12.5 features, 27-bit
// accumulation) and the average-latency model (extra GraphConv layer, Q18.5
// features, 28-bit accumulation), each with 1,024 multipliers and graphs of up
// to 8 nodes so that every layer is folded over many cycles.
module gnn_decoder_top_tb;
  import gnn_pkg::*;
  logic fa, fb;
  int ca, fa_n, cb, fb_n;

  gnn_top_harness #(.MODEL(MODEL_MAXLAT), .NMAX(8), .MULTS(1024), .FW(17), .AW(27), .NG(7), .SEED(3))
    u_a (.run(1'b1), .fin(fa), .checks(ca), .failures(fa_n));
  gnn_top_harness #(.MODEL(MODEL_AVGLAT), .NMAX(8), .MULTS(1024), .FW(23), .AW(28), .NG(6), .SEED(5))
    u_b (.run(fa), .fin(fb), .checks(cb), .failures(fb_n));

  initial begin
    wait (fa === 1'b1 && fb === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa_n + fb_n);
    $finish;
  end

  initial begin
    #20_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa_n + fb_n + 1);
    $finish;
  end
endmodule
