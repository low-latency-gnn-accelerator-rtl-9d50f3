// output_stage_tb -- bias alignment, round half up, saturation and ReLU.
//
// Drives random accumulations and biases for node, dense (ReLU layers and the
// final logit) and aggregation cycles and compares with integer arithmetic.
module output_stage_tb;
  import gnn_pkg::*;
  localparam int MULTS = 64, FW = 17, AW = 27, BWIN = MULTS >> 4;
  issue_t iss;
  logic signed [AW-1:0] sum  [MULTS];
  logic signed [BW-1:0] bias [BWIN];
  logic signed [FW-1:0] val  [MULTS];
  int checks = 0, failures = 0;

  output_stage #(.MODEL(MODEL_MAXLAT), .MULTS(MULTS), .FW(FW), .AW(AW)) dut (.*);

  initial begin
    op_e ops [4] = '{OP_NODE, OP_DENSE, OP_DENSE, OP_AGG};
    int  lis [4] = '{1, 4, 7, 1};
    for (int it = 0; it < 200; it++) begin
      automatic int k = it % 4;
      iss = '{op: ops[k], li: 4'(lis[k]), q0: 0, par: 0};
      for (int g = 0; g < MULTS; g++)
        sum[g] = (it < 8) ? AW'(int'($urandom_range(134217727)) - 67108864) : AW'(int'($urandom_range(400000)) - 200000);
      for (int g = 0; g < BWIN; g++) bias[g] = BW'(int'($urandom_range(31)) - 16);
      #1;
      for (int g = 0; g < MULTS; g++) begin
        automatic longint acc = sum[g];
        automatic longint r;
        automatic bit biased = (ops[k] != OP_AGG);
        if (biased && g < BWIN) acc += longint'(bias[g]) * 2048;
        if (acc >= (1 <<< 26)) acc -= (1 <<< 27);
        if (acc < -(1 <<< 26)) acc += (1 <<< 27);
        r = (acc + 512) >>> 10;
        if (r > 65535) r = 65535;
        if (r < -65536) r = -65536;
        if (biased && lis[k] != 7 && r < 0) r = 0;
        checks++;
        if (longint'(val[g]) != r) begin
          failures++; $display("FAIL it %0d g %0d: %0d vs %0d", it, g, val[g], r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
