// mult_array_tb -- products, operand select and saturation of the multiplier stage.
//
// Weight-row and edge-weight operands are checked against integer products,
// saturated to the 27-bit accumulator; the descriptor and products must appear
// one cycle after the operands.
module mult_array_tb;
  import gnn_pkg::*;
  localparam int MULTS = 32, SW = 22, AW = 27;
  logic clk = 0, rst_n = 0;
  issue_t iss, iss_q;
  logic signed [SW-1:0] a [MULTS];
  logic signed [WW-1:0] w [MULTS];
  logic [WW-1:0] eb [MULTS];
  logic signed [AW-1:0] prod_q [MULTS];
  longint expd [MULTS];
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  mult_array #(.MULTS(MULTS), .SW(SW), .AW(AW)) dut (.*);

  function automatic longint sat(longint v);
    longint hi = (64'sd1 <<< (AW - 1)) - 1;
    return (v > hi) ? hi : (v < -hi - 1) ? -hi - 1 : v;
  endfunction

  initial begin
    iss = '{op: OP_NONE, li: 0, q0: 0, par: 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      iss.op = (it % 2) ? OP_AGG : OP_NODE;
      iss.q0 = 16'(it);
      for (int p = 0; p < MULTS; p++) begin
        a[p]  = (it < 4) ? SW'(int'($urandom_range(4194303)) - 2097152) : SW'(int'($urandom_range(4000)) - 2000);
        w[p]  = WW'(int'($urandom_range(16383)) - 8192);
        eb[p] = WW'($urandom_range(1024));
        expd[p] = sat(longint'(a[p]) * ((iss.op == OP_AGG) ? longint'($signed(eb[p])) : longint'(w[p])));
      end
      @(negedge clk);
      checks++;
      if (iss_q.op != iss.op || iss_q.q0 != iss.q0) begin failures++; $display("FAIL descriptor"); end
      for (int p = 0; p < MULTS; p++) begin
        checks++;
        if (longint'(prod_q[p]) != expd[p]) begin
          failures++; $display("FAIL it %0d lane %0d: %0d vs %0d", it, p, prod_q[p], expd[p]);
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
