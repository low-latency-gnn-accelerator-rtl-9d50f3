// adder_tree_tb -- every tap level against directly summed blocks of products.
module adder_tree_tb;
  localparam int MULTS = 64, AW = 27;
  logic [2:0] tap;
  logic signed [AW-1:0] prod [MULTS];
  logic signed [AW-1:0] sum  [MULTS];
  int checks = 0, failures = 0;

  adder_tree #(.MULTS(MULTS), .AW(AW)) dut (.*);

  initial begin
    for (int it = 0; it < 20; it++) begin
      for (int p = 0; p < MULTS; p++)
        prod[p] = (it == 0) ? AW'(p + 1) : AW'(int'($urandom_range(2000000)) - 1000000);
      for (int t = 0; t <= 6; t++) begin
        tap = 3'(t);
        #1;
        for (int g = 0; g < MULTS; g++) begin
          automatic longint s = 0;
          if (g < (MULTS >> t)) for (int k = 0; k < (1 << t); k++) s += prod[g * (1 << t) + k];
          checks++;
          if (longint'(sum[g]) != s) begin
            failures++; $display("FAIL tap %0d out %0d: %0d vs %0d", t, g, sum[g], s);
          end
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
