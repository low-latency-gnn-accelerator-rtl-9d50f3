// weight_store_tb -- bank-addressed loading and full-row parallel reads.
//
// 42 lanes over 9 banks (the last bank half used): lane p of a row must come
// from bank p/5, slot p%5, one cycle after the row address.
module weight_store_tb;
  localparam int MULTS = 42, NBANK = 9;
  logic clk = 0, ld_we = 0;
  logic [3:0] ld_bank = 0;
  logic [3:0] ld_addr = 0, rd_addr = 0;
  logic [69:0] ld_data = 0;
  logic signed [13:0] rd_row [MULTS];
  int lane [16][NBANK*5];
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  weight_store #(.MULTS(MULTS), .WPA(5), .WW(14), .DEPTH(16)) dut (.*);

  initial begin
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < NBANK; b++) begin
        @(negedge clk);
        ld_we = 1; ld_bank = 4'(b); ld_addr = 4'(a);
        for (int k = 0; k < 5; k++) begin
          lane[a][b*5+k] = int'($urandom_range(16383)) - 8192;
          ld_data[k*14 +: 14] = 14'(lane[a][b*5+k]);
        end
      end
    @(negedge clk); ld_we = 0;
    for (int a = 0; a < 16; a++) begin
      rd_addr = 4'(a);
      @(negedge clk);
      for (int p = 0; p < MULTS; p++) begin
        checks++;
        if (int'(rd_row[p]) != lane[a][p]) begin
          failures++; $display("FAIL row %0d lane %0d: %0d vs %0d", a, p, rd_row[p], lane[a][p]);
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
