// weight_bram_tb -- write random words, read them back one cycle after the address.
module weight_bram_tb;
  logic clk = 0, we = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  logic [69:0] wr_data = 0, rd_data;
  logic [69:0] model [64];
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  weight_bram #(.WPA(5), .WW(14), .DEPTH(64)) dut (.*);

  initial begin
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      we = 1; wr_addr = 6'(a); wr_data = {$urandom, $urandom, $urandom};
      model[a] = wr_data;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 200; k++) begin
      automatic int a = int'($urandom_range(63));
      rd_addr = 6'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
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
