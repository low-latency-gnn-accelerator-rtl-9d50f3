// graph_filter_tb -- node-count filter: accept 1..NMAX, bypass 0 and oversize.
module graph_filter_tb;
  logic clk = 0, rst_n = 0, start = 0, busy = 0;
  logic [7:0] n_in = 0;
  logic go, bypass, oversize;
  logic [4:0] n_nodes;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  graph_filter #(.NMAX(30), .NINW(8)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic try(int n, bit b);
    @(negedge clk); start = 1; n_in = 8'(n); busy = b;
    @(negedge clk); start = 0; busy = 0;
    if (b) check(!go && !bypass, $sformatf("n=%0d ignored while busy", n));
    else if (n >= 1 && n <= 30) check(go && !bypass && n_nodes == 5'(n), $sformatf("n=%0d accepted", n));
    else check(!go && bypass && oversize == (n > 30), $sformatf("n=%0d bypassed", n));
    @(negedge clk);
    check(!go && !bypass, "pulses last one cycle");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    try(1, 0); try(30, 0); try(31, 0); try(0, 0); try(168, 0); try(12, 1); try(17, 0);
    for (int k = 0; k < 20; k++) try(int'($urandom_range(60)), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
