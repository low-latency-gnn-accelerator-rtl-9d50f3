// sigmoid_unit_tb -- PLAN sigmoid against its breakpoints and a float sigmoid.
//
// Sweeps every logit from -8.0 to +8.0 (Q12.5) and compares prob with the
// piecewise-linear formula worked out here and with a real sigmoid (the PLAN
// error stays below 0.025 after 8-bit truncation), and checks the decision err = logit > 0.
module sigmoid_unit_tb;
  logic signed [16:0] logit;
  logic [7:0] prob;
  logic err;
  int checks = 0, failures = 0;

  sigmoid_unit #(.FW(17), .FF(5)) dut (.*);

  function automatic int plan(int x);   // x in 1/32
    int ax = (x < 0) ? -x : x;
    real r = ax / 32.0, y;
    if (r >= 5.0)        y = 1.0;
    else if (r >= 2.375) y = 0.03125 * r + 0.84375;
    else if (r >= 1.0)   y = 0.125 * r + 0.625;
    else                 y = 0.25 * r + 0.5;
    if (x < 0) return 256 - int'($floor(y * 256.0 + 1e-9));
    return (int'($floor(y * 256.0 + 1e-9)) > 255) ? 255 : int'($floor(y * 256.0 + 1e-9));
  endfunction

  initial begin
    for (int x = -256; x <= 256; x++) begin
      automatic real s;
      logit = 17'(x);
      #1;
      s = 1.0 / (1.0 + $exp(-x / 32.0));
      checks++;
      if (int'(prob) != plan(x) || err != (x > 0)) begin
        failures++; $display("FAIL x=%0d prob=%0d expected %0d", x, prob, plan(x));
      end
      checks++;
      if ((prob / 256.0 - s) > 0.025 || (s - prob / 256.0) > 0.025) begin
        failures++; $display("FAIL x=%0d prob=%0d far from sigmoid %f", x, prob, s);
      end
    end
    logit = 17'sd30000; #1; checks++; if (prob != 255 || !err) failures++;
    logit = -17'sd30000; #1; checks++; if (prob != 0 || err) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
