// sigmoid_unit -- final sigmoid of the decoder's output logit.
//
// The classifier ends in one logit x (feature format Q12.5 by default); the
// paper applies a sigmoid to obtain the probability of a logical error.  Here
// the sigmoid is the piecewise-linear PLAN approximation (slopes 1/4, 1/8, 1/32
// with breakpoints at |x| = 1, 2.375 and 5, mirrored for x < 0), which needs only
// shifts and adds:  y(|x|) = 0.25|x|+0.5 | 0.125|x|+0.625 | 0.03125|x|+0.84375 | 1,
// and y(x) = 1 - y(|x|) for x < 0.  prob is y in units of 1/256, saturated at
// 255.  The decision err is set when the probability exceeds one half, i.e. when
// the logit is positive.  The approximation and the output format are this
// design's choices; the paper only names the sigmoid.  Combinational.
module sigmoid_unit #(
  parameter int FW = 17,
  parameter int FF = 5
) (
  input  logic signed [FW-1:0] logit,
  output logic [7:0]           prob,
  output logic                 err
);
  localparam int ONE = 1 << FF;            // 1.0 in logit units
  logic [FW:0]  ax;                        // |x|
  logic [FW+8:0] y;                        // y(|x|) in 1/256 units

  always_comb begin
    ax = (logit < 0) ? (FW+1)'(-(FW+1)'(logit)) : (FW+1)'(logit);
    if (ax >= (FW+1)'(5 * ONE))
      y = (FW+9)'(256);
    else if (ax >= (FW+1)'((19 * ONE) / 8))           // 2.375
      y = (FW+9)'(((int'(ax) << 8) >> (FF + 5)) + 216);
    else if (ax >= (FW+1)'(ONE))
      y = (FW+9)'(((int'(ax) << 8) >> (FF + 3)) + 160);
    else
      y = (FW+9)'(((int'(ax) << 8) >> (FF + 2)) + 128);
    if (logit < 0) prob = 8'(256 - y);
    else           prob = (y > 255) ? 8'd255 : y[7:0];
    err = (logit > 0);
  end
endmodule
