// output_stage -- bias, rounding, saturation and ReLU at the end of stage 3.
//
// Takes the tapped adder-tree sums (Q12.15 accumulations by default) of the cycle
// in flight.  For GraphConv node and dense cycles it adds the bias of each output
// (Q1.4, sign-extended and shifted to 15 fraction bits) inside the accumulator
// width, as the paper does in the final accumulation.  Every result is then
// rounded to the feature format (round half up: add half an LSB and drop the
// AF-FF low bits), saturated to FW bits and, for layers with ReLU, clamped at
// zero.  Aggregation and GMP results get neither bias nor ReLU.  Rounding after
// accumulation follows the paper; the rounding mode and the saturation are this
// design's choices.  Combinational.
module output_stage
  import gnn_pkg::*;
#(
  parameter int MODEL = MODEL_MAXLAT,
  parameter int MULTS = 8192,
  parameter int FW    = 17,
  parameter int AW    = 27,
  localparam int BWIN = MULTS >> min_bias_lg(MODEL)
) (
  input  issue_t                iss,
  input  logic signed [AW-1:0]  sum  [MULTS],
  input  logic signed [BW-1:0]  bias [BWIN],
  output logic signed [FW-1:0]  val  [MULTS]
);
  localparam int SH = AF - FF;
  // width holding both the rounded accumulation and the feature range
  localparam int TW = (AW - SH + 1 > FW + 1) ? AW - SH + 1 : FW + 1;
  localparam logic signed [TW-1:0] FMAX = TW'((64'sd1 <<< (FW - 1)) - 1);
  localparam logic signed [TW-1:0] FMIN = -TW'(64'sd1 <<< (FW - 1));

  logic relu, biased;
  always_comb begin
    biased = (iss.op == OP_NODE) || (iss.op == OP_DENSE);
    relu   = biased && l_relu(MODEL, int'(iss.li));
  end

  always_comb begin
    for (int g = 0; g < MULTS; g++) begin
      automatic logic signed [AW-1:0] acc = sum[g];
      automatic logic signed [AW:0]   r;
      automatic logic signed [TW-1:0] t;
      if (biased && g < BWIN) acc = acc + (AW'(bias[g]) <<< (AF - BF));
      r = (AW+1)'(acc) + (AW+1)'(1 << (SH - 1));
      t = TW'(r >>> SH);
      if (t > FMAX)      val[g] = FMAX[FW-1:0];
      else if (t < FMIN) val[g] = FMIN[FW-1:0];
      else               val[g] = t[FW-1:0];
      if (relu && val[g] < 0) val[g] = '0;
    end
  end
endmodule
