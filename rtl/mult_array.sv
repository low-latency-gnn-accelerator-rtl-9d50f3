// mult_array -- pipeline stage 2: the multiplier array.
//
// MULTS signed multipliers, one per DSP slice (the paper uses 8,192 of the 12,288
// DSPs of its FPGA).  Lane p multiplies the stage-1 feature operand a[p] by either
// the weight row from block RAM (w[p]) or, in aggregation cycles, the edge weight
// eb[p]; the select is the DSP input multiplexer.  Operands are Qx.5 features and
// Q4.10 weights, so a product has 15 fraction bits, the accumulator's format; it
// is saturated to the AW-bit accumulator width (Q12.15 by default).  The
// 22 x 14 bit operands stay within one DSP, as the paper requires (<= 48 bits).
// Saturation at this point is this design's choice.
// Timing: products are registered, one cycle after the operands.
module mult_array
  import gnn_pkg::*;
#(
  parameter int MULTS = 8192,
  parameter int SW    = 22,
  parameter int AW    = 27
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  issue_t                iss,
  input  logic signed [SW-1:0]  a  [MULTS],
  input  logic signed [WW-1:0]  w  [MULTS],
  input  logic [WW-1:0]         eb [MULTS],
  output issue_t                iss_q,
  output logic signed [AW-1:0]  prod_q [MULTS]
);
  localparam int PW = SW + WW;
  localparam logic signed [PW-1:0] PMAX = PW'((64'sd1 <<< (AW - 1)) - 1);
  localparam logic signed [PW-1:0] PMIN = -PW'(64'sd1 <<< (AW - 1));

  logic signed [AW-1:0] prod_d [MULTS];

  always_comb begin
    for (int p = 0; p < MULTS; p++) begin
      automatic logic signed [WW-1:0] b = (iss.op == OP_AGG) ? $signed(eb[p]) : w[p];
      automatic logic signed [PW-1:0] m = PW'(a[p]) * PW'(b);
      if (m > PMAX)      prod_d[p] = PMAX[AW-1:0];
      else if (m < PMIN) prod_d[p] = PMIN[AW-1:0];
      else               prod_d[p] = m[AW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) iss_q <= '{op: OP_NONE, li: '0, q0: '0, par: 1'b0};
    else        iss_q <= iss;
  end

  always_ff @(posedge clk) prod_q <= prod_d;
endmodule
