// adder_tree -- shared, tappable reduction tree of pipeline stage 3.
//
// A single binary tree of adders over all MULTS products.  Level k holds
// MULTS>>k partial sums, each the sum of an aligned block of 2**k products, so
// tapping the tree at level `tap` yields MULTS>>tap dot products of length
// 2**tap at once.  Every layer of the decoder packs its dot products into such
// power-of-two groups (GraphConv0's 10-term dot products are padded to 16), which
// is how one tree serves all layers; the paper shares adder trees between layers
// of compatible output shape for the same reason.  Additions wrap at AW bits,
// the accumulator width, so the result does not depend on the order of addition.
// Outputs above MULTS>>tap are zero.  Purely combinational: the paper splits
// this tree over the end of stage 2 and stage 3; here it sits wholly in stage 3.
module adder_tree #(
  parameter int MULTS = 8192,
  parameter int AW    = 27,
  localparam int LV   = $clog2(MULTS),
  localparam int TW   = $clog2(LV + 1)
) (
  input  logic [TW-1:0]         tap,
  input  logic signed [AW-1:0]  prod [MULTS],
  output logic signed [AW-1:0]  sum  [MULTS]
);
  logic signed [AW-1:0] lvl [LV+1][MULTS];

  always_comb begin
    for (int k = 0; k <= LV; k++)
      for (int i = 0; i < MULTS; i++) lvl[k][i] = '0;
    for (int i = 0; i < MULTS; i++) lvl[0][i] = prod[i];
    for (int k = 1; k <= LV; k++)
      for (int i = 0; i < (MULTS >> k); i++)
        lvl[k][i] = lvl[k-1][2*i] + lvl[k-1][2*i+1];
  end

  always_comb begin
    for (int g = 0; g < MULTS; g++)
      sum[g] = (g < (MULTS >> tap)) ? lvl[tap][g] : '0;
  end
endmodule
