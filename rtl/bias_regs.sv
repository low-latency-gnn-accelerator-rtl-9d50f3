// bias_regs -- register file of all layer biases.
//
// The paper keeps biases in registers rather than block RAM because there are
// few of them.  Layer l's biases sit at bbase(l) .. bbase(l)+dout(l)-1 (layers in
// order, GMP has none).  For the cycle leaving the multiplier stage (iss) the file
// presents a window win[g], g < BWIN, with the bias of the output feature that
// adder-tree output g produces: feature (q0+g) mod dout for GraphConv node cycles,
// feature q0+g for dense cycles, zero otherwise.  BWIN is the largest number of
// biased outputs per cycle (MULTS>>4, set by GraphConv0).
// Loading: one bias per cycle (ld_we, ld_addr, ld_data) while idle.  Reads are
// combinational.
module bias_regs
  import gnn_pkg::*;
#(
  parameter int MODEL = MODEL_MAXLAT,
  parameter int MULTS = 8192,
  localparam int NB   = total_bias(MODEL),
  localparam int BWIN = MULTS >> min_bias_lg(MODEL),
  localparam int BAW  = $clog2(NB)
) (
  input  logic                  clk,
  input  logic                  ld_we,
  input  logic [BAW-1:0]        ld_addr,
  input  logic signed [BW-1:0]  ld_data,
  input  issue_t                iss,
  output logic signed [BW-1:0]  win [BWIN]
);
  logic signed [BW-1:0] b [NB];

  always_ff @(posedge clk)
    if (ld_we) b[ld_addr] <= ld_data;

  int dout, base;
  always_comb begin
    dout = l_dout(MODEL, int'(iss.li));
    base = l_bbase(MODEL, int'(iss.li));
    for (int g = 0; g < BWIN; g++) begin
      automatic int f = int'(iss.q0) + g;
      win[g] = '0;
      if (iss.op == OP_NODE)                  win[g] = b[base + (f % dout)];
      else if (iss.op == OP_DENSE && f < dout) win[g] = b[base + f];
    end
  end
endmodule
