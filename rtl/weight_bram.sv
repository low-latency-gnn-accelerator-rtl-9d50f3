// weight_bram -- one block RAM of the weight store.
//
// Each address holds WPA weights of WW bits packed side by side (weight k in bits
// [k*WW +: WW]); the default 5 x 14 = 70 bits fits the 72-bit width of a 36 Kb
// FPGA block RAM, whose 512-entry depth is the default DEPTH.  Packing five weights
// per address follows the paper; the depth and the single write port used to load
// the weights before decoding are this design's choices.
// Timing: synchronous read, rd_data is valid the cycle after rd_addr is presented;
// a write takes effect at the clock edge and is seen by reads of later cycles.
module weight_bram #(
  parameter int WPA   = 5,
  parameter int WW    = 14,
  parameter int DEPTH = 512,
  localparam int AW_  = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW_-1:0]      wr_addr,
  input  logic [WPA*WW-1:0]   wr_data,
  input  logic [AW_-1:0]      rd_addr,
  output logic [WPA*WW-1:0]   rd_data
);
  logic [WPA*WW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
