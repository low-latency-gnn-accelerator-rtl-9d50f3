// weight_store -- the bank of parallel block RAMs that feeds the multiplier array.
//
// NBANK = ceil(MULTS/WPA) weight_bram instances are all read at the same address,
// so one read returns a full row of MULTS weights, one per multiplier lane
// (lane p comes from bank p/WPA, slot p%WPA).  With the paper's 8,192 multipliers
// and five 14-bit weights per address this is 1,639 block RAMs.  A row holds the
// weights of one folded issue cycle of a layer, laid out as the lanes use them;
// the rows from gmp_base upward hold the global-mean-pooling factors 1/N (row
// gmp_base+N), so pooling needs no divider.
// Loading: one bank word per cycle through ld_we/ld_bank/ld_addr/ld_data, before a
// decode starts.  Timing: rd_row is registered one cycle after rd_addr.
module weight_store #(
  parameter int MULTS = 8192,
  parameter int WPA   = 5,
  parameter int WW    = 14,
  parameter int DEPTH = 512,
  localparam int NBANK = (MULTS + WPA - 1) / WPA,
  localparam int AW_   = $clog2(DEPTH),
  localparam int BKW   = $clog2(NBANK + 1)
) (
  input  logic                    clk,
  input  logic                    ld_we,
  input  logic [BKW-1:0]          ld_bank,
  input  logic [AW_-1:0]          ld_addr,
  input  logic [WPA*WW-1:0]       ld_data,
  input  logic [AW_-1:0]          rd_addr,
  output logic signed [WW-1:0]    rd_row [MULTS]
);
  logic [WPA*WW-1:0] word [NBANK];

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    weight_bram #(.WPA(WPA), .WW(WW), .DEPTH(DEPTH)) u_bram (
      .clk     (clk),
      .we      (ld_we && (ld_bank == BKW'(b))),
      .wr_addr (ld_addr),
      .wr_data (ld_data),
      .rd_addr (rd_addr),
      .rd_data (word[b])
    );
  end

  always_comb begin
    for (int p = 0; p < MULTS; p++) rd_row[p] = word[p / WPA][(p % WPA) * WW +: WW];
  end
endmodule
