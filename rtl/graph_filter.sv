// graph_filter -- latency-bounded input-graph filtering.
//
// The decoder is sized for graphs of at most NMAX nodes (30 for the
// max-latency model, 32 for the average-latency one).  Larger graphs are rare
// (their probability is below the target logical error rate) and are discarded
// without being processed: the answer is then the default "no logical error",
// as in the paper.  A graph with no nodes has no detection events and is
// answered the same way without running the network (this design's choice; the
// network's mean pooling is undefined for it).
// Handshake: start is a one-cycle request with the graph's node count n_in.
// One cycle later exactly one of go (decode, with n_nodes latched) or bypass
// (answer "no error" now; oversize tells why) pulses.  start is ignored while
// busy is high.
module graph_filter #(
  parameter int NMAX = 30,
  parameter int NINW = 8,                      // width of the raw node count
  localparam int NW  = $clog2(NMAX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NINW-1:0]  n_in,
  input  logic             busy,
  output logic             go,
  output logic             bypass,
  output logic             oversize,
  output logic [NW-1:0]    n_nodes
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      go       <= 1'b0;
      bypass   <= 1'b0;
      oversize <= 1'b0;
      n_nodes  <= '0;
    end else begin
      go     <= 1'b0;
      bypass <= 1'b0;
      if (start && !busy) begin
        oversize <= (n_in > NINW'(NMAX));
        if (n_in == '0 || n_in > NINW'(NMAX)) begin
          bypass <= 1'b1;
        end else begin
          go      <= 1'b1;
          n_nodes <= NW'(n_in);
        end
      end
    end
  end

  // go and bypass never pulse together.
  a_excl: assert property (@(posedge clk) disable iff (!rst_n) !(go && bypass));
endmodule
