// noc: inter-cluster network, a multiplexer network joining the same lane
// of every cluster.
//
// Each cluster offers one vector per cycle (tx_vec, tx_valid); for each
// destination cluster d, sel[d] picks the source cluster whose vector d
// receives next cycle. With sel[d] = (d - t) mod CLUSTERS in round t, the
// four clusters perform the all-to-all exchange that switches a polynomial
// between limb-wise and coefficient-wise distribution without conflicts.
// Lane k of a destination only ever receives lane k of a source. Latency
// one cycle; a source may feed several destinations (a broadcast).
module noc #(
  parameter int unsigned W        = 64,
  parameter int unsigned LANES    = 256,
  parameter int unsigned CLUSTERS = 4
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        tx_valid [CLUSTERS],
  input  logic [W-1:0]                tx_vec   [CLUSTERS][LANES],
  input  logic [$clog2(CLUSTERS)-1:0] sel      [CLUSTERS],
  input  logic                        rx_en    [CLUSTERS],
  output logic                        rx_valid [CLUSTERS],
  output logic [W-1:0]                rx_vec   [CLUSTERS][LANES]
);
  for (genvar d = 0; d < CLUSTERS; d++) begin : g_dst
    always_ff @(posedge clk) begin
      rx_vec[d] <= tx_vec[sel[d]];
      if (rst) rx_valid[d] <= 1'b0;
      else     rx_valid[d] <= rx_en[d] && tx_valid[sel[d]];
    end
  end
endmodule
