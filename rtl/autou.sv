// autou: automorphism unit, permuting one vector of LANES words per cycle.
//
// The automorphism psi_r maps coefficient index n to n * g mod N, g = 5^r
// mod N (N = LANES^2; g is odd and given precomputed). With vector i,
// lane j holding index n = i + LANES*j, the image of a whole vector is one
// vector again: index i*g mod N = i' + LANES*h gives the destination vector
// i' = (i*g) mod LANES and lane j goes to lane (j*g + h) mod LANES. The unit
// receives the vector with its index i and returns the permuted vector with
// index i', which the caller uses as write address.
// Index calculation: one 16-bit product i*g mod N per vector (low bits
// give i', high bits h) and the lane targets j*g + h. The permutation is
// done, as in the paper's AutoU figure, by log2(LANES) pipelined stages,
// stage s merging pairs of 2^s-word chunks into 2^(s+1)-word chunks, kept
// in order or swapped. Inputs are wired to the network in bit-reversed lane
// order and read out bit-reversed; then bit t of the destination lane is
// fixed by stage log2(LANES)-1-t, whose swap decision for a chunk is
// (dst_j XOR j) bit t for any lane j of the chunk. Because g is odd, bit t
// of j*g + h depends only on bits below t of j, which every lane of the
// chunk shares. Swap bits are computed in the index-calculation stage and
// follow the data through index buffers.
// Latency 1 + log2(LANES) cycles, one vector per cycle.
// The paper applies the unit to polynomials in evaluation representation
// with a mapping it does not spell out; this unit implements the mapping
// n -> n * 5^r mod N as the paper's equation states it.
module autou #(
  parameter int unsigned W     = 64,
  parameter int unsigned LANES = 256
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  logic [$clog2(LANES)-1:0]   in_idx,
  input  logic [2*$clog2(LANES)-1:0] g,          // 5^r mod N
  input  logic [W-1:0]               in_vec [LANES],
  input  logic [ark_pkg::ADDR_W-1:0] in_tag,     // carried to out_tag
  output logic                       out_valid,
  output logic [$clog2(LANES)-1:0]   out_idx,
  output logic [ark_pkg::ADDR_W-1:0] out_tag,
  output logic [W-1:0]               out_vec [LANES]
);
  localparam int unsigned S  = $clog2(LANES);
  localparam int unsigned NB = 2 * S;          // bits of an index mod N

  // ---- index calculation ---------------------------------------------------
  logic [NB-1:0] ig;
  logic [S-1:0]  h;
  logic [S-1:0]  dst [LANES];
  logic          sw_c [S][LANES/2];            // swap bit per stage and chunk
  always_comb begin
    ig = NB'(in_idx * g);                      // 16-bit multiply at N = 2^16
    h  = ig[NB-1:S];
    for (int j = 0; j < LANES; j++) dst[j] = S'(S'(j) * g[S-1:0] + h);
    for (int s = 0; s < S; s++)
      for (int b = 0; b < LANES/2; b++) begin
        // chunk b of stage s (only b < LANES >> (s+1) used); representative
        // position b << (s+1) holds original lane bitrev(b << (s+1))
        automatic int unsigned p = (b << (s + 1)) % LANES;
        automatic int unsigned j = ark_pkg::bitrev(p, S);
        automatic int unsigned t = S - 1 - s;
        sw_c[s][b] = dst[j][t] ^ 1'(j >> t);
      end
  end

  // ---- pipeline: stage 0 registers the bit-reversed input and swap bits ---
  logic [W-1:0] pv  [S+1][LANES];
  logic         sw  [S+1][S][LANES/2];         // index buffers
  logic         v   [S+1];
  logic [S-1:0] idx [S+1];
  logic [ark_pkg::ADDR_W-1:0] tag [S+1];

  always_ff @(posedge clk) begin
    for (int j = 0; j < LANES; j++) pv[0][ark_pkg::bitrev(j, S)] <= in_vec[j];
    sw[0]  <= sw_c;
    idx[0] <= ig[S-1:0];
    tag[0] <= in_tag;
    if (rst) v[0] <= 1'b0;
    else     v[0] <= in_valid;
  end

  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int unsigned HALF = 1 << s;
    always_ff @(posedge clk) begin
      for (int b = 0; b < (LANES >> (s + 1)); b++)
        for (int k = 0; k < HALF; k++) begin
          if (sw[s][s][b]) begin
            pv[s+1][b*2*HALF + k]        <= pv[s][b*2*HALF + HALF + k];
            pv[s+1][b*2*HALF + HALF + k] <= pv[s][b*2*HALF + k];
          end else begin
            pv[s+1][b*2*HALF + k]        <= pv[s][b*2*HALF + k];
            pv[s+1][b*2*HALF + HALF + k] <= pv[s][b*2*HALF + HALF + k];
          end
        end
      sw[s+1]  <= sw[s];
      idx[s+1] <= idx[s];
      tag[s+1] <= tag[s];
      if (rst) v[s+1] <= 1'b0;
      else     v[s+1] <= v[s];
    end
  end

  for (genvar j = 0; j < LANES; j++) begin : g_out
    assign out_vec[j] = pv[S][ark_pkg::bitrev(j, S)];
  end
  assign out_valid = v[S];
  assign out_idx   = idx[S];
  assign out_tag   = tag[S];
endmodule
