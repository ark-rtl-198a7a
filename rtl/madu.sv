// madu: multiply-add unit, LANES lanes of modular arithmetic with Barrett
// reduction (the paper names Barrett reduction for the MADUs).
//
// Operations, chosen per vector by op (one modulus q for all lanes):
//   MADU_MUL: a*b mod q    MADU_MAC: a*b + c mod q
//   MADU_ADD: a+b mod q    MADU_SUB: a-b mod q
// Stage 1 forms x = a*b (+c), or the sum/difference; stage 2 the Barrett
// quotient estimate qh = floor(x * mu / 2^(2W)) with mu = floor(2^(2W)/q);
// stage 3 r = x - qh*q followed by up to two subtractions of q. Inputs
// below q, q below 2^(W-1). Latency MADU_LAT = 3 cycles, one vector per
// cycle. A tag (the write-back address) travels with the data.
module madu #(
  parameter int unsigned W     = 64,
  parameter int unsigned LANES = 256
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  ark_pkg::madu_op_e          op,
  input  logic [W-1:0]               a [LANES],
  input  logic [W-1:0]               b [LANES],
  input  logic [W-1:0]               c [LANES],
  input  logic [W-1:0]               q,
  input  logic [2*W-1:0]             mu,
  input  logic [ark_pkg::ADDR_W-1:0] in_tag,
  output logic                       out_valid,
  output logic [ark_pkg::ADDR_W-1:0] out_tag,
  output logic [W-1:0]               y [LANES]
);
  import ark_pkg::*;
  logic [2*W-1:0] x1 [LANES];
  logic [2*W-1:0] x2 [LANES];
  logic [W+1:0]   qh [LANES];
  logic [W-1:0]   q1, q2;
  logic [2*W-1:0] mu1;
  logic [2:0]     vv;
  logic [ADDR_W-1:0] t1, t2, t3;

  always_ff @(posedge clk) begin
    for (int k = 0; k < LANES; k++) begin
      unique case (op)
        MADU_MUL: x1[k] <= (2*W)'(a[k]) * (2*W)'(b[k]);
        MADU_MAC: x1[k] <= (2*W)'(a[k]) * (2*W)'(b[k]) + (2*W)'(c[k]);
        MADU_ADD: x1[k] <= (2*W)'(a[k]) + (2*W)'(b[k]);
        default:  x1[k] <= (2*W)'(a[k]) + (2*W)'(q) - (2*W)'(b[k]);
      endcase
    end
    q1 <= q; mu1 <= mu; t1 <= in_tag;
    // stage 2: quotient estimate
    for (int k = 0; k < LANES; k++) begin
      qh[k] <= (W+2)'(((4*W)'(x1[k]) * (4*W)'(mu1)) >> (2*W));
      x2[k] <= x1[k];
    end
    q2 <= q1; t2 <= t1;
    // stage 3: remainder and correction
    for (int k = 0; k < LANES; k++) begin
      logic [2*W-1:0] r;
      r = x2[k] - (2*W)'(qh[k]) * (2*W)'(q2);
      if (r >= (2*W)'(q2)) r = r - (2*W)'(q2);
      if (r >= (2*W)'(q2)) r = r - (2*W)'(q2);
      y[k] <= r[W-1:0];
    end
    t3 <= t2;
    if (rst) vv <= '0;
    else     vv <= {vv[1:0], in_valid};
  end
  assign out_valid = vv[2];
  assign out_tag   = t3;
endmodule
