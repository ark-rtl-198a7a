// butterfly_unit: one radix-2 Cooley-Tukey butterfly of the NTT unit.
//
//   x = u + w*v mod q,   y = u - w*v mod q
//
// w is the twiddle factor in Montgomery form, so the Montgomery multiplier
// returns the plain product w*v mod q. As in the paper's butterfly figure,
// v goes through a 3-cycle modular multiplier while u waits in a 3-entry
// delay buffer; the modular adder and subtractor are followed by an output
// register, so the latency is BFLY_LAT = 4 cycles, one butterfly per cycle.
// The figure also shows a second, Gentleman-Sande path for INTT; here the
// inverse transform reuses this same butterfly with inverse twiddles (see
// nttu), which gives the same result.
module butterfly_unit #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic [W-1:0] u,
  input  logic [W-1:0] v,
  input  logic [W-1:0] w,
  input  logic [W-1:0] q,
  input  logic [W-1:0] qinv,
  output logic [W-1:0] x,
  output logic [W-1:0] y
);
  localparam int unsigned ML = ark_pkg::MONT_LAT_NTT;
  logic [W-1:0] wv;
  logic [W-1:0] u_d [ML];
  logic [W-1:0] q_d [ML];
  logic [W:0]   s, d;

  mont_mul #(.W(W), .LAT(ML)) u_mul (
    .clk(clk), .en(1'b1), .a(v), .b(w), .q(q), .qinv(qinv), .y(wv));

  always_ff @(posedge clk) begin
    u_d[0] <= u;
    q_d[0] <= q;
    for (int i = 1; i < ML; i++) begin
      u_d[i] <= u_d[i-1];
      q_d[i] <= q_d[i-1];
    end
  end

  always_comb begin
    s = {1'b0, u_d[ML-1]} + {1'b0, wv};
    if (s >= {1'b0, q_d[ML-1]}) s = s - {1'b0, q_d[ML-1]};
    d = {1'b0, u_d[ML-1]} + {1'b0, q_d[ML-1]} - {1'b0, wv};
    if (d >= {1'b0, q_d[ML-1]}) d = d - {1'b0, q_d[ML-1]};
  end

  always_ff @(posedge clk) begin
    x <= s[W-1:0];
    y <= d[W-1:0];
  end
endmodule
