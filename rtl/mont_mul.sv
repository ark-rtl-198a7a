// mont_mul: pipelined Montgomery modular multiplier, y = a * b * 2^-W mod q.
//
// Stage 1 registers the full 2W-bit product; mont_redc then reduces it in
// LAT-1 further stages (LAT = 3 for the NTT and twisting data path, LAT = 2
// for the twisting-factor generators, as the legend of the NTT unit figure
// gives). Operands below q; q odd and below 2^(W-1). When one operand is
// held in Montgomery form (x * 2^W mod q), y is the plain product mod q.
// All stages advance when en is high; q and qinv follow the data.
module mont_mul #(
  parameter int unsigned W   = 64,
  parameter int unsigned LAT = 3
) (
  input  logic         clk,
  input  logic         en,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  input  logic [W-1:0] qinv,
  output logic [W-1:0] y
);
  logic [2*W-1:0] p_s;
  logic [W-1:0]   q_s, qi_s;

  always_ff @(posedge clk) begin
    if (en) begin
      p_s  <= (2*W)'(a) * (2*W)'(b);
      q_s  <= q;
      qi_s <= qinv;
    end
  end

  mont_redc #(.W(W), .LAT(LAT - 1)) u_redc (
    .clk(clk), .en(en), .t_in(p_s), .q(q_s), .qinv(qi_s), .y(y));

  initial assert (LAT == 2 || LAT == 3) else $error("mont_mul: LAT must be 2 or 3");
endmodule
