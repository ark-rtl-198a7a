// bconv_mult_unit: first step of base conversion, fused onto the INTT output.
//
// Every word of the vector is multiplied by one per-limb constant c in
// Montgomery form: for BConv this is p_hat_j^-1 mod p_j, and this design
// folds the INTT scale N^-1 into the same constant. When bypass is high
// (NTT direction) the vector passes unchanged with the same latency.
// Latency MONT_LAT_NTT = 3 cycles, one vector per cycle.
module bconv_mult_unit #(
  parameter int unsigned W     = 64,
  parameter int unsigned LANES = 256
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic         bypass,
  input  logic [W-1:0] in_vec [LANES],
  input  logic [W-1:0] c,
  input  logic [W-1:0] q,
  input  logic [W-1:0] qinv,
  output logic         out_valid,
  output logic [W-1:0] out_vec [LANES]
);
  localparam int unsigned ML = ark_pkg::MONT_LAT_NTT;
  logic [W-1:0] prod [LANES];
  logic [W-1:0] raw  [ML][LANES];
  logic [ML-1:0] vld, byp;

  for (genvar k = 0; k < LANES; k++) begin : g_lane
    mont_mul #(.W(W), .LAT(ML)) u_mul (
      .clk(clk), .en(1'b1), .a(in_vec[k]), .b(c), .q(q), .qinv(qinv), .y(prod[k]));
    assign out_vec[k] = byp[ML-1] ? raw[ML-1][k] : prod[k];
  end

  always_ff @(posedge clk) begin
    raw[0] <= in_vec;
    for (int i = 1; i < ML; i++) raw[i] <= raw[i-1];
    if (rst) begin
      vld <= '0; byp <= '0;
    end else begin
      vld <= {vld[ML-2:0], in_valid};
      byp <= {byp[ML-2:0], bypass};
    end
  end
  assign out_valid = vld[ML-1];
endmodule
