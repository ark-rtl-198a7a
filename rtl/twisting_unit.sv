// twisting_unit: multiplies every lane by a twisting factor generated on
// the fly (the paper's OF-Twist).
//
// In the 4-step NTT, vector i of a limb, lane k is multiplied by w_N^(i*k).
// For a fixed lane this is a geometric progression in i, so each lane keeps
// a generator instead of reading N factors from memory. As in the paper's
// twisting-unit figure, each lane has two generators built around 2-cycle
// Montgomery multipliers: generator 0 produces the factors of even vectors,
// generator 1 those of odd vectors. A generator's value goes once around
// its 2-stage multiplier loop per two vectors, so each multiplies by the
// squared ratio r^2 (a 2-cycle loop cannot multiply by r every cycle). Only the start values (start0 = 1, start1 =
// r, in Montgomery form) and r^2 are loaded per limb. The vector count
// restarts every LANES vectors, which re-seeds both generators.
// The data multiply is a 3-cycle Montgomery multiplier; latency 3 cycles.
// The generator loops advance only on valid vectors, so bubbles are allowed.
module twisting_unit #(
  parameter int unsigned W     = 64,
  parameter int unsigned LANES = 256
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic [W-1:0] in_vec [LANES],
  input  logic [W-1:0] start0 [LANES],
  input  logic [W-1:0] start1 [LANES],
  input  logic [W-1:0] ratio2 [LANES],
  input  logic [W-1:0] q,
  input  logic [W-1:0] qinv,
  output logic         out_valid,
  output logic [W-1:0] out_vec [LANES]
);
  localparam int unsigned ML = ark_pkg::MONT_LAT_NTT;
  localparam int unsigned CW = $clog2(LANES);

  logic [CW-1:0] cnt;      // index of the current vector within its limb
  logic [W-1:0]  g_out  [2][LANES];
  logic [W-1:0]  factor [LANES];

  always_ff @(posedge clk) begin
    if (rst)           cnt <= '0;
    else if (in_valid) cnt <= cnt + 1'b1;
  end

  for (genvar k = 0; k < LANES; k++) begin : g_lane
    // two interleaved generators; the one for this vector's parity is used
    for (genvar g = 0; g < 2; g++) begin : g_gen
      logic [W-1:0] g_in;
      assign g_in = (cnt < 2) ? (g == 0 ? start0[k] : start1[k]) : g_out[g][k];
      // feedback loop: the multiplier pipeline holds the generator state
      mont_mul #(.W(W), .LAT(ark_pkg::MONT_LAT_TWIST)) u_gen (
        .clk(clk), .en(in_valid), .a(g_in), .b(ratio2[k]), .q(q), .qinv(qinv),
        .y(g_out[g][k]));
    end
    assign factor[k] = cnt[0] ? ((cnt < 2) ? start1[k] : g_out[1][k])
                              : ((cnt < 2) ? start0[k] : g_out[0][k]);
    mont_mul #(.W(W), .LAT(ML)) u_twist (
      .clk(clk), .en(1'b1), .a(in_vec[k]), .b(factor[k]), .q(q), .qinv(qinv),
      .y(out_vec[k]));
  end

  logic [ML-1:0] vld;
  always_ff @(posedge clk) begin
    if (rst) vld <= '0;
    else     vld <= {vld[ML-2:0], in_valid};
  end
  assign out_valid = vld[ML-1];
endmodule
