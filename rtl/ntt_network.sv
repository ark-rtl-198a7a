// ntt_network: fully pipelined LANES-point NTT across the lanes of a vector.
//
// One vector of LANES words enters per cycle; the LANES-point cyclic NTT of
// it, X[k] = sum_j x[j] * w^(j*k) mod q, leaves BFLY_LAT*log2(LANES) cycles
// later. Iterative Cooley-Tukey: the input is wired in bit-reversed order,
// then stage s pairs lanes 2^s apart and uses twiddle w^(k * LANES/2^(s+1)).
// Each stage is a column of LANES/2 butterfly units, as in the NTT unit
// figure. tw[e] = w^e in Montgomery form for e < LANES/2; with the inverse
// root the same network computes the unscaled inverse transform.
// The twiddles are held constant for a whole limb, as the paper notes.
module ntt_network #(
  parameter int unsigned W     = 64,
  parameter int unsigned LANES = 256
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic [W-1:0] in_vec [LANES],
  input  logic [W-1:0] tw     [LANES/2],
  input  logic [W-1:0] q,
  input  logic [W-1:0] qinv,
  output logic         out_valid,
  output logic [W-1:0] out_vec [LANES]
);
  localparam int unsigned S = $clog2(LANES);
  localparam int unsigned LAT = S * ark_pkg::BFLY_LAT;

  logic [W-1:0] st [S+1][LANES];

  for (genvar j = 0; j < LANES; j++) begin : g_in
    assign st[0][j] = in_vec[ark_pkg::bitrev(j, S)];
  end

  for (genvar s = 0; s < S; s++) begin : g_stage
    for (genvar p = 0; p < LANES/2; p++) begin : g_bf
      localparam int unsigned HALF = 1 << s;
      localparam int unsigned TOP  = (p / HALF) * 2 * HALF + (p % HALF);
      localparam int unsigned E    = (p % HALF) * (LANES / (2 * HALF));
      butterfly_unit #(.W(W)) u_bf (
        .clk(clk), .u(st[s][TOP]), .v(st[s][TOP+HALF]), .w(tw[E]),
        .q(q), .qinv(qinv), .x(st[s+1][TOP]), .y(st[s+1][TOP+HALF]));
    end
  end

  assign out_vec = st[S];

  logic [LAT-1:0] vld;
  always_ff @(posedge clk) begin
    if (rst) vld <= '0;
    else     vld <= {vld[LAT-2:0], in_valid};
  end
  assign out_valid = vld[LAT-1];
endmodule
