// transpose_unit: transposes a LANES x LANES block of words.
//
// Vectors 0..LANES-1 of a limb are written as rows of one of two banks.
// When the last row arrives the banks swap and the full bank is read out
// column by column: output vector k holds, in lane i, word k of input
// vector i. While one block is read the next block fills the other bank,
// so a stream of limbs passes at one vector per cycle. The first output
// vector appears the cycle after the last input vector (latency LANES
// cycles from first input to first output). The paper names this unit and
// places it between the two butterfly columns; the double-banked register
// array is this design's choice. Input limbs must arrive no faster than
// one per LANES cycles, which the one-vector-per-cycle input already ensures.
module transpose_unit #(
  parameter int unsigned W     = 64,
  parameter int unsigned LANES = 256
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic [W-1:0] in_vec [LANES],
  output logic         out_valid,
  output logic [W-1:0] out_vec [LANES]
);
  localparam int unsigned CW = $clog2(LANES);

  logic [W-1:0]  bank [2][LANES][LANES];
  logic          wsel;            // bank being written
  logic [CW-1:0] wcnt, rcnt;
  logic          reading;

  always_ff @(posedge clk) begin
    if (in_valid) bank[wsel][wcnt] <= in_vec;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wsel <= 1'b0; wcnt <= '0; rcnt <= '0; reading <= 1'b0;
    end else begin
      if (in_valid) begin
        wcnt <= wcnt + 1'b1;
        if (wcnt == CW'(LANES - 1)) wsel <= ~wsel;
      end
      if (in_valid && wcnt == CW'(LANES - 1)) begin
        reading <= 1'b1;
        rcnt    <= '0;
      end else if (reading) begin
        rcnt <= rcnt + 1'b1;
        if (rcnt == CW'(LANES - 1)) reading <= 1'b0;
      end
    end
  end

  // read side: column rcnt of the bank not being written
  for (genvar i = 0; i < LANES; i++) begin : g_col
    assign out_vec[i] = bank[~wsel][i][rcnt];
  end
  assign out_valid = reading;
endmodule
