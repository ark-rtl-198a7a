// scratchpad: the on-chip scratchpad memory of one cluster (128 MB).
//
// Single-ported, as the paper states for on-chip memories: each cycle one
// vector (one word per lane, same address in every lane bank) is either
// read (one-cycle latency) or written. DEPTH words per lane; the default
// 65536 x 256 lanes x 8 bytes gives the paper's 128 MB per cluster. The
// paper runs it at 1.25 GHz for 20 TB/s chip-wide; this model moves one
// vector per core clock. Evaluation keys, plaintexts and ciphertexts are
// staged here between HBM and RF(Eval).
module scratchpad #(
  parameter int unsigned W     = 64,
  parameter int unsigned LANES = 256,
  parameter int unsigned DEPTH = ark_pkg::SP_DEPTH_DEF,
  parameter int unsigned AW    = ark_pkg::ADDR_W
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata [LANES],
  output logic [W-1:0]  rdata [LANES]
);
  logic [W-1:0] mem [LANES][DEPTH];

  for (genvar k = 0; k < LANES; k++) begin : g_bank
    always_ff @(posedge clk) begin
      if (en) begin
        if (we) mem[k][addr % DEPTH] <= wdata[k];
        else    rdata[k] <= mem[k][addr % DEPTH];
      end
    end
  end
endmodule
