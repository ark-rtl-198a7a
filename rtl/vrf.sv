// vrf: lane-banked vector register file (RF(Coeff), RF(Eval), RF(NoC)).
//
// DEPTH entries of one vector each: every lane owns a bank of DEPTH words
// and all lanes use the same address. NRD read ports with one-cycle
// latency and NWR write ports. The paper builds the register files from
// single-ported, multi-banked SRAMs (RF(Coeff) double-pumped); here each
// functional unit gets its own port, standing in for a bank assignment the
// static schedule keeps free of conflicts. Two writes to one address in one
// cycle are flagged by an assertion; the higher-numbered port wins.
module vrf #(
  parameter int unsigned W     = 64,
  parameter int unsigned LANES = 256,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned NRD   = 1,
  parameter int unsigned NWR   = 1,
  parameter int unsigned AW    = ark_pkg::ADDR_W
) (
  input  logic          clk,
  input  logic          rd_en   [NRD],
  input  logic [AW-1:0] rd_addr [NRD],
  output logic [W-1:0]  rd_data [NRD][LANES],
  input  logic          wr_en   [NWR],
  input  logic [AW-1:0] wr_addr [NWR],
  input  logic [W-1:0]  wr_data [NWR][LANES]
);
  logic [W-1:0] mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NWR; p++)
      if (wr_en[p]) mem[wr_addr[p] % DEPTH] <= wr_data[p];
    for (int p = 0; p < NRD; p++)
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p] % DEPTH];
  end

  for (genvar p = 0; p < NWR; p++) begin : g_wchk
    for (genvar o = p + 1; o < NWR; o++) begin : g_o
      assert property (@(posedge clk) !(wr_en[p] && wr_en[o] && wr_addr[p] == wr_addr[o]))
        else $error("vrf: write ports %0d and %0d collide", p, o);
    end
  end
endmodule
