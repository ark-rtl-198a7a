// ark_top: the ARK accelerator, four clusters joined by the NoC.
//
// Each cluster (see cluster) holds 256 lanes of NTT, BConv, automorphism
// and multiply-add units with 128 MB of scratchpad and 19 MB of register
// files; the NoC connects lane k of every cluster for the all-to-all
// exchange between limb-wise and coefficient-wise data distribution.
// The HBM controllers and PHYs, which the paper takes from elsewhere, are
// not modelled: each cluster's scratchpad write data from HBM and read data
// to HBM are ports of the top. So is the per-cycle control word of every
// cluster, which in the paper comes from a static (VLIW-style) schedule.
module ark_top #(
  parameter int unsigned W        = 64,
  parameter int unsigned LANES    = 256,
  parameter int unsigned CLUSTERS = 4,
  parameter int unsigned MACS     = 6,
  parameter int unsigned SP_DEPTH = ark_pkg::SP_DEPTH_DEF,
  parameter int unsigned EV_DEPTH = ark_pkg::RF_EVAL_DEPTH_DEF,
  parameter int unsigned CF_DEPTH = ark_pkg::RF_COEFF_DEPTH_DEF,
  parameter int unsigned NC_DEPTH = ark_pkg::RF_NOC_DEPTH_DEF
) (
  input  logic                   clk,
  input  logic                   rst,
  input  ark_pkg::cluster_ctrl_t ctrl         [CLUSTERS],
  input  logic [W-1:0]           cfg_vec      [CLUSTERS][LANES],
  input  logic [W-1:0]           hbm_rd_vec   [CLUSTERS][LANES],
  output logic                   hbm_wr_valid [CLUSTERS],
  output logic [W-1:0]           hbm_wr_vec   [CLUSTERS][LANES],
  output logic                   ntt_out_valid[CLUSTERS],
  output logic                   bc_busy      [CLUSTERS]
);
  logic                        tx_valid [CLUSTERS], rx_valid [CLUSTERS], rx_en [CLUSTERS];
  logic [W-1:0]                tx_vec   [CLUSTERS][LANES], rx_vec [CLUSTERS][LANES];
  logic [$clog2(CLUSTERS)-1:0] sel      [CLUSTERS];

  for (genvar c = 0; c < CLUSTERS; c++) begin : g_cl
    assign sel[c]   = $clog2(CLUSTERS)'(ctrl[c].noc_sel);
    assign rx_en[c] = ctrl[c].noc_rx_en;
    cluster #(.W(W), .LANES(LANES), .MACS(MACS), .SP_DEPTH(SP_DEPTH),
              .EV_DEPTH(EV_DEPTH), .CF_DEPTH(CF_DEPTH), .NC_DEPTH(NC_DEPTH)) u_cluster (
      .clk(clk), .rst(rst), .ctrl(ctrl[c]), .cfg_vec(cfg_vec[c]),
      .noc_tx_valid(tx_valid[c]), .noc_tx_vec(tx_vec[c]),
      .noc_rx_valid(rx_valid[c]), .noc_rx_vec(rx_vec[c]),
      .hbm_rd_vec(hbm_rd_vec[c]), .hbm_wr_valid(hbm_wr_valid[c]), .hbm_wr_vec(hbm_wr_vec[c]),
      .ntt_out_valid(ntt_out_valid[c]), .bc_busy(bc_busy[c]));
  end

  noc #(.W(W), .LANES(LANES), .CLUSTERS(CLUSTERS)) u_noc (
    .clk(clk), .rst(rst), .tx_valid(tx_valid), .tx_vec(tx_vec), .sel(sel),
    .rx_en(rx_en), .rx_valid(rx_valid), .rx_vec(rx_vec));
endmodule
