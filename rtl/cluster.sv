// cluster: one of the four ARK clusters, split by its NTT unit into a
// coefficient region and an evaluation region (paper's floorplan figure).
//
//   coefficient region: RF(NoC) - BConvU - RF(Coeff)
//   NTT unit between RF(Coeff) and RF(Eval)
//   evaluation region:  RF(Eval) - AutoU - MADU 0 - MADU 1 - scratchpad
//
// A BConvRoutine flows RF(Eval) -> NTTU (INTT) -> RF(Coeff) -> NoC ->
// RF(NoC) -> BConvU -> RF(NoC) -> NoC -> RF(Coeff) -> NTTU (NTT) ->
// RF(Eval). The NoC itself sits outside the clusters (see ark_top); the
// cluster offers one transmit vector per cycle and accepts one receive
// vector. The scratchpad exchanges vectors with RF(Eval) and with HBM.
// Everything is driven by the per-cycle control word ctrl (cluster_ctrl_t,
// see ark_pkg): a read issued in cycle t reaches its unit in cycle t+1.
// Write-back: NTT unit and NoC receive write at a counter-based address,
// BConvU at its own computed address, AutoU at au_wb_base + output vector
// index, MADUs at their carried address, scratchpad loads at sp_ld_addr.
// Register-file depths: Eval 8 MB, Coeff 7 MB, NoC 4 MB at 256 lanes (the
// paper gives 19 MB in total; the split is this design's).
// Moduli (ntt_q/ntt_qinv, md_q/md_mu) are used at every pipeline stage, so
// the schedule must hold them on ctrl until the unit has drained.
module cluster #(
  parameter int unsigned W        = 64,
  parameter int unsigned LANES    = 256,
  parameter int unsigned MACS     = 6,
  parameter int unsigned SP_DEPTH = ark_pkg::SP_DEPTH_DEF,
  parameter int unsigned EV_DEPTH = ark_pkg::RF_EVAL_DEPTH_DEF,
  parameter int unsigned CF_DEPTH = ark_pkg::RF_COEFF_DEPTH_DEF,
  parameter int unsigned NC_DEPTH = ark_pkg::RF_NOC_DEPTH_DEF
) (
  input  logic                   clk,
  input  logic                   rst,
  input  ark_pkg::cluster_ctrl_t ctrl,
  input  logic [W-1:0]           cfg_vec     [LANES],  // NTT unit configuration
  // NoC side
  output logic                   noc_tx_valid,
  output logic [W-1:0]           noc_tx_vec  [LANES],
  input  logic                   noc_rx_valid,
  input  logic [W-1:0]           noc_rx_vec  [LANES],
  // HBM side
  input  logic [W-1:0]           hbm_rd_vec  [LANES],  // data to store in the scratchpad
  output logic                   hbm_wr_valid,
  output logic [W-1:0]           hbm_wr_vec  [LANES],  // data read from the scratchpad
  // status
  output logic                   ntt_out_valid,
  output logic                   bc_busy
);
  import ark_pkg::*;
  localparam int unsigned AW = ADDR_W;

  // ---------------- register files and scratchpad --------------------------
  // RF(Coeff): rd0 NTT input, rd1 NoC transmit; wr0 INTT result, wr1 NoC receive
  logic          cf_re [2], cf_we [2];
  logic [AW-1:0] cf_ra [2], cf_wa [2];
  logic [W-1:0]  cf_rd [2][LANES], cf_wd [2][LANES];
  // RF(NoC): rd0 BConvU, rd1 NoC transmit; wr0 BConvU, wr1 NoC receive
  logic          nc_re [2], nc_we [2];
  logic [AW-1:0] nc_ra [2], nc_wa [2];
  logic [W-1:0]  nc_rd [2][LANES], nc_wd [2][LANES];
  // RF(Eval): rd0 INTT, rd1 AutoU, rd2..4 MADU0 a/b/c, rd5..7 MADU1 a/b/c,
  // rd8 scratchpad store; wr0 NTT, wr1 AutoU, wr2 MADU0, wr3 MADU1, wr4 load
  localparam int unsigned EVR = 9, EVW = 5;
  logic          ev_re [EVR], ev_we [EVW];
  logic [AW-1:0] ev_ra [EVR], ev_wa [EVW];
  logic [W-1:0]  ev_rd [EVR][LANES], ev_wd [EVW][LANES];

  vrf #(.W(W), .LANES(LANES), .DEPTH(CF_DEPTH), .NRD(2), .NWR(2)) u_rf_coeff (
    .clk(clk), .rd_en(cf_re), .rd_addr(cf_ra), .rd_data(cf_rd),
    .wr_en(cf_we), .wr_addr(cf_wa), .wr_data(cf_wd));
  vrf #(.W(W), .LANES(LANES), .DEPTH(NC_DEPTH), .NRD(2), .NWR(2)) u_rf_noc (
    .clk(clk), .rd_en(nc_re), .rd_addr(nc_ra), .rd_data(nc_rd),
    .wr_en(nc_we), .wr_addr(nc_wa), .wr_data(nc_wd));
  vrf #(.W(W), .LANES(LANES), .DEPTH(EV_DEPTH), .NRD(EVR), .NWR(EVW)) u_rf_eval (
    .clk(clk), .rd_en(ev_re), .rd_addr(ev_ra), .rd_data(ev_rd),
    .wr_en(ev_we), .wr_addr(ev_wa), .wr_data(ev_wd));

  logic [W-1:0] sp_wd [LANES], sp_rd [LANES];
  scratchpad #(.W(W), .LANES(LANES), .DEPTH(SP_DEPTH)) u_sp (
    .clk(clk), .en(ctrl.sp_en), .we(ctrl.sp_we), .addr(ctrl.sp_addr),
    .wdata(sp_wd), .rdata(sp_rd));
  assign sp_wd = ctrl.sp_wsrc_hbm ? hbm_rd_vec : ev_rd[8];

  // ---------------- NTT unit -------------------------------------------------
  logic          ntt_dir_r, ntt_iv;
  logic [AW-1:0] ntt_wb_base, ntt_wb_cnt;
  logic          ntt_ov;
  logic [W-1:0]  ntt_ivec [LANES], ntt_ovec [LANES];

  always_ff @(posedge clk) begin
    if (rst) begin
      ntt_dir_r <= 1'b0; ntt_iv <= 1'b0; ntt_wb_base <= '0; ntt_wb_cnt <= '0;
    end else begin
      ntt_iv <= ctrl.ntt_issue;
      if (ctrl.ntt_issue) ntt_dir_r <= ctrl.ntt_dir;
      if (ctrl.ntt_wb_set) begin
        ntt_wb_base <= ctrl.ntt_wb_base;
        ntt_wb_cnt  <= '0;
      end else if (ntt_ov) ntt_wb_cnt <= ntt_wb_cnt + 1'b1;
    end
  end
  assign ntt_ivec = ntt_dir_r ? ev_rd[0] : cf_rd[0];

  nttu #(.W(W), .LANES(LANES)) u_nttu (
    .clk(clk), .rst(rst), .dir(ntt_dir_r), .in_valid(ntt_iv), .in_vec(ntt_ivec),
    .q(ctrl.ntt_q), .qinv(ctrl.ntt_qinv),
    .cfg_we(ctrl.ntt_cfg_we), .cfg_dir(ctrl.ntt_cfg_dir), .cfg_sel(ctrl.ntt_cfg_sel),
    .cfg_vec(cfg_vec), .out_valid(ntt_ov), .out_vec(ntt_ovec));
  assign ntt_out_valid = ntt_ov;

  // ---------------- BConv unit ----------------------------------------------
  logic          bc_re, bc_we;
  logic [AW-1:0] bc_ra, bc_wa;
  logic [W-1:0]  bc_wd [LANES];
  bconv_unit #(.W(W), .LANES(LANES), .MACS(MACS)) u_bconv (
    .clk(clk), .rst(rst),
    .bt_we(ctrl.bc_bt_we), .bt_row(ctrl.bc_row), .bt_col(ctrl.bc_col), .bt_val(ctrl.bc_val),
    .q_we(ctrl.bc_q_we), .q_row(ctrl.bc_row), .q_val(ctrl.bc_val), .qinv_val(ctrl.bc_qinv),
    .start(ctrl.bc_start), .alpha(ctrl.bc_alpha), .nout(ctrl.bc_nout),
    .ngroups(ctrl.bc_ngroups), .in_base(ctrl.bc_in_base), .out_base(ctrl.bc_out_base),
    .busy(bc_busy), .rd_en(bc_re), .rd_addr(bc_ra), .rd_data(nc_rd[0]),
    .wr_en(bc_we), .wr_addr(bc_wa), .wr_data(bc_wd));

  // ---------------- automorphism unit ---------------------------------------
  localparam int unsigned S = $clog2(LANES);
  logic          au_iv, au_ov;
  logic [S-1:0]  au_idx_r, au_oidx;
  logic [2*S-1:0] au_g_r;
  logic [AW-1:0] au_tag_r, au_otag;
  logic [W-1:0]  au_ovec [LANES];
  always_ff @(posedge clk) begin
    if (rst) au_iv <= 1'b0;
    else     au_iv <= ctrl.au_issue;
    au_idx_r <= S'(ctrl.au_idx);
    au_g_r   <= (2*S)'(ctrl.au_g);
    au_tag_r <= ctrl.au_wb_base;
  end
  autou #(.W(W), .LANES(LANES)) u_autou (
    .clk(clk), .rst(rst), .in_valid(au_iv), .in_idx(au_idx_r), .g(au_g_r),
    .in_vec(ev_rd[1]), .in_tag(au_tag_r), .out_valid(au_ov), .out_idx(au_oidx),
    .out_tag(au_otag), .out_vec(au_ovec));

  // ---------------- MADUs -----------------------------------------------------
  logic          md_iv  [2], md_ov [2];
  madu_op_e      md_op_r [2];
  opnd_e         md_bs_r [2], md_cs_r [2];
  logic [AW-1:0] md_tag_r [2], md_otag [2];
  logic [W-1:0]  md_b [2][LANES], md_c [2][LANES], md_y [2][LANES];
  for (genvar u = 0; u < 2; u++) begin : g_madu
    always_ff @(posedge clk) begin
      if (rst) md_iv[u] <= 1'b0;
      else     md_iv[u] <= ctrl.md_issue[u];
      md_op_r[u]  <= madu_op_e'(ctrl.md_op[u]);
      md_bs_r[u]  <= opnd_e'(ctrl.md_b_src[u]);
      md_cs_r[u]  <= opnd_e'(ctrl.md_c_src[u]);
      md_tag_r[u] <= ctrl.md_wb_addr[u];
    end
    for (genvar k = 0; k < LANES; k++) begin : g_opnd
      always_comb begin
        unique case (md_bs_r[u])
          OPND_EV: md_b[u][k] = ev_rd[3 + 3*u][k];
          OPND_SP: md_b[u][k] = sp_rd[k];
          default: md_b[u][k] = '0;
        endcase
        unique case (md_cs_r[u])
          OPND_EV: md_c[u][k] = ev_rd[4 + 3*u][k];
          OPND_SP: md_c[u][k] = sp_rd[k];
          default: md_c[u][k] = '0;
        endcase
      end
    end
    madu #(.W(W), .LANES(LANES)) u_madu (
      .clk(clk), .rst(rst), .in_valid(md_iv[u]), .op(md_op_r[u]),
      .a(ev_rd[2 + 3*u]), .b(md_b[u]), .c(md_c[u]), .q(ctrl.md_q), .mu(ctrl.md_mu),
      .in_tag(md_tag_r[u]), .out_valid(md_ov[u]), .out_tag(md_otag[u]), .y(md_y[u]));
  end

  // ---------------- NoC transmit and receive --------------------------------
  logic          tx_v;
  noc_src_e      tx_src;
  logic [AW-1:0] rx_base, rx_cnt;
  logic          rx_to_coeff;
  always_ff @(posedge clk) begin
    if (rst) begin
      tx_v <= 1'b0; rx_base <= '0; rx_cnt <= '0; rx_to_coeff <= 1'b0; tx_src <= NOC_FROM_COEFF;
    end else begin
      tx_v   <= ctrl.noc_tx_rd;
      tx_src <= ctrl.noc_src;
      if (ctrl.noc_rx_set) begin
        rx_base     <= ctrl.noc_rx_base;
        rx_cnt      <= '0;
        rx_to_coeff <= ctrl.noc_rx_to_coeff;
      end else if (noc_rx_valid) rx_cnt <= rx_cnt + 1'b1;
    end
  end
  assign noc_tx_valid = tx_v;
  assign noc_tx_vec   = (tx_src == NOC_FROM_NOCRF) ? nc_rd[1] : cf_rd[1];

  // ---------------- HBM read-out ----------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) hbm_wr_valid <= 1'b0;
    else     hbm_wr_valid <= ctrl.sp_en && !ctrl.sp_we && ctrl.sp_to_hbm;
  end
  assign hbm_wr_vec = sp_rd;

  // ---------------- register-file port wiring -------------------------------
  always_comb begin
    // RF(Coeff)
    cf_re[0] = ctrl.ntt_issue && !ctrl.ntt_dir;  cf_ra[0] = ctrl.ntt_rd_addr;
    cf_re[1] = ctrl.noc_tx_rd && ctrl.noc_src == NOC_FROM_COEFF; cf_ra[1] = ctrl.noc_tx_addr;
    cf_we[0] = ntt_ov && ntt_dir_r;              cf_wa[0] = ntt_wb_base + ntt_wb_cnt;
    cf_wd[0] = ntt_ovec;
    cf_we[1] = noc_rx_valid && rx_to_coeff;      cf_wa[1] = rx_base + rx_cnt;
    cf_wd[1] = noc_rx_vec;
    // RF(NoC)
    nc_re[0] = bc_re;                            nc_ra[0] = bc_ra;
    nc_re[1] = ctrl.noc_tx_rd && ctrl.noc_src == NOC_FROM_NOCRF; nc_ra[1] = ctrl.noc_tx_addr;
    nc_we[0] = bc_we;                            nc_wa[0] = bc_wa;
    nc_wd[0] = bc_wd;
    nc_we[1] = noc_rx_valid && !rx_to_coeff;     nc_wa[1] = rx_base + rx_cnt;
    nc_wd[1] = noc_rx_vec;
    // RF(Eval) reads
    ev_re[0] = ctrl.ntt_issue && ctrl.ntt_dir;   ev_ra[0] = ctrl.ntt_rd_addr;
    ev_re[1] = ctrl.au_issue;                    ev_ra[1] = ctrl.au_rd_addr;
    for (int u = 0; u < 2; u++) begin
      ev_re[2 + 3*u] = ctrl.md_issue[u];
      ev_ra[2 + 3*u] = ctrl.md_a_addr[u];
      ev_re[3 + 3*u] = ctrl.md_issue[u] && opnd_e'(ctrl.md_b_src[u]) == OPND_EV;
      ev_ra[3 + 3*u] = ctrl.md_b_addr[u];
      ev_re[4 + 3*u] = ctrl.md_issue[u] && opnd_e'(ctrl.md_c_src[u]) == OPND_EV;
      ev_ra[4 + 3*u] = ctrl.md_c_addr[u];
    end
    ev_re[8] = ctrl.ev_st_rd;                    ev_ra[8] = ctrl.ev_st_addr;
    // RF(Eval) writes
    ev_we[0] = ntt_ov && !ntt_dir_r;             ev_wa[0] = ntt_wb_base + ntt_wb_cnt;
    ev_wd[0] = ntt_ovec;
    ev_we[1] = au_ov;                            ev_wa[1] = au_otag + AW'(au_oidx);
    ev_wd[1] = au_ovec;
    ev_we[2] = md_ov[0];                         ev_wa[2] = md_otag[0];
    ev_wd[2] = md_y[0];
    ev_we[3] = md_ov[1];                         ev_wa[3] = md_otag[1];
    ev_wd[3] = md_y[1];
    ev_we[4] = ctrl.sp_ld_wb;                    ev_wa[4] = ctrl.sp_ld_addr;
    ev_wd[4] = sp_rd;
  end
endmodule
