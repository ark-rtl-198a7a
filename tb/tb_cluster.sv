// tb_cluster: end-to-end test of one cluster at 16 lanes (N = 256),
// driven by a static per-cycle schedule. With a single cluster the
// inter-cluster network reduces to a one-cycle loop back in the testbench,
// so the "exchange" phases move data RF(Coeff) -> RF(NoC) and back through
// the cluster's own transmit and receive paths.
//
// Scenario: HBM -> scratchpad -> RF(Eval); INTT of the input limb with the
// BConv-mult constant into RF(Coeff); transmit/receive into RF(NoC); BConv
// of the single input limb to two output limbs; back into RF(Coeff); NTT
// of both limbs (each with its own prime and twiddles) into RF(Eval);
// AutoU; MADU mult (with a scratchpad operand), mult-add, add, sub;
// RF(Eval) -> scratchpad -> HBM. The HBM output is checked against a
// reference computed in the testbench, and every mechanism is counted.
module tb_cluster;
  import tb_ark_pkg::*;
  import ark_pkg::*;
  localparam int L = 16, C = 1, S = $clog2(L), N = L * L;
  localparam int QV = L / C, NG = QV / 4, ALPHA = C, NOUT = 2 * C;
  localparam int MAXT = 60 * L + 2000;
  // address map (vectors)
  localparam int EV_IN = 0, EV_O0 = L, EV_O1 = 2*L, EV_AU = 3*L, EV_M1 = 4*L, EV_M2 = 5*L,
                 EV_R1 = 6*L, EV_R2 = 7*L, EV_R3 = 8*L;
  localparam int CF_IN = 0, CF_O0 = L, CF_O1 = 2*L;
  localparam int NC_IN = 0, NC_OUT = L;
  localparam int SP_IN = 0, SP_OP = L, SP_RES = 2*L;
  localparam int NTT_WAIT = L + 2 * S * BFLY_LAT + L + 24;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  cluster_ctrl_t ctrl [C];
  logic [63:0] cfg_vec [C][L], hbm_rd_vec [C][L], hbm_wr_vec [C][L];
  logic hbm_wr_valid [C], ntt_out_valid [C], bc_busy [C];

  logic noc_tx_valid, noc_rx_valid;
  logic [63:0] noc_tx_vec [L], noc_rx_vec [L];
  cluster #(.LANES(L), .SP_DEPTH(256), .EV_DEPTH(256), .CF_DEPTH(256), .NC_DEPTH(256)) dut (
    .clk(clk), .rst(rst), .ctrl(ctrl[0]), .cfg_vec(cfg_vec[0]),
    .noc_tx_valid(noc_tx_valid), .noc_tx_vec(noc_tx_vec),
    .noc_rx_valid(noc_rx_valid), .noc_rx_vec(noc_rx_vec),
    .hbm_rd_vec(hbm_rd_vec[0]), .hbm_wr_valid(hbm_wr_valid[0]), .hbm_wr_vec(hbm_wr_vec[0]),
    .ntt_out_valid(ntt_out_valid[0]), .bc_busy(bc_busy[0]));
  // network of a single cluster: one-cycle loop back
  always_ff @(posedge clk) begin
    noc_rx_valid <= !rst && noc_tx_valid && ctrl[0].noc_rx_en;
    noc_rx_vec   <= noc_tx_vec;
  end

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    #(10 * (MAXT + 200)); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- reference data ------------------------------------------
  u64 qin [C], qout [NOUT], kc [C], tab [NOUT][ALPHA];
  u64 E [C][], S_op [C][], F [NOUT][], A [C][], R [C][3][];
  int g;

  function automatic u64 q_of_out(int r); return PRIMES[r % 8]; endfunction

  task automatic build_reference();
    u64 b [C][];
    g = 1; for (int i = 0; i < 3; i++) g = (g * 5) % N;
    for (int j = 0; j < C; j++) begin
      qin[j] = PRIMES[(j + 4) % 8]; kc[j] = rnd(qin[j]);
      b[j] = new[N]; E[j] = new[N];
      for (int n = 0; n < N; n++) E[j][n] = rnd(qin[j]);
      // coefficients after the INTT with constant k_j: k_j * INTT(E_j)
      for (int n = 0; n < N; n++) b[j][n] = E[j][n];
      ntt_ref(b[j], invmod(root_of((j + 4) % 8, N), qin[j]), qin[j]);
      for (int n = 0; n < N; n++) b[j][n] = mulmod(b[j][n], mulmod(kc[j], invmod(N, qin[j]), qin[j]), qin[j]);
    end
    for (int r = 0; r < NOUT; r++) begin
      qout[r] = q_of_out(r);
      for (int j = 0; j < ALPHA; j++) tab[r][j] = rnd(qout[r]);
      F[r] = new[N];
      for (int n = 0; n < N; n++) begin
        u64 s = 0;
        for (int j = 0; j < ALPHA; j++) s = addmod(s, mulmod(b[j][n] % qout[r], tab[r][j], qout[r]), qout[r]);
        F[r][n] = s;
      end
      ntt_ref(F[r], root_of(r % 8, N), qout[r]);
    end
    for (int c = 0; c < C; c++) begin
      u64 q = qout[c], q1 = qout[c + C];
      S_op[c] = new[N]; A[c] = new[N];
      for (int k = 0; k < 3; k++) R[c][k] = new[N];
      for (int n = 0; n < N; n++) S_op[c][n] = rnd(q);
      for (int n = 0; n < N; n++) A[c][(n * g) % N] = F[c][n];
      for (int n = 0; n < N; n++) begin
        u64 m1 = mulmod(F[c][n], S_op[c][n], q);
        u64 m2 = addmod(mulmod(A[c][n], F[c][n], q), F[c][n], q);
        R[c][0][n] = addmod(m1, m2, q);
        R[c][1][n] = submod(m1, A[c][n], q);
        R[c][2][n] = addmod(F[c + C][n], F[c + C][n], q1);
      end
    end
  endtask

  // ---------------- schedule ---------------------------------------------------
  cluster_ctrl_t prog [MAXT][C];
  // configuration-vector events: cycle, and the vector for each cluster
  int cfg_t [$];
  u64 cfg_d [$][C][L];
  int T_END;

  task automatic add_cfg(int t, input u64 v [C][L]);
    cfg_t.push_back(t); cfg_d.push_back(v);
  endtask

  // NTT-unit configuration for direction d of prime q / root w in cluster c,
  // one cfg_we cycle per register, starting at t
  task automatic sched_ntt_cfg(int t, logic d, input u64 qs [C], input u64 ws [C]);
    u64 v [5][C][L];
    for (int c = 0; c < C; c++) begin
      u64 wl = powmod(ws[c], L, qs[c]);
      for (int k = 0; k < L; k++) begin
        v[0][c][k] = (k < L/2) ? mont(powmod(wl, k, qs[c]), qs[c]) : 64'd0;
        v[1][c][k] = mont(1, qs[c]);
        v[2][c][k] = mont(powmod(ws[c], k, qs[c]), qs[c]);
        v[3][c][k] = mont(powmod(ws[c], 2 * k, qs[c]), qs[c]);
        v[4][c][k] = (k == 0) ? mont(mulmod(kc[c], invmod(N, qs[c]), qs[c]), qs[c]) : 64'd0;
      end
    end
    for (int i = 0; i < (d ? 5 : 4); i++) begin
      for (int c = 0; c < C; c++) begin
        prog[t + i][c].ntt_cfg_we  = 1;
        prog[t + i][c].ntt_cfg_dir = d;
        prog[t + i][c].ntt_cfg_sel = ntt_cfg_e'(i);
        if (i == 4) prog[t + i][c].ntt_cfg_dir = 0;   // BConv-mult constant
      end
      add_cfg(t + i, v[i]);
    end
  endtask

  // one limb (L vectors) through the NTT unit, q held for the whole window
  task automatic sched_ntt(int t, logic d, int rd_base, int wb_base, input u64 qs [C]);
    for (int c = 0; c < C; c++) begin
      prog[t][c].ntt_wb_set = 1; prog[t][c].ntt_wb_base = 16'(wb_base);
      for (int i = 0; i < L; i++) begin
        prog[t + 1 + i][c].ntt_issue = 1; prog[t + 1 + i][c].ntt_dir = d;
        prog[t + 1 + i][c].ntt_rd_addr = 16'(rd_base + i);
      end
      for (int i = 0; i < NTT_WAIT; i++) begin
        prog[t + 1 + i][c].ntt_q = qs[c]; prog[t + 1 + i][c].ntt_qinv = qinv_of(qs[c]);
      end
    end
  endtask

  task automatic build_schedule();
    int t = 0;
    u64 qv [C], wv [C];
    for (int i = 0; i < MAXT; i++) for (int c = 0; c < C; c++) prog[i][c] = '0;
    // 1. HBM -> scratchpad (input limb, then operand polynomial)
    for (int i = 0; i < 2 * L; i++) for (int c = 0; c < C; c++) begin
      prog[t + i][c].sp_en = 1; prog[t + i][c].sp_we = 1; prog[t + i][c].sp_wsrc_hbm = 1;
      prog[t + i][c].sp_addr = 16'(SP_IN + i);
    end
    // BConv base table and primes, loaded meanwhile
    for (int c = 0; c < C; c++) begin
      int k = 0;
      for (int r = 0; r < NOUT; r++) begin
        for (int j = 0; j < ALPHA; j++) begin
          prog[t + k][c].bc_bt_we = 1; prog[t + k][c].bc_row = 5'(r); prog[t + k][c].bc_col = 3'(j);
          prog[t + k][c].bc_val = mont(tab[r][j], qout[r]); k++;
        end
        prog[t + k][c].bc_q_we = 1; prog[t + k][c].bc_row = 5'(r);
        prog[t + k][c].bc_val = qout[r]; prog[t + k][c].bc_qinv = qinv_of(qout[r]); k++;
      end
    end
    // INTT configuration
    for (int c = 0; c < C; c++) begin qv[c] = qin[c]; wv[c] = invmod(root_of((c + 4) % 8, N), qin[c]); end
    sched_ntt_cfg(t, 1, qv, wv);
    t += 2 * L + 2;
    // 2. scratchpad -> RF(Eval)
    for (int i = 0; i < L; i++) for (int c = 0; c < C; c++) begin
      prog[t + i][c].sp_en = 1; prog[t + i][c].sp_addr = 16'(SP_IN + i);
      prog[t + i + 1][c].sp_ld_wb = 1; prog[t + i + 1][c].sp_ld_addr = 16'(EV_IN + i);
    end
    t += L + 2;
    // 3. INTT
    sched_ntt(t, 1, EV_IN, CF_IN, qv);
    t += NTT_WAIT + 2;
    // 4. exchange to coefficient-wise: round r, cluster s -> d = (s + r) mod C
    for (int r = 0; r < C; r++) for (int s = 0; s < C; s++) begin
      int d = (s + r) % C;
      for (int k = 0; k < QV; k++) begin
        prog[t + r*QV + k][s].noc_tx_rd = 1; prog[t + r*QV + k][s].noc_src = NOC_FROM_COEFF;
        prog[t + r*QV + k][s].noc_tx_addr = 16'(CF_IN + d * QV + k);
        prog[t + r*QV + k + 1][d].noc_rx_en = 1; prog[t + r*QV + k + 1][d].noc_sel = 2'(s);
      end
      prog[t + r*QV + 1][d].noc_rx_set = 1; prog[t + r*QV + 1][d].noc_rx_to_coeff = 0;
      prog[t + r*QV + 1][d].noc_rx_base = 16'(NC_IN + s * QV);     // input limb s
    end
    t += C * QV + 4;
    // 5. BConv
    for (int c = 0; c < C; c++) begin
      prog[t][c].bc_start = 1; prog[t][c].bc_alpha = 3'(ALPHA); prog[t][c].bc_nout = 5'(NOUT);
      prog[t][c].bc_ngroups = 16'(NG); prog[t][c].bc_in_base = 16'(NC_IN); prog[t][c].bc_out_base = 16'(NC_OUT);
    end
    t += ((NOUT + 5) / 6) * NG * 4 * ((ALPHA > 6) ? ALPHA : 6) + 4 * 6 + 3 + 4 + 4;
    // 6. exchange back: output limbs d and d + C to cluster d, into RF(Coeff)
    for (int r = 0; r < C; r++) for (int u = 0; u < 2; u++) for (int s = 0; s < C; s++) begin
      int d = (s + r) % C;
      int t0 = t + (2 * r + u) * QV;
      for (int k = 0; k < QV; k++) begin
        prog[t0 + k][s].noc_tx_rd = 1; prog[t0 + k][s].noc_src = NOC_FROM_NOCRF;
        prog[t0 + k][s].noc_tx_addr = 16'(NC_OUT + (d + u * C) * QV + k);
        prog[t0 + k + 1][d].noc_rx_en = 1; prog[t0 + k + 1][d].noc_sel = 2'(s);
      end
      prog[t0 + 1][d].noc_rx_set = 1; prog[t0 + 1][d].noc_rx_to_coeff = 1;
      prog[t0 + 1][d].noc_rx_base = 16'((u ? CF_O1 : CF_O0) + s * QV);
    end
    t += 2 * C * QV + 4;
    // 7. NTT of the two output limbs
    for (int u = 0; u < 2; u++) begin
      for (int c = 0; c < C; c++) begin qv[c] = qout[c + u * C]; wv[c] = root_of((c + u * C) % 8, N); end
      sched_ntt_cfg(t, 0, qv, wv);
      t += 5;
      sched_ntt(t, 0, u ? CF_O1 : CF_O0, u ? EV_O1 : EV_O0, qv);
      t += NTT_WAIT + 2;
    end
    // 8. AutoU
    for (int i = 0; i < L; i++) for (int c = 0; c < C; c++) begin
      prog[t + i][c].au_issue = 1; prog[t + i][c].au_rd_addr = 16'(EV_O0 + i);
      prog[t + i][c].au_idx = 8'(i); prog[t + i][c].au_g = 16'(g); prog[t + i][c].au_wb_base = 16'(EV_AU);
    end
    t += L + S + 4;
    // 9. MADUs, three passes of L vectors
    for (int p = 0; p < 3; p++) begin
      for (int i = 0; i < L; i++) for (int c = 0; c < C; c++) begin
        u64 q = (p == 2) ? qout[c + C] : qout[c];
        cluster_ctrl_t w = prog[t + i][c];
        w.md_q = q; w.md_mu = 128'({64'd1, 128'd0} / {64'd0, q});
        case (p)
          0: begin
            w.md_issue = 2'b11;
            w.md_op[0] = MADU_MUL; w.md_a_addr[0] = 16'(EV_O0 + i); w.md_b_src[0] = OPND_SP;
            w.md_c_src[0] = OPND_ZERO; w.md_wb_addr[0] = 16'(EV_M1 + i);
            w.sp_en = 1; w.sp_addr = 16'(SP_OP + i);
            w.md_op[1] = MADU_MAC; w.md_a_addr[1] = 16'(EV_AU + i); w.md_b_src[1] = OPND_EV;
            w.md_b_addr[1] = 16'(EV_O0 + i); w.md_c_src[1] = OPND_EV; w.md_c_addr[1] = 16'(EV_O0 + i);
            w.md_wb_addr[1] = 16'(EV_M2 + i);
          end
          1: begin
            w.md_issue = 2'b11;
            w.md_op[0] = MADU_ADD; w.md_a_addr[0] = 16'(EV_M1 + i); w.md_b_src[0] = OPND_EV;
            w.md_b_addr[0] = 16'(EV_M2 + i); w.md_c_src[0] = OPND_ZERO; w.md_wb_addr[0] = 16'(EV_R1 + i);
            w.md_op[1] = MADU_SUB; w.md_a_addr[1] = 16'(EV_M1 + i); w.md_b_src[1] = OPND_EV;
            w.md_b_addr[1] = 16'(EV_AU + i); w.md_c_src[1] = OPND_ZERO; w.md_wb_addr[1] = 16'(EV_R2 + i);
          end
          default: begin
            w.md_issue = 2'b01;
            w.md_op[0] = MADU_ADD; w.md_a_addr[0] = 16'(EV_O1 + i); w.md_b_src[0] = OPND_EV;
            w.md_b_addr[0] = 16'(EV_O1 + i); w.md_c_src[0] = OPND_ZERO; w.md_wb_addr[0] = 16'(EV_R3 + i);
          end
        endcase
        prog[t + i][c] = w;
      end
      // the modulus stays on the control word while the pass is in the MADUs
      for (int i = L; i < L + MADU_LAT + 3; i++) for (int c = 0; c < C; c++) begin
        prog[t + i][c].md_q  = (p == 2) ? qout[c + C] : qout[c];
        prog[t + i][c].md_mu = 128'({64'd1, 128'd0} / {64'd0, prog[t + i][c].md_q});
      end
      t += L + MADU_LAT + 3;
    end
    // 10. RF(Eval) -> scratchpad, then scratchpad -> HBM
    for (int i = 0; i < 3 * L; i++) for (int c = 0; c < C; c++) begin
      prog[t + i][c].ev_st_rd = 1; prog[t + i][c].ev_st_addr = 16'(EV_R1 + i);
      prog[t + i + 1][c].sp_en = 1; prog[t + i + 1][c].sp_we = 1; prog[t + i + 1][c].sp_wsrc_hbm = 0;
      prog[t + i + 1][c].sp_addr = 16'(SP_RES + i);
    end
    t += 3 * L + 2;
    for (int i = 0; i < 3 * L; i++) for (int c = 0; c < C; c++) begin
      prog[t + i][c].sp_en = 1; prog[t + i][c].sp_to_hbm = 1; prog[t + i][c].sp_addr = 16'(SP_RES + i);
    end
    t += 3 * L + 4;
    T_END = t;
    if (T_END > MAXT) $fatal(1, "schedule too long");
  endtask

  // ---------------- HBM output capture and check ----------------------------
  int hcnt [C];
  always @(negedge clk) if (!rst) for (int c = 0; c < C; c++) if (hbm_wr_valid[c]) begin
    automatic int v = hcnt[c] % L, k = hcnt[c] / L;
    for (int j = 0; j < L; j++) begin
      checks++;
      if (k > 2 || hbm_wr_vec[c][j] !== R[c][k][v + L * j]) begin
        failures++;
        if (failures < 400 && j == 0) $display("cluster %0d result %0d vec %0d lane %0d: %h exp %h", c, k, v, j, hbm_wr_vec[c][j], R[c][k % 3][v + L * j]);
      end
    end
    hcnt[c]++;
  end

  // ---------------- mechanism counters --------------------------------------
  int m_hbm_in, m_sp_to_rf, m_intt, m_ntt, m_to_coeffwise, m_to_limbwise, m_bc_write,
      m_bc_bubble, m_bc_row_drop, m_autou, m_mul, m_add, m_sub, m_mac, m_sp_opnd, m_rf_to_sp, m_sp_to_hbm,
      m_cfg;
  for (genvar c = 0; c < C; c++) begin : g_mon
    always @(posedge clk) if (!rst) begin
      if (dut.ctrl.sp_en && dut.ctrl.sp_we &&
          dut.ctrl.sp_wsrc_hbm) m_hbm_in++;
      if (dut.ctrl.sp_en && dut.ctrl.sp_we &&
          !dut.ctrl.sp_wsrc_hbm) m_rf_to_sp++;
      if (dut.ev_we[4]) m_sp_to_rf++;
      if (dut.ntt_ov &&  dut.ntt_dir_r) m_intt++;
      if (dut.ntt_ov && !dut.ntt_dir_r) m_ntt++;
      if (dut.ctrl.ntt_cfg_we) m_cfg++;
      if (dut.nc_we[1]) m_to_coeffwise++;
      if (dut.cf_we[1]) m_to_limbwise++;
      if (dut.bc_we) m_bc_write++;
      if (dut.u_bconv.run && !dut.u_bconv.rd_en) m_bc_bubble++;
      if (dut.u_bconv.o_v[1] && !dut.bc_we) m_bc_row_drop++;
      if (dut.au_ov) m_autou++;
      for (int u = 0; u < 2; u++) if (dut.md_iv[u]) begin
        case (dut.md_op_r[u])
          MADU_MUL: m_mul++;
          MADU_ADD: m_add++;
          MADU_SUB: m_sub++;
          default:  m_mac++;
        endcase
        if (dut.md_bs_r[u] == OPND_SP) m_sp_opnd++;
      end
      if (hbm_wr_valid[c]) m_sp_to_hbm++;
    end
  end

  task automatic expect_count(string name, int n, int exp);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0 || (exp >= 0 && n != exp)) begin failures++; $display("  expected %0d", exp); end
  endtask

  // ---------------- run ------------------------------------------------------
  initial begin
    int ci = 0;
    for (int c = 0; c < C; c++) begin
      ctrl[c] = '0; hcnt[c] = 0;
      for (int k = 0; k < L; k++) begin cfg_vec[c][k] = 0; hbm_rd_vec[c][k] = 0; end
    end
    {m_hbm_in, m_sp_to_rf, m_intt, m_ntt, m_to_coeffwise, m_to_limbwise, m_bc_write,
     m_bc_bubble, m_bc_row_drop, m_autou, m_mul, m_add, m_sub, m_mac, m_sp_opnd, m_rf_to_sp,
     m_sp_to_hbm, m_cfg} = '0;
    build_reference();
    build_schedule();
    $display("schedule: %0d cycles", T_END);
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    for (int t = 0; t < T_END; t++) begin
      for (int c = 0; c < C; c++) begin
        ctrl[c] = prog[t][c];
        for (int k = 0; k < L; k++)
          hbm_rd_vec[c][k] = (t < L) ? E[c][t + L * k] : (t < 2 * L) ? S_op[c][t - L + L * k] : 64'd0;
      end
      if (ci < cfg_t.size() && cfg_t[ci] == t) begin
        for (int c = 0; c < C; c++) cfg_vec[c] = cfg_d[ci][c];
        ci++;
      end
      @(negedge clk);
    end
    for (int c = 0; c < C; c++) ctrl[c] = '0;
    repeat (5) @(negedge clk);
    for (int c = 0; c < C; c++) begin
      checks++;
      if (hcnt[c] != 3 * L) begin failures++; $display("cluster %0d: %0d HBM output vectors", c, hcnt[c]); end
    end
    expect_count("HBM -> scratchpad",            m_hbm_in,       C * 2 * L);
    expect_count("scratchpad -> RF(Eval)",       m_sp_to_rf,     C * L);
    expect_count("INTT output vectors",          m_intt,         C * L);
    expect_count("NoC to coefficient-wise",      m_to_coeffwise, C * C * QV);
    expect_count("BConv output writes",          m_bc_write,     C * NOUT * NG * 4);
    expect_count("BConv bubbles (alpha < MACS)", m_bc_bubble,    -1);
    expect_count("BConv unused rows dropped",    m_bc_row_drop,  -1);
    expect_count("NoC to limb-wise",             m_to_limbwise,  C * 2 * C * QV);
    expect_count("NTT output vectors",           m_ntt,          C * 2 * L);
    expect_count("NTT unit configurations",      m_cfg,          C * 13);
    expect_count("AutoU vectors",                m_autou,        C * L);
    expect_count("MADU mult",                    m_mul,          C * L);
    expect_count("MADU mult-add",                m_mac,          C * L);
    expect_count("MADU add",                     m_add,          C * 2 * L);
    expect_count("MADU sub",                     m_sub,          C * L);
    expect_count("MADU scratchpad operand",      m_sp_opnd,      C * L);
    expect_count("RF(Eval) -> scratchpad",       m_rf_to_sp,     C * 3 * L);
    expect_count("scratchpad -> HBM",            m_sp_to_hbm,    C * 3 * L);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
