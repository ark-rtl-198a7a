// nttu: NTT unit of one cluster, computing N = LANES^2-point NTTs and INTTs
// of limbs with the 4-step method and a bidirectional dataflow.
//
// A limb enters as LANES vectors, one per cycle (vector i, lane j holds
// coefficient i + LANES*j), and leaves LANES vectors in the same layout.
// The unit is a chain of five blocks placed between RF(Coeff) and RF(Eval),
// as in the paper's NTT-unit figure:
//   RF(Coeff) | BConv mult | butterflies A | twisting | transpose | butterflies B | RF(Eval)
// NTT (dir = 0) flows rightward: bypassed BConv mult, column NTTs in A,
// twist by w_N^(i*k), transpose, row NTTs in B; output vector k1 holds
// X[k1 + LANES*k2] in lane k2.
// INTT (dir = 1) flows leftward through the same blocks: B, transpose,
// twist by w_N^-(i*k), A, then the BConv mult unit multiplies by a per-limb
// constant (p_hat_j^-1 mod p_j folded with N^-1). The twist and transpose
// commute here because the twist factor w^(i*k) is symmetric in i and k.
// The transform is the cyclic one over Z_q; the negacyclic pre/post
// weighting by powers of a 2N-th root is not part of this unit.
// Configuration (per prime, per direction) is loaded as vectors through
// cfg_*; dir and the configuration must stay fixed while a limb is inside.
// Throughput: one limb per LANES cycles; first-in to first-out latency is
// 3 + 2*log2(LANES)*BFLY_LAT + 3 + LANES + 1 cycles in both directions.
module nttu #(
  parameter int unsigned W     = 64,
  parameter int unsigned LANES = 256
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                dir,        // 0 = NTT, 1 = INTT
  input  logic                in_valid,
  input  logic [W-1:0]        in_vec [LANES],
  input  logic [W-1:0]        q,
  input  logic [W-1:0]        qinv,
  input  logic                cfg_we,
  input  logic                cfg_dir,
  input  ark_pkg::ntt_cfg_e   cfg_sel,
  input  logic [W-1:0]        cfg_vec [LANES],
  output logic                out_valid,
  output logic [W-1:0]        out_vec [LANES]
);
  import ark_pkg::*;

  // configuration vectors, one set per direction
  logic [W-1:0] tw_r  [2][LANES];
  logic [W-1:0] s0_r  [2][LANES];
  logic [W-1:0] s1_r  [2][LANES];
  logic [W-1:0] r2_r  [2][LANES];
  logic [W-1:0] bcm_r;

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      unique case (cfg_sel)
        NCFG_TWIDDLE: tw_r[cfg_dir] <= cfg_vec;
        NCFG_START0:  s0_r[cfg_dir] <= cfg_vec;
        NCFG_START1:  s1_r[cfg_dir] <= cfg_vec;
        NCFG_RATIO:   r2_r[cfg_dir] <= cfg_vec;
        NCFG_BCMULT:  bcm_r         <= cfg_vec[0];
        default: ;
      endcase
    end
  end

  logic [W-1:0] tw [LANES/2];
  for (genvar e = 0; e < LANES/2; e++) begin : g_tw
    assign tw[e] = tw_r[dir][e];
  end

  // block inputs and outputs
  logic         m_iv, a_iv, t_iv, x_iv, b_iv;
  logic         m_ov, a_ov, t_ov, x_ov, b_ov;
  logic [W-1:0] m_i [LANES], a_i [LANES], t_i [LANES], x_i [LANES], b_i [LANES];
  logic [W-1:0] m_o [LANES], a_o [LANES], t_o [LANES], x_o [LANES], b_o [LANES];

  // direction-dependent routing between the blocks
  always_comb begin
    if (!dir) begin           // NTT: M -> A -> T -> X -> B
      m_iv = in_valid; m_i = in_vec;
      a_iv = m_ov;     a_i = m_o;
      t_iv = a_ov;     t_i = a_o;
      x_iv = t_ov;     x_i = t_o;
      b_iv = x_ov;     b_i = x_o;
      out_valid = b_ov; out_vec = b_o;
    end else begin            // INTT: B -> X -> T -> A -> M
      b_iv = in_valid; b_i = in_vec;
      x_iv = b_ov;     x_i = b_o;
      t_iv = x_ov;     t_i = x_o;
      a_iv = t_ov;     a_i = t_o;
      m_iv = a_ov;     m_i = a_o;
      out_valid = m_ov; out_vec = m_o;
    end
  end

  bconv_mult_unit #(.W(W), .LANES(LANES)) u_bcm (
    .clk(clk), .rst(rst), .in_valid(m_iv), .bypass(!dir), .in_vec(m_i),
    .c(bcm_r), .q(q), .qinv(qinv), .out_valid(m_ov), .out_vec(m_o));

  ntt_network #(.W(W), .LANES(LANES)) u_bfa (
    .clk(clk), .rst(rst), .in_valid(a_iv), .in_vec(a_i), .tw(tw), .q(q), .qinv(qinv),
    .out_valid(a_ov), .out_vec(a_o));

  twisting_unit #(.W(W), .LANES(LANES)) u_twist (
    .clk(clk), .rst(rst), .in_valid(t_iv), .in_vec(t_i),
    .start0(s0_r[dir]), .start1(s1_r[dir]), .ratio2(r2_r[dir]), .q(q), .qinv(qinv),
    .out_valid(t_ov), .out_vec(t_o));

  transpose_unit #(.W(W), .LANES(LANES)) u_tr (
    .clk(clk), .rst(rst), .in_valid(x_iv), .in_vec(x_i), .out_valid(x_ov), .out_vec(x_o));

  ntt_network #(.W(W), .LANES(LANES)) u_bfb (
    .clk(clk), .rst(rst), .in_valid(b_iv), .in_vec(b_i), .tw(tw), .q(q), .qinv(qinv),
    .out_valid(b_ov), .out_vec(b_o));
endmodule
