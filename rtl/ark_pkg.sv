// ark_pkg: types, sizes and shared arithmetic for the ARK FHE accelerator.
//
// The accelerator works on 64-bit words (one RNS residue per word) across
// 256 vector lanes per cluster, with four clusters. A polynomial limb of
// N = 2^16 coefficients is held as 256 vectors of 256 words: vector i,
// lane j holds coefficient i + 256*j. These numbers follow the paper;
// the register-file split and the control-word layout are this design's.
package ark_pkg;

  // ---- sizes taken from the paper ------------------------------------
  localparam int unsigned W_DEF        = 64;      // word size
  localparam int unsigned LANES_DEF    = 256;     // sqrt(N) lanes per cluster
  localparam int unsigned CLUSTERS_DEF = 4;
  localparam int unsigned MACS_DEF     = 6;       // MAC units per BConv lane
  localparam int unsigned BC_COLS      = 4;       // columns time-multiplexed per MAC
  localparam int unsigned ALPHA_MAX    = 6;       // alpha for (N,L,dnum) = (2^16,23,4)
  localparam int unsigned BC_ROWS_MAX  = 24;      // |D \ C_i| = L+1 output limbs
  // scratchpad: 128 MB per cluster = 256 lanes x 65536 words x 8 B
  localparam int unsigned SP_DEPTH_DEF = 65536;
  // register files: 19 MB per cluster in total (paper); split is assumed:
  // Eval 8 MB, Coeff 7 MB, NoC 4 MB
  localparam int unsigned RF_EVAL_DEPTH_DEF  = 4096;
  localparam int unsigned RF_COEFF_DEPTH_DEF = 3584;
  localparam int unsigned RF_NOC_DEPTH_DEF   = 2048;

  // ---- pipeline latencies ---------------------------------------------
  localparam int unsigned MONT_LAT_NTT   = 3;  // Fig. 9: mod mult, 3 cycles
  localparam int unsigned MONT_LAT_TWIST = 2;  // Fig. 9: mod mult, 2 cycles
  localparam int unsigned BFLY_LAT       = MONT_LAT_NTT + 1;
  localparam int unsigned MADU_LAT       = 3;
  localparam int unsigned ADDR_W         = 16;

  typedef logic [63:0]  word_t;
  typedef logic [127:0] dword_t;

  typedef enum logic [1:0] {MADU_MUL = 2'd0, MADU_ADD = 2'd1,
                            MADU_SUB = 2'd2, MADU_MAC = 2'd3} madu_op_e;

  // configuration registers of the NTT unit (one vector of LANES words each)
  typedef enum logic [2:0] {NCFG_TWIDDLE = 3'd0,  // lanes [0,L/2): w_L^e, Montgomery form
                            NCFG_START0  = 3'd1,  // twisting generator 0 start values
                            NCFG_START1  = 3'd2,  // twisting generator 1 start values
                            NCFG_RATIO   = 3'd3,  // common ratio (squared) per lane
                            NCFG_BCMULT  = 3'd4   // lane 0: BConv-mult constant
                            } ntt_cfg_e;

  // operand sources of a MADU
  typedef enum logic [1:0] {OPND_EV = 2'd0,   // its own RF(Eval) read port
                            OPND_SP = 2'd1,   // scratchpad read data
                            OPND_ZERO = 2'd2} opnd_e;

  // source of the NoC transmit vector of a cluster
  typedef enum logic {NOC_FROM_COEFF = 1'b0, NOC_FROM_NOCRF = 1'b1} noc_src_e;

  // Per-cycle control word of one cluster. The paper schedules all units
  // statically (its simulator acts as a VLIW compiler); this word is the
  // interface such a schedule drives. "issue" fields read the source
  // register file this cycle; the unit receives the data next cycle.
  // Write-back of the NTT unit and of NoC receive uses an address counter
  // that *_set loads with a base; the AutoU and MADUs carry their write
  // address with the data.
  typedef struct packed {
    // NTT unit: NTT reads RF(Coeff) and writes RF(Eval); INTT the reverse
    logic                       ntt_issue;
    logic                       ntt_dir;
    logic [ADDR_W-1:0]          ntt_rd_addr;
    logic                       ntt_wb_set;
    logic [ADDR_W-1:0]          ntt_wb_base;
    logic [63:0]                ntt_q;
    logic [63:0]                ntt_qinv;
    logic                       ntt_cfg_we;
    logic                       ntt_cfg_dir;
    ntt_cfg_e                   ntt_cfg_sel;
    // BConv unit: reads and writes RF(NoC)
    logic                       bc_start;
    logic [2:0]                 bc_alpha;
    logic [4:0]                 bc_nout;
    logic [ADDR_W-1:0]          bc_ngroups;
    logic [ADDR_W-1:0]          bc_in_base;
    logic [ADDR_W-1:0]          bc_out_base;
    logic                       bc_bt_we;
    logic                       bc_q_we;
    logic [4:0]                 bc_row;
    logic [2:0]                 bc_col;
    logic [63:0]                bc_val;      // base-table value or q
    logic [63:0]                bc_qinv;
    // automorphism unit: RF(Eval) -> RF(Eval)
    logic                       au_issue;
    logic [ADDR_W-1:0]          au_rd_addr;
    logic [7:0]                 au_idx;
    logic [15:0]                au_g;
    logic [ADDR_W-1:0]          au_wb_base;
    // two MADUs: operands from RF(Eval) or the scratchpad, result to RF(Eval)
    logic [1:0]                 md_issue;
    logic [1:0][1:0]            md_op;
    logic [1:0][1:0]            md_b_src;    // opnd_e
    logic [1:0][1:0]            md_c_src;    // opnd_e
    logic [1:0][ADDR_W-1:0]     md_a_addr;
    logic [1:0][ADDR_W-1:0]     md_b_addr;
    logic [1:0][ADDR_W-1:0]     md_c_addr;
    logic [1:0][ADDR_W-1:0]     md_wb_addr;
    logic [63:0]                md_q;
    logic [127:0]               md_mu;
    // scratchpad (single port) and its moves to and from RF(Eval) and HBM
    logic                       sp_en;
    logic                       sp_we;
    logic                       sp_wsrc_hbm; // write data: 1 = HBM, 0 = RF(Eval)
    logic                       sp_to_hbm;   // read data goes to HBM
    logic [ADDR_W-1:0]          sp_addr;
    logic                       ev_st_rd;    // read RF(Eval) for a store
    logic [ADDR_W-1:0]          ev_st_addr;
    logic                       sp_ld_wb;    // write scratchpad read data to RF(Eval)
    logic [ADDR_W-1:0]          sp_ld_addr;
    // NoC
    logic                       noc_tx_rd;
    noc_src_e                   noc_src;
    logic [ADDR_W-1:0]          noc_tx_addr;
    logic                       noc_rx_en;
    logic                       noc_rx_to_coeff; // 0 = RF(NoC), 1 = RF(Coeff)
    logic                       noc_rx_set;
    logic [ADDR_W-1:0]          noc_rx_base;
    logic [1:0]                 noc_sel;     // source cluster of this cluster's receive
  } cluster_ctrl_t;

  function automatic int unsigned clog2(input int unsigned x);
    return (x <= 1) ? 1 : $clog2(x);
  endfunction

  function automatic int unsigned bitrev(input int unsigned x, input int unsigned bits);
    int unsigned r = 0;
    for (int unsigned b = 0; b < bits; b++) r |= ((x >> b) & 1) << (bits - 1 - b);
    return r;
  endfunction

endpackage
