// bconv_unit: base-conversion unit of one cluster (second step of BConv).
//
// Computes out[r][n] = sum_j x[j][n] * T[r][j] mod q_r for r < nout output
// limbs and j < alpha input limbs, for every coefficient n this cluster
// holds in coefficient-wise layout: a (nout x alpha) base table times an
// (alpha x N/4) matrix. Each of LANES BConv lanes owns one column stripe;
// the work is cut into blocks of MACS table rows x 4 columns per lane, as the
// paper describes (6 x alpha table blocks and alpha x (4*LANES) data blocks).
// MACS central broadcast units (BrUs) hold the base table: BrU m holds the
// rows r = m (mod MACS) and broadcasts one value every 4 cycles, staggered
// by 4*m cycles to follow the systolic lanes.
// RF(NoC) layout per lane (this design's choice): input limb j, column n at
// in_base + j*cols + n; output limb r, column n at out_base + r*cols + n,
// with cols = 4*ngroups columns per lane.
// A job starts on start and reads one word per lane per cycle; when alpha
// is below MACS, bubbles stretch each block to 4*MACS cycles so the shared
// write-back path of each lane is never oversubscribed. Base-table values
// are loaded in Montgomery form; q/qinv per output row through q_we.
module bconv_unit #(
  parameter int unsigned W     = 64,
  parameter int unsigned LANES = 256,
  parameter int unsigned MACS  = 6,
  parameter int unsigned AW    = ark_pkg::ADDR_W
) (
  input  logic         clk,
  input  logic         rst,
  // base table and per-row prime configuration
  input  logic         bt_we,
  input  logic [4:0]   bt_row,
  input  logic [2:0]   bt_col,
  input  logic [W-1:0] bt_val,
  input  logic         q_we,
  input  logic [4:0]   q_row,
  input  logic [W-1:0] q_val,
  input  logic [W-1:0] qinv_val,
  // job
  input  logic         start,
  input  logic [2:0]   alpha,
  input  logic [4:0]   nout,
  input  logic [AW-1:0] ngroups,
  input  logic [AW-1:0] in_base,
  input  logic [AW-1:0] out_base,
  output logic         busy,
  // RF(NoC) read and write ports
  output logic         rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [W-1:0] rd_data [LANES],
  output logic         wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [W-1:0] wr_data [LANES]
);
  import ark_pkg::*;
  localparam int unsigned RB   = (BC_ROWS_MAX + MACS - 1) / MACS;   // row blocks
  localparam int unsigned BRUD = RB * ALPHA_MAX;                    // BrU depth
  localparam int unsigned TL   = 4 * MACS + 3;                      // tag line

  typedef struct packed {
    logic         v;
    logic         f;
    logic         l;
    logic [2:0]   j;
    logic [1:0]   c;
    logic [2:0]   rb;
    logic [AW-1:0] g;
  } tag_t;

  // ---- broadcast units: base-table storage --------------------------------
  logic [W-1:0] bru_mem [MACS][BRUD];
  logic [W-1:0] qtab    [BC_ROWS_MAX];
  logic [W-1:0] qitab   [BC_ROWS_MAX];
  always_ff @(posedge clk) begin
    if (bt_we) bru_mem[bt_row % MACS][(bt_row / MACS) * ALPHA_MAX + bt_col] <= bt_val;
    if (q_we) begin
      qtab[q_row]  <= q_val;
      qitab[q_row] <= qinv_val;
    end
  end

  // ---- sequencer ----------------------------------------------------------
  logic         run;
  logic [2:0]   s_rb;
  logic [AW-1:0] s_g;
  logic [2:0]   s_j;
  logic [1:0]   s_c;
  logic [2:0]   r_alpha;
  logic [4:0]   r_nout;
  logic [AW-1:0] r_ng, r_in, r_out;
  logic [7:0]   drain;
  logic [2:0]   nrb, span;
  tag_t         rd_tag, lane_tag;
  tag_t         tl [TL];

  assign nrb  = 3'((r_nout + 5'(MACS) - 5'd1) / 5'(MACS));
  assign span = (r_alpha > 3'(MACS)) ? r_alpha : 3'(MACS);

  always_ff @(posedge clk) begin
    if (rst) begin
      run <= 1'b0; drain <= '0;
      s_rb <= '0; s_g <= '0; s_j <= '0; s_c <= '0;
      r_alpha <= '0; r_nout <= '0; r_ng <= '0; r_in <= '0; r_out <= '0;
    end else if (start && !busy) begin
      run <= 1'b1;
      r_alpha <= alpha; r_nout <= nout; r_ng <= ngroups; r_in <= in_base; r_out <= out_base;
      s_rb <= '0; s_g <= '0; s_j <= '0; s_c <= '0;
    end else if (run) begin
      s_c <= s_c + 2'd1;
      if (s_c == 2'd3) begin
        s_j <= s_j + 3'd1;
        if (s_j == span - 3'd1) begin
          s_j <= '0;
          s_g <= s_g + 1'b1;
          if (s_g == r_ng - 1'b1) begin
            s_g  <= '0;
            s_rb <= s_rb + 3'd1;
            if (s_rb == nrb - 3'd1) begin
              run   <= 1'b0;
              drain <= 8'(TL + 4);
            end
          end
        end
      end
    end else if (drain != 0) begin
      drain <= drain - 8'd1;
    end
  end
  assign busy = run || (drain != 0);

  always_comb begin
    rd_tag    = '{v: run && (s_j < r_alpha), f: (s_j == 3'd0), l: (s_j == r_alpha - 3'd1),
                  j: s_j, c: s_c, rb: s_rb, g: s_g};
    rd_en     = rd_tag.v;
    rd_addr   = r_in + AW'(s_j) * (r_ng << 2) + (s_g << 2) + AW'(s_c);
  end

  // tag line: tl[d] is the tag of the element that entered the lanes d cycles ago
  always_ff @(posedge clk) begin
    if (rst) begin
      lane_tag <= '0;
      tl <= '{default: '0};
    end else begin
      lane_tag <= rd_tag;                 // RF read latency of one cycle
      tl[0] <= lane_tag;
      for (int d = 1; d < TL; d++) tl[d] <= tl[d-1];
    end
  end

  // ---- broadcast: BrU m loads once every 4 cycles, 4*m cycles after BrU 0 --
  logic [W-1:0] bcast [MACS];
  for (genvar m = 0; m < MACS; m++) begin : g_bru
    tag_t tm;
    if (m == 0) begin : g_z
      assign tm = lane_tag;
    end else begin : g_d
      assign tm = tl[4*m-1];
    end
    always_ff @(posedge clk) begin
      if (tm.v && tm.c == 2'd0)
        bcast[m] <= bru_mem[m][tm.rb * ALPHA_MAX + 3'(tm.j)];
    end
  end

  // ---- write-back: which MAC emits this cycle, and its prime --------------
  logic [W-1:0]  red_q, red_qi;
  logic          em_v;
  logic [4:0]    em_row;
  logic [AW-1:0] em_col;
  always_comb begin
    em_v = 1'b0; em_row = '0; em_col = '0;
    for (int m = 0; m < MACS; m++) begin
      if (tl[4*m+1].v && tl[4*m+1].l) begin
        em_v   = 1'b1;
        em_row = 5'(tl[4*m+1].rb * MACS + m);
        em_col = (tl[4*m+1].g << 2) + AW'(tl[4*m+1].c);
      end
    end
    red_q  = qtab[em_row % BC_ROWS_MAX];
    red_qi = qitab[em_row % BC_ROWS_MAX];
  end

  logic [1:0]    o_v;
  logic [4:0]    o_row [2];
  logic [AW-1:0] o_col [2];
  always_ff @(posedge clk) begin
    if (rst) o_v <= '0;
    else     o_v <= {o_v[0], em_v};
    o_row[0] <= em_row; o_row[1] <= o_row[0];
    o_col[0] <= em_col; o_col[1] <= o_col[0];
  end

  logic lane_ov [LANES];
  for (genvar k = 0; k < LANES; k++) begin : g_lane
    bconv_lane #(.W(W), .MACS(MACS)) u_lane (
      .clk(clk), .rst(rst),
      .in_valid(lane_tag.v), .in_first(lane_tag.f), .in_last(lane_tag.l),
      .in_x(rd_data[k]), .bt(bcast), .red_q(red_q), .red_qinv(red_qi),
      .out_valid(lane_ov[k]), .out_y(wr_data[k]));
  end

  assign wr_en   = o_v[1] && (o_row[1] < r_nout);
  assign wr_addr = r_out + AW'(o_row[1]) * (r_ng << 2) + o_col[1];
endmodule
