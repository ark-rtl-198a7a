// bconv_lane: one lane of the BConv unit, a 1 x MACS output-stationary
// systolic array of modular multiply-accumulate (MAC) units.
//
// The lane receives one input coefficient per cycle: element (j, c) of an
// alpha x 4 block, limb j = 0..alpha-1 outer, column c = 0..3 inner. MAC m
// computes the inner product of base-table row m with the 4 columns: it
// holds 4 partial sums in a rotating 4-entry output buffer and adds
// x * b_m each cycle (first restarts a sum from zero, last sends the
// finished sum out instead of back). The coefficient passes from MAC m to
// MAC m+1 through a 4-entry input buffer, so MAC m works 4*m cycles after
// MAC 0 and its base-table value b_m (from broadcast unit m) must be staggered
// the same way; the caller (bconv_unit) does this.
// Sums are kept unreduced in 2W bits. When a block ends, MAC m emits its 4
// sums on 4 consecutive cycles, 4 cycles after MAC m-1, so one multiplexer
// and one shared Montgomery reduction on the write-back path serve all MACs,
// as in the paper's BConv figure. red_q/red_qinv give the prime of the sum
// being emitted in that cycle. Base-table values are in Montgomery form, so
// the reduced result is sum_j x_j * b_mj mod q.
// Timing: element entering at cycle t is used by MAC m in cycle t+1+4m; a
// sum emitted by MAC m leaves the lane at t+4+4m (t of its last element).
// Rate: one MAC per unit per cycle; one reduced output per cycle.
// Sums must stay below q * 2^W, e.g. alpha * q^2 < q * 2^W.
module bconv_lane #(
  parameter int unsigned W    = 64,
  parameter int unsigned MACS = 6
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic         in_first,
  input  logic         in_last,
  input  logic [W-1:0] in_x,
  input  logic [W-1:0] bt [MACS],     // broadcast base-table values, staggered
  input  logic [W-1:0] red_q,
  input  logic [W-1:0] red_qinv,
  output logic         out_valid,
  output logic [W-1:0] out_y
);
  localparam int unsigned C = ark_pkg::BC_COLS;

  typedef struct packed {
    logic         v;
    logic         f;
    logic         l;
    logic [W-1:0] x;
  } elem_t;

  elem_t            ein   [MACS];           // element seen by MAC m
  elem_t            ibuf  [MACS][C];        // input buffers between MACs
  logic [2*W-1:0]   acc   [MACS][C];        // output buffers (partial sums)
  logic [2*W-1:0]   sum   [MACS];
  logic             emit_v   [MACS];
  logic [2*W-1:0]   emit_val [MACS];

  // MAC 0 input register
  always_ff @(posedge clk) begin
    if (rst) ein[0] <= '0;
    else     ein[0] <= '{v: in_valid, f: in_first, l: in_last, x: in_x};
  end

  for (genvar m = 0; m < MACS; m++) begin : g_mac
    if (m > 0) begin : g_buf
      // 4-entry input buffer passing the coefficient on to the next MAC
      always_ff @(posedge clk) begin
        if (rst) ibuf[m] <= '{default: '0};
        else begin
          ibuf[m][0] <= ein[m-1];
          for (int k = 1; k < C; k++) ibuf[m][k] <= ibuf[m][k-1];
        end
      end
      assign ein[m] = ibuf[m][C-1];
    end

    always_comb sum[m] = (ein[m].f ? '0 : acc[m][0]) + (2*W)'(ein[m].x) * (2*W)'(bt[m]);

    always_ff @(posedge clk) begin
      if (ein[m].v) begin
        for (int k = 0; k < C - 1; k++) acc[m][k] <= acc[m][k+1];
        acc[m][C-1] <= sum[m];
      end
      emit_val[m] <= sum[m];
      if (rst) emit_v[m] <= 1'b0;
      else     emit_v[m] <= ein[m].v && ein[m].l;
    end
  end

  // write-back multiplexer and shared modular reduction
  logic [2*W-1:0] wb;
  logic           wb_v;
  always_comb begin
    wb = '0; wb_v = 1'b0;
    for (int m = 0; m < MACS; m++)
      if (emit_v[m]) begin wb = emit_val[m]; wb_v = 1'b1; end
  end

  mont_redc #(.W(W), .LAT(2)) u_red (
    .clk(clk), .en(1'b1), .t_in(wb), .q(red_q), .qinv(red_qinv), .y(out_y));

  logic [1:0] ov;
  always_ff @(posedge clk) begin
    if (rst) ov <= '0;
    else     ov <= {ov[0], wb_v};
  end
  assign out_valid = ov[1];

  // only one MAC may use the write-back path in a cycle
  logic [MACS-1:0] emit_bits;
  for (genvar m = 0; m < MACS; m++) begin : g_eb
    assign emit_bits[m] = emit_v[m];
  end
  assert property (@(posedge clk) disable iff (rst) $onehot0(emit_bits))
    else $error("bconv_lane: two MACs emit in one cycle");
endmodule
