// tb_bconv_unit: BConv unit with 4 lanes and the paper's 6 MACs per lane,
// against a behavioural RF(NoC) (one-cycle read latency). Runs three jobs:
// alpha = 6 -> 7 output limbs (two row blocks, the second one partial),
// alpha = 2 -> 3 limbs (bubbles, since alpha < 6) and alpha = 6 -> 12.
// Checks every written word against sum_j x[j][n] * T[r][j] mod q_r, that
// nothing outside the output rows is written, and that busy lasts exactly
// row_blocks * groups * 4 * max(alpha, 6) cycles plus the fixed drain.
module tb_bconv_unit;
  import tb_ark_pkg::*;
  localparam int L = 4, M = 6, AW = 16, TL = 4 * M + 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic bt_we, q_we, start, busy, rd_en, wr_en;
  logic [4:0] bt_row, q_row, nout;
  logic [2:0] bt_col, alpha;
  logic [63:0] bt_val, q_val, qinv_val;
  logic [AW-1:0] ngroups, in_base, out_base, rd_addr, wr_addr;
  logic [63:0] rd_data [L], wr_data [L];
  bconv_unit #(.W(64), .LANES(L), .MACS(M), .AW(AW)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] mem [1024][L];
  bit written [1024];
  always_ff @(posedge clk) begin
    if (rd_en) for (int k = 0; k < L; k++) rd_data[k] <= mem[rd_addr][k];
    if (wr_en) begin
      for (int k = 0; k < L; k++) mem[wr_addr][k] <= wr_data[k];
      written[wr_addr] <= 1'b1;
    end
  end
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic job(input int a, input int no, input int ng, input int ib, input int ob);
    u64 t [24][6];
    int cols = 4 * ng, busy_cyc = 0, nrb = (no + M - 1) / M, span = (a > M) ? a : M;
    u64 x [6][64][L];
    // table, in Montgomery form mod the output prime
    for (int r = 0; r < 24; r++) for (int j = 0; j < 6; j++) begin
      t[r][j] = rnd(PRIMES[r % 8]);
      @(negedge clk); bt_we = 1; bt_row = 5'(r); bt_col = 3'(j); bt_val = mont(t[r][j], PRIMES[r % 8]);
    end
    @(negedge clk); bt_we = 0;
    for (int j = 0; j < a; j++) for (int n = 0; n < cols; n++) for (int k = 0; k < L; k++) begin
      x[j][n][k] = rnd(PRIMES[7]);
      mem[ib + j * cols + n][k] = x[j][n][k];
    end
    for (int i = 0; i < 1024; i++) written[i] = 0;
    start = 1; alpha = 3'(a); nout = 5'(no); ngroups = AW'(ng); in_base = AW'(ib); out_base = AW'(ob);
    @(negedge clk); start = 0;
    while (busy) begin busy_cyc++; @(negedge clk); end
    checks++;
    if (busy_cyc != nrb * ng * 4 * span + TL + 4) begin
      failures++; $display("job a=%0d: busy %0d cycles, exp %0d", a, busy_cyc, nrb * ng * 4 * span + TL + 4);
    end
    for (int r = 0; r < no; r++) for (int n = 0; n < cols; n++) begin
      checks++;
      if (!written[ob + r * cols + n]) begin failures++; $display("row %0d col %0d not written", r, n); end
      for (int k = 0; k < L; k++) begin
        u64 e = 0;
        for (int j = 0; j < a; j++) e = addmod(e, mulmod(x[j][n][k] % PRIMES[r % 8], t[r][j], PRIMES[r % 8]), PRIMES[r % 8]);
        checks++;
        if (mem[ob + r * cols + n][k] !== e) begin
          failures++; if (failures < 10) $display("a=%0d r %0d n %0d lane %0d: %h exp %h", a, r, n, k, mem[ob + r * cols + n][k], e);
        end
      end
    end
    begin
      int extra = 0;
      for (int i = 0; i < 1024; i++) if (written[i] && (i < ob || i >= ob + no * cols)) extra++;
      checks++;
      if (extra != 0) begin failures++; $display("%0d stray writes", extra); end
    end
  endtask
  initial begin
    bt_we = 0; q_we = 0; start = 0; bt_row = 0; bt_col = 0; bt_val = 0; q_row = 0; q_val = 0; qinv_val = 0;
    alpha = 0; nout = 0; ngroups = 0; in_base = 0; out_base = 0;
    for (int i = 0; i < 1024; i++) for (int k = 0; k < L; k++) mem[i][k] = 0;
    repeat (2) @(negedge clk); rst = 0;
    for (int r = 0; r < 24; r++) begin
      @(negedge clk); q_we = 1; q_row = 5'(r); q_val = PRIMES[r % 8]; qinv_val = qinv_of(PRIMES[r % 8]);
    end
    @(negedge clk); q_we = 0;
    job(6, 7, 2, 0, 100);
    job(2, 3, 3, 40, 300);
    job(6, 12, 1, 500, 600);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
