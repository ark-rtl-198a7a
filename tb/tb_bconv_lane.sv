// tb_bconv_lane: one 1 x 6 systolic BConv lane. Runs blocks of alpha x 4
// input elements (alpha = 6 back to back, then alpha = 3 and 1 padded with
// bubbles to 24 cycles, with a drain gap where alpha changes) and checks
// every one of the 6 x 4 outputs of each block against
// sum_j x[j][c] * T[m][j] mod q_m, in order and at its cycle: the sum of
// MAC m for column c leaves 4 + 4m cycles after element (alpha-1, c) enters.
// The testbench plays the part of the broadcast units: it presents row m's
// table value to MAC m 1 + 4m cycles after the element enters.
module tb_bconv_lane;
  import tb_ark_pkg::*;
  localparam int M = 6;
  localparam int NB = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, in_first, in_last, out_valid;
  logic [63:0] in_x, bt [M], red_q, red_qinv, out_y;
  bconv_lane #(.W(64), .MACS(M)) dut (.*);
  int checks = 0, failures = 0;
  int alpha [NB];
  u64 tp [NB][M][6];          // plain table values T[m][j] of block b
  u64 xs [NB][6][4];
  // per-cycle history of what was driven: block, limb, last flag
  int hb [0:4095], hj [0:4095];
  bit hv [0:4095], hl [0:4095];
  int cyc = 0;                // cycle counter, steps at posedge
  always @(posedge clk) cyc++;
  typedef struct { int t; u64 v; int b; int m; int c; } exp_t;
  exp_t expq [$];
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // broadcast-unit model, write-back prime, and output checker
  always @(negedge clk) begin
    for (int m = 0; m < M; m++) begin
      automatic int d = cyc - 1 - 4*m;
      bt[m] = (d >= 0 && hv[d]) ? mont(tp[hb[d]][m][hj[d]], PRIMES[m]) : 64'd0;
    end
    red_q = PRIMES[0]; red_qinv = qinv_of(PRIMES[0]);
    for (int m = 0; m < M; m++) begin
      automatic int d = cyc - 2 - 4*m;
      if (d >= 0 && hv[d] && hl[d]) begin red_q = PRIMES[m]; red_qinv = qinv_of(PRIMES[m]); end
    end
    if (out_valid) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        automatic exp_t e = expq.pop_front();
        if (e.t != cyc || e.v !== out_y) begin
          failures++;
          $display("blk %0d m %0d c %0d: got %h at %0d, exp %h at %0d", e.b, e.m, e.c, out_y, cyc, e.v, e.t);
        end
      end
    end
  end
  initial begin
    int t;
    in_valid = 0; in_first = 0; in_last = 0; in_x = 0;
    for (int i = 0; i < 4096; i++) begin hv[i] = 0; hl[i] = 0; hb[i] = 0; hj[i] = 0; end
    for (int b = 0; b < NB; b++) begin
      alpha[b] = (b < 3) ? 6 : (b % 2 ? 3 : 1);
      for (int m = 0; m < M; m++) for (int j = 0; j < 6; j++) tp[b][m][j] = rnd(PRIMES[m]);
      for (int j = 0; j < 6; j++) for (int c = 0; c < 4; c++) xs[b][j][c] = rnd(PRIMES[7]);
    end
    @(negedge clk); @(negedge clk); rst = 0;
    for (int b = 0; b < NB; b++) begin
      // a change of alpha needs the lane to drain first (as between jobs)
      if (b > 0 && alpha[b] != alpha[b-1]) begin
        in_valid = 0; in_first = 0; in_last = 0;
        repeat (4 * M) @(negedge clk);
      end
      for (int k = 0; k < 4 * M; k++) begin
        automatic int j = k / 4, c = k % 4;
        if (j < alpha[b]) begin
          in_valid = 1; in_first = (j == 0); in_last = (j == alpha[b] - 1); in_x = xs[b][j][c];
          hv[cyc] = 1; hl[cyc] = in_last; hb[cyc] = b; hj[cyc] = j;
          if (in_last) begin
            // outputs of column c: MAC m at cyc + 4 + 4m; queue in time order later
            for (int m = 0; m < M; m++) begin
              automatic u64 s = 0;
              for (int jj = 0; jj < alpha[b]; jj++) s = addmod(s, mulmod(xs[b][jj][c] % PRIMES[m], tp[b][m][jj], PRIMES[m]), PRIMES[m]);
              expq.push_back('{t: cyc + 4 + 4*m, v: s, b: b, m: m, c: c});
            end
            expq.sort(x) with (x.t);
          end
        end else begin
          in_valid = 0; in_first = 0; in_last = 0; in_x = {$urandom, $urandom};
        end
        @(negedge clk);
      end
    end
    in_valid = 0; in_first = 0; in_last = 0;
    repeat (40) begin @(negedge clk); end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
