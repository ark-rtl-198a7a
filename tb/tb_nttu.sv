// tb_nttu: self-checking test of the NTT unit at LANES = 8 (N = 64).
//
// Streams two limbs back to back through the forward NTT and compares each
// output word with a direct O(N^2) evaluation of X[k] = sum a[n] w^(nk).
// Then switches direction and runs the results back through the INTT with
// a BConv-mult constant h * N^-1, expecting h * a[n]. Checks that a limb
// leaves as LANES consecutive vectors (one limb per LANES cycles) and that
// the first-in to first-out latency matches the block latencies.
module tb_nttu;
  import tb_ark_pkg::*;
  import ark_pkg::*;
  localparam int L = 8;
  localparam int N = L * L;
  localparam int LIMBS = 2;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic dir, in_valid, out_valid, cfg_we, cfg_dir;
  ntt_cfg_e cfg_sel;
  logic [63:0] in_vec [L], out_vec [L], cfg_vec [L];
  logic [63:0] q, qinv;

  nttu #(.W(64), .LANES(L)) dut (.*);

  int checks = 0, failures = 0;
  u64 a   [LIMBS][N];
  u64 res [LIMBS][N];
  u64 wn, wni, h;
  int cyc = 0, first_in, first_out;
  always @(posedge clk) cyc++;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input logic d, input ntt_cfg_e s, input u64 v [L]);
    @(negedge clk);
    cfg_we = 1; cfg_dir = d; cfg_sel = s; cfg_vec = v;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_cfg(input logic d, input u64 w);
    u64 v [L];
    u64 wl = powmod(w, L, q);
    for (int e = 0; e < L; e++) v[e] = (e < L/2) ? mont(powmod(wl, e, q), q) : 0;
    cfg(d, NCFG_TWIDDLE, v);
    for (int k = 0; k < L; k++) v[k] = mont(1, q);
    cfg(d, NCFG_START0, v);
    for (int k = 0; k < L; k++) v[k] = mont(powmod(w, k, q), q);
    cfg(d, NCFG_START1, v);
    for (int k = 0; k < L; k++) v[k] = mont(powmod(w, 2 * k, q), q);
    cfg(d, NCFG_RATIO, v);
  endtask

  // collect outputs: limb index by order of arrival
  int ocnt = 0;
  int olast = -1, gaps = 0;
  always @(posedge clk) begin
    if (out_valid) begin
      if (ocnt == 0) first_out = cyc;
      if (olast >= 0 && cyc != olast + 1 && (ocnt % L) != 0) gaps++;
      olast = cyc;
      for (int j = 0; j < L; j++) res[ocnt / L][(ocnt % L) + L * j] = out_vec[j];
      ocnt++;
    end
  end

  task automatic stream(input logic d, input u64 src [LIMBS][N]);
    ocnt = 0; olast = -1; gaps = 0;
    @(negedge clk);
    dir = d;
    for (int l = 0; l < LIMBS; l++)
      for (int i = 0; i < L; i++) begin
        in_valid = 1;
        for (int j = 0; j < L; j++) in_vec[j] = src[l][i + L * j];
        if (l == 0 && i == 0) first_in = cyc;
        @(negedge clk);
      end
    in_valid = 0;
    repeat (4 * L + 200) @(negedge clk);
  endtask

  initial begin
    u64 src [LIMBS][N];
    u64 exp;
    int lat_ntt, lat_intt;
    q = PRIMES[0]; qinv = qinv_of(q);
    in_valid = 0; cfg_we = 0; dir = 0; cfg_dir = 0; cfg_sel = NCFG_TWIDDLE;
    for (int j = 0; j < L; j++) begin in_vec[j] = 0; cfg_vec[j] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    wn  = root_of(0, N);
    wni = invmod(wn, q);
    h   = rnd(q);
    load_cfg(0, wn);
    load_cfg(1, wni);
    begin
      u64 v [L];
      for (int k = 0; k < L; k++) v[k] = 0;
      v[0] = mont(mulmod(h, invmod(N, q), q), q);
      cfg(0, NCFG_BCMULT, v);
    end
    for (int l = 0; l < LIMBS; l++) for (int n = 0; n < N; n++) a[l][n] = rnd(q);

    // forward NTT
    stream(0, a);
    lat_ntt = first_out - first_in;
    checks++; if (ocnt != LIMBS * L) begin failures++; $display("NTT: %0d output vectors", ocnt); end
    checks++; if (gaps != 0) begin failures++; $display("NTT: gaps in output limb"); end
    checks++;
    // +1: the output side samples after the cycle counter has advanced
    if (lat_ntt != 3 + 2 * $clog2(L) * BFLY_LAT + 3 + L + 1) begin
      failures++; $display("NTT latency %0d", lat_ntt);
    end
    for (int l = 0; l < LIMBS; l++)
      for (int k = 0; k < N; k++) begin
        exp = 0;
        for (int n = 0; n < N; n++) exp = addmod(exp, mulmod(a[l][n], powmod(wn, n * k, q), q), q);
        checks++;
        if (res[l][k] !== exp) begin
          failures++;
          if (failures < 10) $display("NTT limb %0d k=%0d got %h exp %h", l, k, res[l][k], exp);
        end
      end

    // inverse NTT of the results, with BConv mult constant h * N^-1
    src = res;
    stream(1, src);
    lat_intt = first_out - first_in;
    checks++; if (ocnt != LIMBS * L) begin failures++; $display("INTT: %0d output vectors", ocnt); end
    checks++; if (lat_intt != lat_ntt) begin failures++; $display("INTT latency %0d", lat_intt); end
    for (int l = 0; l < LIMBS; l++)
      for (int n = 0; n < N; n++) begin
        checks++;
        if (res[l][n] !== mulmod(a[l][n], h, q)) begin
          failures++;
          if (failures < 10) $display("INTT limb %0d n=%0d got %h exp %h", l, n, res[l][n], mulmod(a[l][n], h, q));
        end
      end
    $display("NTTU latency %0d cycles", lat_ntt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
