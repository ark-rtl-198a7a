// tb_autou: automorphism unit with 16 lanes (N = 256). For several
// rotation amounts r (g = 5^r mod N, plus g = N-1 for conjugation), a full
// polynomial of 16 vectors is streamed back to back. Each output vector is
// checked coefficient by coefficient against the index map
// n = i + 16 j  ->  n*g mod N, together with its index, its tag, and the
// latency of 1 + log2(16) cycles.
module tb_autou;
  localparam int L = 16, S = 4, N = L * L;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [S-1:0] in_idx, out_idx;
  logic [2*S-1:0] g;
  logic [63:0] in_vec [L], out_vec [L];
  logic [15:0] in_tag, out_tag;
  autou #(.W(64), .LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;
  logic [63:0] src [L][L];
  int t_in [L], nout = 0, gcur;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (out_valid) begin
    automatic int i = nout % L;
    automatic int ip = (i * gcur) % L;
    checks += 3;
    if (out_idx != 4'(ip)) begin failures++; $display("g %0d vec %0d: idx %0d exp %0d", gcur, i, out_idx, ip); end
    if (out_tag != 16'(1000 + i)) begin failures++; $display("tag"); end
    if (cyc - t_in[i] != 1 + S) begin failures++; $display("latency %0d", cyc - t_in[i]); end
    for (int j = 0; j < L; j++) begin
      automatic int np = ((i + L * j) * gcur) % N;
      checks++;
      if (out_vec[np / L] !== src[i][j]) begin
        failures++; if (failures < 10) $display("g %0d n %0d -> lane %0d wrong", gcur, i + L * j, np / L);
      end
    end
    nout++;
  end
  initial begin
    int gs [6];
    gs[0] = 5; gs[1] = 25; gs[2] = 1; gs[3] = N - 1;
    gs[4] = 1; for (int k = 0; k < 37; k++) gs[4] = (gs[4] * 5) % N;
    gs[5] = 1; for (int k = 0; k < 50; k++) gs[5] = (gs[5] * 5) % N;
    in_valid = 0; in_idx = 0; g = 0; in_tag = 0;
    for (int j = 0; j < L; j++) in_vec[j] = 0;
    repeat (2) @(negedge clk); rst = 0;
    for (int r = 0; r < 6; r++) begin
      gcur = gs[r]; g = 8'(gs[r]); nout = 0;
      for (int i = 0; i < L; i++) begin
        in_valid = 1; in_idx = 4'(i); in_tag = 16'(1000 + i); t_in[i] = cyc;
        for (int j = 0; j < L; j++) begin src[i][j] = {$urandom, $urandom}; in_vec[j] = src[i][j]; end
        @(negedge clk);
      end
      in_valid = 0;
      repeat (S + 3) @(negedge clk);
      checks++; if (nout != L) begin failures++; $display("%0d vectors out", nout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
