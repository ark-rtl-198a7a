// tb_ntt_network: 16-lane pipelined NTT network. Streams 20 random vectors
// back to back, forward with w and then inverse with w^-1, and compares
// each output vector with a direct DFT. Latency must be 4*log2(16) cycles.
module tb_ntt_network;
  import tb_ark_pkg::*;
  localparam int L = 16;
  localparam int NV = 20;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [63:0] in_vec [L], out_vec [L], tw [L/2], q, qinv;
  ntt_network #(.W(64), .LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  u64 src [NV][L];
  int cyc = 0, t_in [NV], nout = 0;
  u64 wr;
  always @(posedge clk) cyc++;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (out_valid) begin
    checks++;
    if (cyc - t_in[nout] != 4 * $clog2(L)) begin failures++; $display("latency %0d", cyc - t_in[nout]); end
    for (int k = 0; k < L; k++) begin
      automatic u64 e = 0;
      for (int j = 0; j < L; j++) e = addmod(e, mulmod(src[nout][j], powmod(wr, j * k, q), q), q);
      checks++;
      if (out_vec[k] !== e) begin failures++; if (failures < 8) $display("vec %0d k %0d got %h exp %h", nout, k, out_vec[k], e); end
    end
    nout++;
  end
  task automatic run(input u64 root);
    wr = root;
    for (int e = 0; e < L/2; e++) tw[e] = mont(powmod(root, e, q), q);
    nout = 0;
    for (int i = 0; i < NV; i++) begin
      in_valid = 1;
      for (int j = 0; j < L; j++) begin src[i][j] = rnd(q); in_vec[j] = src[i][j]; end
      t_in[i] = cyc;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (40) @(negedge clk);
    checks++; if (nout != NV) begin failures++; $display("%0d outputs", nout); end
  endtask
  initial begin
    q = PRIMES[2]; qinv = qinv_of(q); in_valid = 0;
    for (int j = 0; j < L; j++) in_vec[j] = 0;
    repeat (2) @(negedge clk); rst = 0;
    run(root_of(2, L));
    run(invmod(root_of(2, L), q));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
