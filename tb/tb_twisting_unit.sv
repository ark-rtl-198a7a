// tb_twisting_unit: 8 lanes, two limbs of 8 vectors with bubbles between
// some vectors. Vector i, lane k must come out multiplied by r^(i*k) where
// the generators are seeded with start0 = 1, start1 = r^k, ratio r^(2k).
module tb_twisting_unit;
  import tb_ark_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [63:0] in_vec [L], out_vec [L], start0 [L], start1 [L], ratio2 [L], q, qinv;
  twisting_unit #(.W(64), .LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  u64 src [2*L][L];
  u64 r;
  int nout = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (out_valid) begin
    automatic int i = nout % L;
    for (int k = 0; k < L; k++) begin
      checks++;
      if (out_vec[k] !== mulmod(src[nout][k], powmod(r, i * k, q), q)) begin
        failures++; if (failures < 8) $display("vec %0d lane %0d got %h", nout, k, out_vec[k]);
      end
    end
    nout++;
  end
  initial begin
    q = PRIMES[1]; qinv = qinv_of(q); r = root_of(1, 64); in_valid = 0;
    for (int k = 0; k < L; k++) begin
      start0[k] = mont(1, q); start1[k] = mont(powmod(r, k, q), q); ratio2[k] = mont(powmod(r, 2*k, q), q);
      in_vec[k] = 0;
    end
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 2 * L; i++) begin
      in_valid = 1;
      for (int k = 0; k < L; k++) begin src[i][k] = rnd(q); in_vec[k] = src[i][k]; end
      @(negedge clk);
      if (i % 5 == 3) begin in_valid = 0; @(negedge clk); end   // a bubble
    end
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++; if (nout != 2 * L) begin failures++; $display("%0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
