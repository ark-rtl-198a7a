// tb_bconv_mult_unit: per-limb constant multiply (INTT direction) and the
// bypass (NTT direction), alternating, with a 3-cycle latency.
module tb_bconv_mult_unit;
  import tb_ark_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, bypass, out_valid;
  logic [63:0] in_vec [L], out_vec [L], c, q, qinv;
  bconv_mult_unit #(.W(64), .LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  u64 exp_q [$][L];
  u64 cp;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    q = PRIMES[3]; qinv = qinv_of(q); cp = rnd(q); c = mont(cp, q);
    in_valid = 0; bypass = 0;
    for (int j = 0; j < L; j++) in_vec[j] = 0;
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 40; i++) begin
      u64 e [L];
      in_valid = 1; bypass = (i % 3 == 0);
      for (int j = 0; j < L; j++) begin
        in_vec[j] = rnd(q);
        e[j] = bypass ? in_vec[j] : mulmod(in_vec[j], cp, q);
      end
      exp_q.push_back(e);
      @(negedge clk);
      if (i >= 2) begin
        checks++;
        if (!out_valid) begin failures++; $display("no output at %0d", i); end
        for (int j = 0; j < L; j++) begin
          checks++;
          if (out_vec[j] !== exp_q[i-2][j]) begin failures++; $display("vec %0d lane %0d", i-2, j); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
