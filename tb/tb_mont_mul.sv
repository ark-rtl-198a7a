// tb_mont_mul: Montgomery multiplier, both pipeline depths, random 59-bit
// primes. Checks y * 2^64 = a * b (mod q) against a plain 128-bit reference
// and that results appear exactly LAT cycles after the operands.
module tb_mont_mul;
  import tb_ark_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [63:0] a, b, q, qinv, y3, y2;
  mont_mul #(.W(64), .LAT(3)) dut3 (.clk(clk), .en(1'b1), .a(a), .b(b), .q(q), .qinv(qinv), .y(y3));
  mont_mul #(.W(64), .LAT(2)) dut2 (.clk(clk), .en(1'b1), .a(a), .b(b), .q(q), .qinv(qinv), .y(y2));
  int checks = 0, failures = 0;
  u64 ea [$], eq [$];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      q = PRIMES[i % 8]; qinv = qinv_of(q);
      a = (i < 4) ? q - 1 : rnd(q); b = (i < 2) ? q - 1 : rnd(q);
      ea.push_back(mulmod(a, b, q)); eq.push_back(q);
      if (i >= 3) begin
        checks++;
        if (mulmod(y3, mont(1, eq[i-3]), eq[i-3]) !== ea[i-3] || y3 >= eq[i-3]) begin
          failures++; $display("LAT3 #%0d got %h", i-3, y3);
        end
      end
      if (i >= 2) begin
        checks++;
        if (mulmod(y2, mont(1, eq[i-2]), eq[i-2]) !== ea[i-2] || y2 >= eq[i-2]) begin
          failures++; $display("LAT2 #%0d got %h", i-2, y2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
