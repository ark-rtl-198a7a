// tb_butterfly_unit: random butterflies; x = u + w v, y = u - w v mod q,
// with the twiddle in Montgomery form, results 4 cycles after the inputs.
module tb_butterfly_unit;
  import tb_ark_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [63:0] u, v, w, q, qinv, x, y;
  butterfly_unit #(.W(64)) dut (.*);
  int checks = 0, failures = 0;
  u64 ex [$], ey [$];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 300; i++) begin
      u64 wp;
      @(negedge clk);
      q = PRIMES[i % 8]; qinv = qinv_of(q);
      u = rnd(q); v = rnd(q); wp = rnd(q); w = mont(wp, q);
      ex.push_back(addmod(u, mulmod(wp, v, q), q));
      ey.push_back(submod(u, mulmod(wp, v, q), q));
      if (i >= 4) begin
        checks += 2;
        if (x !== ex[i-4]) begin failures++; $display("x #%0d %h exp %h", i-4, x, ex[i-4]); end
        if (y !== ey[i-4]) begin failures++; $display("y #%0d %h exp %h", i-4, y, ey[i-4]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
