// tb_madu: multiply-add unit, 8 lanes, all four operations on random
// operands (and q-1 corner values) across several primes, one vector per
// cycle, results checked 3 cycles later together with the tag.
module tb_madu;
  import tb_ark_pkg::*;
  import ark_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  madu_op_e op;
  logic [63:0] a [L], b [L], c [L], y [L], q;
  logic [127:0] mu;
  logic [15:0] in_tag, out_tag;
  madu #(.W(64), .LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  u64 ex [$][L];
  logic [15:0] et [$];
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_valid = 0; op = MADU_MUL; q = PRIMES[0]; mu = 0; in_tag = 0;
    for (int k = 0; k < L; k++) begin a[k] = 0; b[k] = 0; c[k] = 0; end
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 400; i++) begin
      u64 e [L];
      in_valid = 1; op = madu_op_e'(i % 4); q = PRIMES[(i / 4) % 8];
      mu = {64'd1, 128'd0} / {64'd0, q};
      in_tag = 16'(i);
      for (int k = 0; k < L; k++) begin
        a[k] = (i < 8 && k < 2) ? q - 1 : rnd(q); b[k] = (i < 8 && k < 4) ? q - 1 : rnd(q); c[k] = (i < 8) ? q - 1 : rnd(q);
        case (op)
          MADU_MUL: e[k] = mulmod(a[k], b[k], q);
          MADU_ADD: e[k] = addmod(a[k], b[k], q);
          MADU_SUB: e[k] = submod(a[k], b[k], q);
          default:  e[k] = addmod(mulmod(a[k], b[k], q), c[k], q);
        endcase
      end
      ex.push_back(e); et.push_back(16'(i));
      @(negedge clk);
      if (i >= 2) begin
        checks += 2;
        if (!out_valid) begin failures++; $display("no valid at %0d", i); end
        if (out_tag !== et[i-2]) begin failures++; $display("tag %0d", i); end
        for (int k = 0; k < L; k++) begin
          checks++;
          if (y[k] !== ex[i-2][k]) begin failures++; if (failures < 10) $display("vec %0d op %0d lane %0d: %h exp %h", i-2, (i-2)%4, k, y[k], ex[i-2][k]); end
        end
      end
    end
    in_valid = 0;
    repeat (4) @(negedge clk);
    checks++; if (out_valid) begin failures++; $display("valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
