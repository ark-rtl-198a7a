// tb_transpose_unit: three 8x8 blocks streamed back to back. Output vector
// k of a block must hold word k of input vector i in lane i; each block
// leaves as 8 consecutive vectors starting the cycle after its last input.
module tb_transpose_unit;
  localparam int L = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [63:0] in_vec [L], out_vec [L];
  transpose_unit #(.W(64), .LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] src [3*L][L];
  int nout = 0, cyc = 0, t_last [3];
  always @(posedge clk) cyc++;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (out_valid) begin
    automatic int blk = nout / L, k = nout % L;
    if (k == 0) begin
      checks++;
      if (cyc != t_last[blk] + 1) begin failures++; $display("block %0d starts at %0d, last in %0d", blk, cyc, t_last[blk]); end
    end
    for (int i = 0; i < L; i++) begin
      checks++;
      if (out_vec[i] !== src[blk*L + i][k]) begin failures++; $display("blk %0d k %0d lane %0d", blk, k, i); end
    end
    nout++;
  end
  initial begin
    in_valid = 0;
    for (int j = 0; j < L; j++) in_vec[j] = 0;
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 3 * L; i++) begin
      in_valid = 1;
      for (int j = 0; j < L; j++) begin src[i][j] = {$urandom, $urandom}; in_vec[j] = src[i][j]; end
      if (i % L == L - 1) t_last[i / L] = cyc;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3 * L) @(negedge clk);
    checks++; if (nout != 3 * L) begin failures++; $display("%0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
