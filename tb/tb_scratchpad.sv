// tb_scratchpad: single-ported scratchpad, 8 lanes, 1024 words per lane.
// Random mix of reads, writes and idle cycles against a reference array;
// read data one cycle after the address; rdata holds while idle.
module tb_scratchpad;
  localparam int L = 8, D = 1024, AW = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [AW-1:0] addr;
  logic [63:0] wdata [L], rdata [L];
  scratchpad #(.W(64), .LANES(L), .DEPTH(D), .AW(AW)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] ref_m [D][L];
  logic [63:0] exp_d [L];
  bit exp_v;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 0; we = 0; addr = 0; exp_v = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); en = 1; we = 1; addr = AW'(a);
      for (int k = 0; k < L; k++) begin wdata[k] = {$urandom, $urandom}; ref_m[a][k] = wdata[k]; end
    end
    for (int i = 0; i < 3000; i++) begin
      int kind;
      @(negedge clk);
      if (exp_v) for (int k = 0; k < L; k++) begin
        checks++;
        if (rdata[k] !== exp_d[k]) begin failures++; if (failures < 10) $display("cycle %0d lane %0d wrong", i, k); end
      end
      kind = $urandom % 3;
      en = (kind != 2); we = (kind == 1); addr = AW'($urandom % D);
      if (kind == 0) for (int k = 0; k < L; k++) exp_d[k] = ref_m[addr][k];
      exp_v = (kind == 0) || (exp_v && kind == 2);   // idle keeps the last read
      if (kind == 1) for (int k = 0; k < L; k++) begin wdata[k] = {$urandom, $urandom}; ref_m[addr][k] = wdata[k]; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
