// tb_vrf: register file with 3 read and 2 write ports, 8 lanes, 64
// entries. Random reads and writes on all ports every cycle (never two
// writes to one address), checked against a reference array; read data
// must appear one cycle after the address, and a read in the same cycle as
// a write to that address returns the old contents.
module tb_vrf;
  localparam int L = 8, D = 64, NR = 3, NW = 2, AW = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en [NR], wr_en [NW];
  logic [AW-1:0] rd_addr [NR], wr_addr [NW];
  logic [63:0] rd_data [NR][L], wr_data [NW][L];
  vrf #(.W(64), .LANES(L), .DEPTH(D), .NRD(NR), .NWR(NW), .AW(AW)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] ref_m [D][L];
  logic [63:0] exp_d [NR][L];
  bit exp_v [NR];
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int p = 0; p < NR; p++) begin rd_en[p] = 0; rd_addr[p] = 0; exp_v[p] = 0; end
    for (int p = 0; p < NW; p++) begin wr_en[p] = 0; wr_addr[p] = 0; end
    // fill
    for (int a = 0; a < D; a += NW) begin
      @(negedge clk);
      for (int p = 0; p < NW; p++) begin
        wr_en[p] = 1; wr_addr[p] = AW'(a + p);
        for (int k = 0; k < L; k++) begin wr_data[p][k] = {$urandom, $urandom}; ref_m[a + p][k] = wr_data[p][k]; end
      end
    end
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      // check reads issued last cycle
      for (int p = 0; p < NR; p++) if (exp_v[p]) for (int k = 0; k < L; k++) begin
        checks++;
        if (rd_data[p][k] !== exp_d[p][k]) begin failures++; if (failures < 10) $display("port %0d lane %0d wrong", p, k); end
      end
      for (int p = 0; p < NR; p++) begin
        rd_en[p] = ($urandom % 4) != 0; rd_addr[p] = AW'($urandom % D);
        exp_v[p] = rd_en[p];
        for (int k = 0; k < L; k++) exp_d[p][k] = ref_m[rd_addr[p]][k];
      end
      wr_addr[0] = (i % 7 == 0) ? rd_addr[0] : AW'($urandom % D);   // read-during-write
      wr_addr[1] = AW'((wr_addr[0] + 1 + $urandom % (D - 1)) % D);
      for (int p = 0; p < NW; p++) begin
        wr_en[p] = ($urandom % 2) != 0;
        for (int k = 0; k < L; k++) wr_data[p][k] = {$urandom, $urandom};
      end
      for (int p = 0; p < NW; p++) if (wr_en[p]) for (int k = 0; k < L; k++) ref_m[wr_addr[p]][k] = wr_data[p][k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
