// tb_noc: 4-cluster network with 8 lanes. Runs the 4-round all-to-all
// exchange (round t: sel[d] = (d - t) mod 4) with random data, a broadcast
// (all destinations select cluster 2) and random selections with some
// receivers disabled; each received vector must equal the selected
// source's vector of the previous cycle, lane for lane.
module tb_noc;
  localparam int L = 8, C = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic tx_valid [C], rx_en [C], rx_valid [C];
  logic [63:0] tx_vec [C][L], rx_vec [C][L];
  logic [1:0] sel [C];
  noc #(.W(64), .LANES(L), .CLUSTERS(C)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] exp_d [C][L];
  bit exp_v [C];
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int s = 0; s < C; s++) begin tx_valid[s] = 0; rx_en[s] = 0; sel[s] = 0; exp_v[s] = 0;
      for (int k = 0; k < L; k++) tx_vec[s][k] = 0; end
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      for (int d = 0; d < C; d++) begin
        checks++;
        if (rx_valid[d] != exp_v[d]) begin failures++; $display("cycle %0d dst %0d valid %0d", i, d, rx_valid[d]); end
        if (exp_v[d]) for (int k = 0; k < L; k++) begin
          checks++;
          if (rx_vec[d][k] !== exp_d[d][k]) begin failures++; if (failures < 10) $display("cycle %0d dst %0d lane %0d", i, d, k); end
        end
      end
      for (int s = 0; s < C; s++) begin
        tx_valid[s] = 1;
        for (int k = 0; k < L; k++) tx_vec[s][k] = {$urandom, $urandom};
      end
      for (int d = 0; d < C; d++) begin
        if (i < 100)      begin sel[d] = 2'(d - i); rx_en[d] = 1; end       // exchange rounds
        else if (i < 120) begin sel[d] = 2'd2;      rx_en[d] = 1; end       // broadcast
        else begin sel[d] = 2'($urandom); rx_en[d] = ($urandom % 4) != 0; tx_valid[d] = ($urandom % 4) != 0; end
      end
      for (int d = 0; d < C; d++) begin
        exp_v[d] = rx_en[d] && tx_valid[sel[d]];
        for (int k = 0; k < L; k++) exp_d[d][k] = tx_vec[sel[d]][k];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
