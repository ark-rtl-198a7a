// mont_redc: pipelined Montgomery reduction, y = T * 2^-W mod q.
//
// Step 1: m = (T mod 2^W) * qinv mod 2^W, where qinv = -q^-1 mod 2^W.
// Step 2: t = (T + m*q) / 2^W, then one conditional subtraction of q.
// The input must satisfy T < q * 2^W and q must be odd and below 2^(W-1).
// LAT = 1 puts both steps in one registered stage, LAT = 2 registers m in
// between. q and qinv travel down the pipeline with the data, so the
// modulus may change every cycle. The pipeline advances when en is high.
// The paper states that the NTT and BConv units reduce with Montgomery's
// method; the staging is this design's.
module mont_redc #(
  parameter int unsigned W   = 64,
  parameter int unsigned LAT = 2
) (
  input  logic             clk,
  input  logic             en,
  input  logic [2*W-1:0]   t_in,
  input  logic [W-1:0]     q,
  input  logic [W-1:0]     qinv,
  output logic [W-1:0]     y
);
  logic [2*W-1:0] t_s;
  logic [W-1:0]   m_s, q_s;
  logic [W-1:0]   m_c;
  logic [2*W:0]   sum;
  logic [W:0]     tt;

  if (LAT >= 2) begin : g_two
    always_ff @(posedge clk) begin
      if (en) begin
        t_s <= t_in;
        m_s <= m_c;
        q_s <= q;
      end
    end
    always_comb m_c = W'(t_in[W-1:0] * qinv);
  end else begin : g_one
    always_comb begin
      t_s = t_in;
      m_c = W'(t_in[W-1:0] * qinv);
      m_s = m_c;
      q_s = q;
    end
  end

  always_comb begin
    sum = {1'b0, t_s} + (2*W+1)'(m_s) * (2*W+1)'(q_s);
    tt  = sum[2*W:W];
    if (tt >= {1'b0, q_s}) tt = tt - {1'b0, q_s};
  end

  always_ff @(posedge clk) if (en) y <= tt[W-1:0];
endmodule
