// drnn_mxv_unit: MxV Unit of the DeltaRNN accelerator (Fig. 7), an array of
// NPE multipliers. Each scheduled beat multiplies one delta by NPE weights of
// its column (one BRAM word) and adds the Q16.16 products to NPE consecutive
// entries of one gate memory of M: M(t) = M(t-1) + W * delta, so the
// pre-activations are kept from step to step and only columns with a
// significant change cost work. The four gate memories are loaded with the
// biases at the start of a sequence (m_wr_*). The activation pipeline reads
// M through m_rd_idx (combinational) and, while no beat is scheduled, borrows
// multiplier 0 (mul_req/mul_a/mul_b; product on mul_p one cycle later): the
// "multiplier reuse" arrow of the paper's block diagram. Accumulation takes
// effect one cycle after the beat. Wrap-around on overflow is not guarded.
module drnn_mxv_unit
  import drnn_pkg::*;
#(
  parameter int unsigned NH  = H,
  parameter int unsigned NPE = NUM_PE,
  localparam int unsigned OW = $clog2(NH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  input  q_t                s_delta,
  input  gate_e             s_gate,
  input  logic [OW-1:0]     s_off,
  input  logic [NPE*DW-1:0] w_data,
  // bias / initial value load
  input  logic              m_wr_en,
  input  gate_e             m_wr_gate,
  input  logic [OW-1:0]     m_wr_idx,
  input  m_t                m_wr_data,
  // activation pipeline
  input  logic [OW-1:0]     m_rd_idx,
  output m_t                m_r, m_u, m_cx, m_ch,
  input  logic              mul_req,
  input  q_t                mul_a,
  input  q_t                mul_b,
  output m_t                mul_p
);
  m_t mem [4][NH];
  m_t prod [NPE];

  always_comb begin
    for (int l = 0; l < NPE; l++) begin
      q_t a, b;
      a = s_delta;
      b = q_t'(w_data[l*DW +: DW]);
      if (l == 0 && mul_req) begin a = mul_a; b = mul_b; end
      prod[l] = m_t'(a) * m_t'(b);
    end
  end

  always_ff @(posedge clk) begin
    if (m_wr_en) mem[m_wr_gate][m_wr_idx] <= m_wr_data;
    else if (s_valid)
      for (int l = 0; l < NPE; l++)
        mem[s_gate][s_off + OW'(l)] <= mem[s_gate][s_off + OW'(l)] + prod[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mul_p <= '0;
    else if (mul_req) mul_p <= prod[0];
  end

  assign m_r  = mem[G_R][m_rd_idx];
  assign m_u  = mem[G_U][m_rd_idx];
  assign m_cx = mem[G_CX][m_rd_idx];
  assign m_ch = mem[G_CH][m_rd_idx];

  // the multiplier is lent out only while the array is idle
  assert property (@(posedge clk) disable iff (!rst_n) !(mul_req && s_valid));
endmodule
