// tb_drnn_mxv_unit: loads the four gate memories with random values, drives
// random scheduled beats (delta, gate, offset, NPE weights) and compares all
// of M with a testbench copy updated by M[g][off+l] += delta * w[l]; then
// borrows multiplier 0 (mul_req) and checks the product one cycle later.
module tb_drnn_mxv_unit;
  import drnn_pkg::*;
  localparam int unsigned NH = 16, NPE = 4;
  logic clk = 0, rst_n = 0;
  logic s_valid, m_wr_en, mul_req;
  q_t s_delta, mul_a, mul_b;
  gate_e s_gate, m_wr_gate;
  logic [3:0] s_off, m_wr_idx, m_rd_idx;
  logic [NPE*DW-1:0] w_data;
  m_t m_wr_data, m_r, m_u, m_cx, m_ch, mul_p;
  int checks = 0, failures = 0;
  int mm [4][NH];

  drnn_mxv_unit #(.NH(NH), .NPE(NPE)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    for (int n = 0; n < NH; n++) begin
      m_rd_idx = 4'(n); #1;
      checks++;
      if (m_r != mm[0][n] || m_u != mm[1][n] || m_cx != mm[2][n] || m_ch != mm[3][n]) begin
        failures++;
        if (failures < 3) $display("n=%0d: %0d %0d %0d %0d exp %0d %0d %0d %0d", n, m_r, m_u, m_cx, m_ch,
                                    mm[0][n], mm[1][n], mm[2][n], mm[3][n]);
      end
    end
    @(negedge clk);
  endtask

  initial begin
    {s_valid, m_wr_en, mul_req} = '0; s_delta = '0; mul_a = '0; mul_b = '0;
    s_gate = G_R; m_wr_gate = G_R; s_off = '0; m_wr_idx = '0; m_rd_idx = '0; w_data = '0; m_wr_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < 4; g++)
      for (int n = 0; n < NH; n++) begin
        mm[g][n] = int'($urandom % 200001) - 100000;
        m_wr_en = 1; m_wr_gate = gate_e'(g); m_wr_idx = 4'(n); m_wr_data = m_t'(mm[g][n]);
        @(negedge clk);
      end
    m_wr_en = 0;
    compare_all();
    for (int i = 0; i < 300; i++) begin
      int g, off, d;
      g = $urandom % 4; off = ($urandom % (NH / NPE)) * NPE; d = int'($urandom % 2001) - 1000;
      s_valid = 1; s_gate = gate_e'(g); s_off = 4'(off); s_delta = q_t'(d);
      for (int l = 0; l < NPE; l++) begin
        int w;
        w = int'($urandom % 2001) - 1000;
        w_data[l*DW +: DW] = 16'(w);
        mm[g][off + l] += d * w;
      end
      @(negedge clk);
      s_valid = 0;
      if (i % 50 == 0) compare_all();
    end
    compare_all();
    for (int i = 0; i < 50; i++) begin
      int a, b;
      a = int'($urandom % 65536) - 32768; b = int'($urandom % 65536) - 32768;
      mul_req = 1; mul_a = q_t'(a); mul_b = q_t'(b);
      @(negedge clk);
      mul_req = 0;
      checks++; if (mul_p != m_t'(a * b)) failures++;
    end
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
