// tb_drnn_act_pipeline: the testbench plays the MxV unit (M memories and the
// lent multiplier) and checks, over several steps with random M, that every
// h(t) sent on the output stream equals the reference GRU update with hard
// sigmoid and hard tanh, that h(t) becomes the h(t-1) read by the encoder,
// that each unit takes 4 cycles when the output is never stalled, and that
// done pulses once per step.
module tb_drnn_act_pipeline;
  import drnn_pkg::*;
  import drnn_tb_pkg::*;
  localparam int unsigned NH = 16;
  logic clk = 0, rst_n = 0, clear = 0, start = 0, done;
  logic [31:0] n_steps;
  logic [3:0] m_rd_idx, h_idx;
  m_t m_r, m_u, m_cx, m_ch, mul_p;
  logic mul_req, out_valid, out_ready;
  q_t mul_a, mul_b, h_data, out_data;
  int checks = 0, failures = 0;
  int mm [4][NH];
  longint cyc = 0;

  drnn_act_pipeline #(.NH(NH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  assign m_r = mm[0][m_rd_idx];
  assign m_u = mm[1][m_rd_idx];
  assign m_cx = mm[2][m_rd_idx];
  assign m_ch = mm[3][m_rd_idx];
  always @(posedge clk) if (mul_req) mul_p <= m_t'(mul_a) * m_t'(mul_b);

  initial begin
    int h[NH];
    foreach (h[i]) h[i] = 0;
    out_ready = 0; h_idx = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    for (int t = 0; t < 8; t++) begin
      int got;
      longint t0;
      bit stall;
      stall = (t % 2 == 1);
      for (int g = 0; g < 4; g++) for (int n = 0; n < NH; n++) mm[g][n] = int'($urandom % 800001) - 400000;
      for (int n = 0; n < NH; n++) begin
        int r, u, c;
        r = hsig(mm[0][n]); u = hsig(mm[1][n]);
        c = htanh(sat_q(mm[2][n]) + ((r * sat_q(mm[3][n])) >>> 8));
        h[n] = htanh(c + ((u * (h[n] - c)) >>> 8));
      end
      @(negedge clk) start = 1; @(negedge clk) start = 0;
      t0 = cyc; got = 0;
      while (got < NH) begin
        out_ready = stall ? ($urandom % 2) : 1'b1;
        @(posedge clk);
        if (out_valid && out_ready) begin
          checks++;
          if (int'(out_data) != h[got]) begin
            failures++;
            if (failures < 10) $display("t=%0d n=%0d: %0d exp %0d", t, got, out_data, h[got]);
          end
          got++;
        end
        #1;
      end
      @(negedge clk);
      if (!stall) begin checks++; if (cyc - t0 != 4 * NH) begin failures++; $display("cycles %0d", cyc - t0); end end
      for (int n = 0; n < NH; n++) begin
        h_idx = 4'(n); #1;
        checks++; if (int'(h_data) != h[n]) failures++;
      end
    end
    checks++; if (n_steps != 32'd8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
