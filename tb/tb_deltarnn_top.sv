// tb_deltarnn_top: end-to-end test of the DeltaRNN accelerator on a reduced
// layer (NX inputs, NH hidden units, NPE multipliers, overridable). It loads
// the weight BRAM and the biases, then runs a sequence of time steps whose
// inputs change slowly (so that many deltas fall below theta) with some large
// jumps, and compares every h(t) with the reference model, the number of
// deltas sent, the BRAM words fetched (NCH per delta) and the cycle count.
module tb_deltarnn_top #(
  parameter int unsigned NX = 12,
  parameter int unsigned NH = 16,
  parameter int unsigned NPE = 8,
  parameter int unsigned NXU = 10,   // inputs used
  parameter int unsigned STEPS = 12
);
  import drnn_pkg::*;
  import drnn_tb_pkg::*;
  localparam int unsigned NCH = 3 * NH / NPE;
  localparam int unsigned WAW = $clog2((NX + NH) * NCH);
  localparam int SEED = 5;
  localparam int THETA = 8;
  logic clk = 0, rst_n = 0, clear = 0;
  q_t theta;
  logic [$clog2(X+H)-1:0] n_x;
  logic w_wr_en, m_wr_en, x_valid, x_ready, h_valid, h_ready, step_done;
  logic [WAW-1:0] w_wr_addr;
  logic [NPE*DW-1:0] w_wr_data;
  gate_e m_wr_gate;
  logic [$clog2(NH)-1:0] m_wr_idx;
  m_t m_wr_data;
  q_t x_data, h_out;
  logic [31:0] n_sent, n_seen, n_chunks, n_steps;
  int checks = 0, failures = 0, skipped = 0;
  longint cyc = 0;

  deltarnn_top #(.NX(NX), .NH(NH), .NPE(NPE)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m[], xr[], hr[], h[], x[];
  initial begin
    int total_sent;
    theta = q_t'(THETA); n_x = ($bits(n_x))'(NXU);
    {w_wr_en, m_wr_en, x_valid, h_ready} = '0;
    w_wr_addr = '0; w_wr_data = '0; m_wr_gate = G_R; m_wr_idx = '0; m_wr_data = '0; x_data = '0;
    m = new[4 * NH]; xr = new[NXU]; hr = new[NH]; h = new[NH]; x = new[NXU];
    repeat (3) @(negedge clk); rst_n = 1;
    // weights: word (col*NCH + k), lane l = W[k*NPE + l][col]
    for (int col = 0; col < NX + NH; col++)
      for (int k = 0; k < NCH; k++) begin
        @(negedge clk);
        w_wr_en = 1; w_wr_addr = WAW'(col * NCH + k);
        for (int l = 0; l < NPE; l++) w_wr_data[l*DW +: DW] = 16'(wgt(k * NPE + l, col, SEED));
      end
    @(negedge clk) w_wr_en = 0; clear = 1;
    @(negedge clk) clear = 0;
    foreach (m[i]) begin
      m[i] = (i < 3 * NH) ? (int'($urandom % 4001) - 2000) * 16 : 0;
      @(negedge clk);
      m_wr_en = 1; m_wr_gate = gate_e'(i / NH); m_wr_idx = ($bits(m_wr_idx))'(i % NH); m_wr_data = m_t'(m[i]);
    end
    @(negedge clk) m_wr_en = 0;
    foreach (xr[i]) begin xr[i] = 0; x[i] = 0; end
    foreach (h[i]) begin h[i] = 0; hr[i] = 0; end
    total_sent = 0;
    for (int t = 0; t < STEPS; t++) begin
      longint t0;
      int sent, got;
      // slowly varying input with an occasional jump
      foreach (x[i]) x[i] = (t % 5 == 0) ? int'($urandom % 401) - 200 : x[i] + int'($urandom % 7) - 3;
      sent = step(NXU, NX, NH, THETA, SEED, x, m, xr, hr, h);
      total_sent += sent;
      skipped += NXU + NH - sent;
      t0 = cyc; got = 0;
      fork
        for (int i = 0; i < NXU; i++) begin
          @(negedge clk); x_valid = 1; x_data = q_t'(x[i]);
          do @(posedge clk); while (!x_ready);
          #1 x_valid = 0;
        end
        while (got < NH) begin
          @(negedge clk); h_ready = ($urandom % 3) != 0;
          @(posedge clk);
          if (h_valid && h_ready) begin
            checks++;
            if (int'(h_out) != h[got]) begin
              failures++;
              if (failures < 10) $display("t=%0d h[%0d]=%0d exp %0d", t, got, h_out, h[got]);
            end
            got++;
          end
        end
      join
      #1 h_ready = 0;
      checks++; if (n_sent != 32'(total_sent)) begin failures++; $display("sent %0d exp %0d", n_sent, total_sent); end
      checks++; if (n_chunks != 32'(total_sent * NCH)) failures++;
      // step cost: examine NXU+NH elements, NCH cycles per delta, 4 per unit
      // plus output backpressure
      checks++;
      if (cyc - t0 > 2 * (NXU + NH + sent * NCH + 4 * NH) + 20) begin
        failures++; $display("step %0d too slow: %0d", t, cyc - t0);
      end
    end
    repeat (4) @(posedge clk);
    checks++; if (n_steps != 32'(STEPS)) failures++;
    checks++; if (skipped == 0) begin failures++; $display("no delta was ever skipped"); end
    $display("deltas sent %0d, skipped %0d", total_sent, skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
