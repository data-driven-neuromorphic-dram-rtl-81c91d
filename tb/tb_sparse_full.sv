// tb_sparse_full: one complete operation of the chip top at its default sizes (512 KB
// pixel memory, 128 MACs, 768-unit RNN layer with 768-input BRAM and 128
// multipliers): a CNN layer with all 128 output maps and pooling and
// another with a tall image, and three delta-GRU steps with 40 inputs.
// The CNN side runs a sequence of layers on random sparse maps and compares
// the compressed output stream word for word with the reference model; the
// RNN side runs a sequence of delta-GRU steps and compares every h(t). Both
// run at the same time. Each mechanism of the design is counted and must
// have happened: zero-activation skipping, 2x2 pooling, ReLU, input-buffer
// stall, output backpressure, several controller clusters, deltas sent and
// deltas skipped below threshold, multiplier reuse by the activation pipeline.
module tb_sparse_full;
  import nh_pkg::*;
  import nh_tb_pkg::*;
  import drnn_pkg::*;
  import drnn_tb_pkg::*;
  localparam int unsigned CNN_WORDS = nh_pkg::PIX_WORDS;
  localparam int unsigned RNX = X, RNH = H, RNPE = NUM_PE;
  localparam int unsigned RNXU = 40, RSTEPS = 3;
  localparam int unsigned NCH = 3 * RNH / RNPE;
  localparam int unsigned WAW = $clog2((RNX + RNH) * NCH);
  localparam int SEED = 3, THETA = 6;
  logic clk = 0, rst_n = 0;
  // CNN
  logic cnn_start = 0, cnn_in_valid, cnn_in_ready, cnn_out_valid, cnn_out_ready, cnn_done;
  nh_cfg_t cnn_cfg;
  logic [15:0] cnn_in_data, cnn_out_data;
  logic [31:0] cnn_nz_beats, cnn_sm_words, cnn_pix_out, cnn_words_out;
  // RNN
  logic rnn_clear = 0, rnn_w_wr_en, rnn_m_wr_en, rnn_x_valid, rnn_x_ready, rnn_h_valid, rnn_h_ready, rnn_step_done;
  q_t rnn_theta, rnn_x_data, rnn_h_out;
  logic [$clog2(X+H)-1:0] rnn_n_x;
  logic [WAW-1:0] rnn_w_wr_addr;
  logic [RNPE*DW-1:0] rnn_w_wr_data;
  gate_e rnn_m_wr_gate;
  logic [$clog2(RNH)-1:0] rnn_m_wr_idx;
  m_t rnn_m_wr_data;
  logic [31:0] rnn_n_sent, rnn_n_seen, rnn_n_chunks, rnn_n_steps;

  int checks = 0, failures = 0;
  int ev_skip = 0, ev_pool = 0, ev_relu = 0, ev_install = 0, ev_outstall = 0, ev_clusters = 0;
  int ev_sent = 0, ev_dskip = 0, ev_reuse = 0;

  sparse_accel_top dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) begin
    if (cnn_in_valid && !cnn_in_ready) ev_install++;
    if (cnn_out_valid && !cnn_out_ready) ev_outstall++;
    if (dut.u_rnn.mul_req) ev_reuse++;
  end

  task automatic cnn_layer(int w, h, c, k, no, shift, bit pool, bit relu, int zero_pct);
    int img[], kern[], bias[], outm[];
    int nzm, ow, oh, got;
    logic [15:0] inq[$], expq[$];
    img = new[w * h * c]; kern = new[no * c * k * k]; bias = new[no];
    foreach (img[i]) img[i] = rnd_act(zero_pct);
    foreach (kern[i]) kern[i] = int'($urandom % 41) - 20;
    foreach (bias[i]) bias[i] = int'($urandom % 21) - 10;
    conv(w, h, c, k, no, shift, pool, relu, img, kern, bias, outm, nzm);
    for (int o = 0; o < no; o++) begin
      inq.push_back(16'(bias[o]));
      for (int i = 0; i < c * k * k; i++) inq.push_back(16'(kern[o * c * k * k + i]));
    end
    compress(w, h, c, img, inq);
    ow = pool ? w / 2 : w; oh = pool ? h / 2 : h;
    compress(ow, oh, no, outm, expq);
    cnn_cfg = '{width: DIMW'(w), height: DIMW'(h), in_ch: CHW'(c), out_ch: 8'(no),
                ksize: 3'(k), pool: pool, relu: relu, shift: 5'(shift)};
    @(negedge clk) cnn_start = 1; @(negedge clk) cnn_start = 0;
    got = 0;
    fork
      begin
        while (inq.size() > 0) begin
          cnn_in_valid = ($urandom % 8) != 0;
          cnn_in_data = inq[0];
          @(posedge clk);
          if (cnn_in_valid && cnn_in_ready) void'(inq.pop_front());
          #1;
        end
        cnn_in_valid = 0;
      end
      begin
        while (!cnn_done) begin
          cnn_out_ready = ($urandom % 4) != 0;
          @(posedge clk);
          if (cnn_out_valid && cnn_out_ready) begin
            checks++;
            if (got >= expq.size() || cnn_out_data != expq[got]) begin
              failures++;
              if (failures < 10) $display("cnn word %0d: %h", got, cnn_out_data);
            end
            got++;
          end
          #1;
        end
        cnn_out_ready = 0;
      end
    join
    checks++; if (got != expq.size()) failures++;
    checks++; if (cnn_nz_beats != 32'(nzm)) failures++;
    if (cnn_nz_beats < 32'(w * h * c * k * k)) ev_skip++;
    if (pool) ev_pool++;
    if (relu) ev_relu++;
    if (no > 16) ev_clusters++;
    $display("cnn layer %0dx%0dx%0d K=%0d maps=%0d pool=%0d: %0d words, %0d of %0d MACs done",
             w, h, c, k, no, pool, got, cnn_nz_beats, w * h * c * k * k);
  endtask

  task automatic rnn_run();
    int m[], xr[], hr[], hh[], x[];
    m = new[4 * RNH]; xr = new[RNXU]; hr = new[RNH]; hh = new[RNH]; x = new[RNXU];
    rnn_theta = q_t'(THETA); rnn_n_x = ($bits(rnn_n_x))'(RNXU);
    for (int col = 0; col < RNX + RNH; col++)
      for (int kk = 0; kk < NCH; kk++) begin
        @(negedge clk);
        rnn_w_wr_en = 1; rnn_w_wr_addr = WAW'(col * NCH + kk);
        for (int l = 0; l < RNPE; l++) rnn_w_wr_data[l*DW +: DW] = 16'(wgt(kk * RNPE + l, col, SEED));
      end
    @(negedge clk) rnn_w_wr_en = 0; rnn_clear = 1;
    @(negedge clk) rnn_clear = 0;
    foreach (m[i]) begin
      m[i] = (i < 3 * RNH) ? (int'($urandom % 4001) - 2000) * 16 : 0;
      @(negedge clk);
      rnn_m_wr_en = 1; rnn_m_wr_gate = gate_e'(i / RNH);
      rnn_m_wr_idx = ($bits(rnn_m_wr_idx))'(i % RNH); rnn_m_wr_data = m_t'(m[i]);
    end
    @(negedge clk) rnn_m_wr_en = 0;
    foreach (x[i]) begin x[i] = 0; xr[i] = 0; end
    foreach (hh[i]) begin hh[i] = 0; hr[i] = 0; end
    for (int t = 0; t < RSTEPS; t++) begin
      int sent, got;
      foreach (x[i]) x[i] = (t % 4 == 0) ? int'($urandom % 401) - 200 : x[i] + int'($urandom % 7) - 3;
      sent = step(RNXU, RNX, RNH, THETA, SEED, x, m, xr, hr, hh);
      ev_sent += sent; ev_dskip += RNXU + RNH - sent;
      got = 0;
      fork
        for (int i = 0; i < RNXU; i++) begin
          @(negedge clk); rnn_x_valid = 1; rnn_x_data = q_t'(x[i]);
          do @(posedge clk); while (!rnn_x_ready);
          #1 rnn_x_valid = 0;
        end
        while (got < RNH) begin
          @(negedge clk); rnn_h_ready = ($urandom % 3) != 0;
          @(posedge clk);
          if (rnn_h_valid && rnn_h_ready) begin
            checks++;
            if (int'(rnn_h_out) != hh[got]) begin
              failures++;
              if (failures < 10) $display("rnn t=%0d h[%0d]=%0d exp %0d", t, got, rnn_h_out, hh[got]);
            end
            got++;
          end
        end
      join
      #1 rnn_h_ready = 0;
      checks++; if (rnn_n_chunks != rnn_n_sent * NCH) failures++;
      $display("rnn step %0d: %0d of %0d deltas sent", t, sent, RNXU + RNH);
    end
    checks++; if (rnn_n_sent != 32'(ev_sent)) failures++;
  endtask

  task automatic need(int n, string what);
    checks++;
    if (n == 0) begin failures++; $display("never happened: %s", what); end
  endtask

  initial begin
    cnn_in_valid = 0; cnn_in_data = '0; cnn_out_ready = 0; cnn_cfg = '0;
    {rnn_w_wr_en, rnn_m_wr_en, rnn_x_valid, rnn_h_ready} = '0;
    rnn_theta = '0; rnn_n_x = '0; rnn_w_wr_addr = '0; rnn_w_wr_data = '0; rnn_m_wr_gate = G_R;
    rnn_m_wr_idx = '0; rnn_m_wr_data = '0; rnn_x_data = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    fork
      begin
        cnn_layer(16, 16, 32, 3, 128, 6, 1, 1, 75);
        cnn_layer(12, 40, 8, 5, 24, 5, 0, 0, 70);
      end
      rnn_run();
    join
    need(ev_skip, "zero-activation MACs skipped");
    need(ev_pool, "2x2 max pooling");
    need(ev_relu, "ReLU");
    need(ev_install, "input buffer full stall");
    need(ev_outstall, "output bus backpressure");
    need(ev_clusters, "more than one controller cluster");
    need(ev_sent, "delta sent");
    need(ev_dskip, "delta below threshold skipped");
    need(ev_reuse, "multiplier reuse");
    $display("events: skip %0d pool %0d relu %0d in-stall %0d out-stall %0d clusters %0d sent %0d dskip %0d reuse %0d",
             ev_skip, ev_pool, ev_relu, ev_install, ev_outstall, ev_clusters, ev_sent, ev_dskip, ev_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
