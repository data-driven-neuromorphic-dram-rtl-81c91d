// tb_nullhop_top: end-to-end test of the NullHop CNN accelerator. Several
// layers with different kernel sizes, channel counts, pooling and ReLU are
// run on random sparse maps; the compressed output stream is compared word
// for word with the reference model, the number of non-zero beats with the
// number of non-zero MACs of the model, and the cycle count is bounded. The
// input and output buses see random gaps and backpressure. A small pixel
// memory (WORDS) forces the input-buffer-full stall.
module tb_nullhop_top;
  import nh_pkg::*;
  import nh_tb_pkg::*;
  localparam int unsigned WORDS = 256;
  logic clk = 0, rst_n = 0, start = 0;
  nh_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready, done;
  logic [15:0] in_data, out_data;
  logic [31:0] nz_beats, sm_words, pix_out, words_out;
  int checks = 0, failures = 0;
  int stall_in = 0, stall_out = 0, pooled = 0, relu_layers = 0;
  longint cyc = 0;

  nullhop_top #(.WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] inq[$], expq[$];
  always @(posedge clk) begin
    if (in_valid && !in_ready) stall_in++;
    if (out_valid && !out_ready) stall_out++;
  end

  task automatic run_layer(int w, h, c, k, no, shift, bit pool, bit relu, int zero_pct);
    int img[], kern[], bias[], outm[];
    int nzm, ow, oh, nexp, got, nin;
    longint t0;
    img = new[w * h * c]; kern = new[no * c * k * k]; bias = new[no];
    foreach (img[i]) img[i] = rnd_act(zero_pct);
    foreach (kern[i]) kern[i] = int'($urandom % 41) - 20;
    foreach (bias[i]) bias[i] = int'($urandom % 21) - 10;
    conv(w, h, c, k, no, shift, pool, relu, img, kern, bias, outm, nzm);
    inq.delete(); expq.delete();
    for (int o = 0; o < no; o++) begin
      inq.push_back(16'(bias[o]));
      for (int i = 0; i < c * k * k; i++) inq.push_back(16'(kern[o * c * k * k + i]));
    end
    compress(w, h, c, img, inq);
    ow = pool ? w / 2 : w; oh = pool ? h / 2 : h;
    compress(ow, oh, no, outm, expq);
    nexp = expq.size();
    nin  = inq.size();
    cfg = '{width: DIMW'(w), height: DIMW'(h), in_ch: CHW'(c), out_ch: 8'(no),
            ksize: 3'(k), pool: pool, relu: relu, shift: 5'(shift)};
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    t0 = cyc;
    got = 0;
    fork
      begin
        while (inq.size() > 0) begin
          in_valid = ($urandom % 8) != 0;
          in_data  = inq[0];
          @(posedge clk);
          if (in_valid && in_ready) void'(inq.pop_front());
          #1;
        end
        in_valid = 0;
      end
      begin
        while (!done) begin
          out_ready = ($urandom % 4) != 0;
          @(posedge clk);
          if (out_valid && out_ready) begin
            checks++;
            if (got >= nexp || out_data != expq[got]) begin
              failures++;
              if (failures < 10) $display("word %0d: got %h exp %h", got, out_data, got < nexp ? expq[got] : 16'hxxxx);
            end
            got++;
          end
          #1;
        end
        out_ready = 0;
      end
    join
    checks++; if (got != nexp) begin failures++; $display("words %0d exp %0d", got, nexp); end
    checks++; if (nz_beats != 32'(nzm)) begin failures++; $display("nz_beats %0d exp %0d", nz_beats, nzm); end
    checks++; if (pix_out != 32'(ow * oh)) begin failures++; $display("pix_out %0d", pix_out); end
    // zero MACs skipped: fewer beats than dense MACs when the map is sparse
    checks++; if (zero_pct >= 50 && nz_beats * 2 > 32'(w * h * c * k * k)) failures++;
    // cycle bound: per window pixel words+3, per output pixel K*K+1, bus gaps x2
    checks++;
    if (cyc - t0 > 2 * (nin + longint'(nz_beats) + longint'(sm_words) + 3 * w * h * k * k + 4 * nexp) + 2000) begin
      failures++; $display("too slow: %0d cycles", cyc - t0);
    end
    if (pool) pooled++;
    if (relu) relu_layers++;
    $display("layer %0dx%0dx%0d K=%0d out=%0d pool=%0d: %0d cycles, %0d nz beats of %0d dense MACs",
             w, h, c, k, no, pool, cyc - t0, nz_beats, w * h * c * k * k);
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer(8, 6, 20, 3, 20, 4, 1, 1, 70);
    run_layer(6, 12, 3, 1, 128, 2, 0, 0, 30);
    run_layer(10, 10, 16, 5, 17, 5, 0, 1, 80);
    run_layer(4, 4, 40, 3, 33, 6, 1, 0, 60);
    checks++; if (stall_in == 0) begin failures++; $display("input stall never happened"); end
    checks++; if (stall_out == 0) failures++;
    $display("input stalls %0d, output stalls %0d, pooled layers %0d", stall_in, stall_out, pooled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
