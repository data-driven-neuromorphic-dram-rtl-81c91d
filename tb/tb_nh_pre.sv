// tb_nh_pre: feeds the pooling-ReLU-encoding unit with random 32-bit sums
// (many of them rounding to zero or saturating) for layers with and without
// pooling and ReLU, and different output map counts, and compares the
// compressed output word stream with one built in the testbench: scale by
// >>> shift with 16-bit saturation, 2x2 maximum over each group of four
// consecutive pixels, ReLU, then SM word + non-zero values per 16 maps.
// The output bus sees random backpressure; done and the pixel count are
// checked, as is that in_ready is low while a pixel is being sent.
module tb_nh_pre;
  import nh_pkg::*;
  import nh_tb_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  nh_cfg_t cfg;
  acc_t vec [NUM_MAC];
  logic vec_valid, in_ready, out_valid, out_ready, done;
  logic [DW-1:0] out_data;
  logic [31:0] pix_out, words_out;
  int checks = 0, failures = 0;

  nh_pre dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int w, h, no, shift, bit pool, bit relu);
    int full[], outm[];
    logic [15:0] expq[$];
    int ow, oh, got, np, sawdone;
    full = new[w * h * no];
    ow = pool ? w / 2 : w; oh = pool ? h / 2 : h;
    outm = new[ow * oh * no];
    foreach (full[i]) begin
      int r;
      r = $urandom % 4;
      full[i] = (r == 0) ? 0 : (r == 1) ? int'($urandom) : int'($urandom % 20001) - 10000;
    end
    // reference: pixels arrive in 2x2 block order when pooling
    np = 0;
    for (int b = 0; b < ow * oh; b++)
      for (int o = 0; o < no; o++) begin
        int m;
        m = -32769;
        for (int d = 0; d < (pool ? 4 : 1); d++) begin
          int v;
          v = sat16(longint'(full[((pool ? 4 : 1) * b + d) * no + o]) >>> shift);
          if (v > m) m = v;
        end
        if (relu && m < 0) m = 0;
        outm[b * no + o] = m;
      end
    compress(ow, oh, no, outm, expq);
    cfg = '{width: DIMW'(w), height: DIMW'(h), in_ch: CHW'(1), out_ch: 8'(no),
            ksize: 3'd1, pool: pool, relu: relu, shift: 5'(shift)};
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    got = 0; sawdone = 0;
    fork
      for (int p = 0; p < w * h; p++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        for (int o = 0; o < NUM_MAC; o++) vec[o] = (o < no) ? acc_t'(full[p * no + o]) : acc_t'($urandom);
        vec_valid = 1;
        @(negedge clk) vec_valid = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
      while (got < expq.size() || !sawdone) begin
        out_ready = ($urandom % 3) != 0;
        @(posedge clk);
        if (done) sawdone = 1;
        if (out_valid && out_ready) begin
          checks++;
          if (got >= expq.size() || out_data != expq[got]) begin
            failures++;
            if (failures < 10) $display("word %0d: %h exp %h", got, out_data, got < expq.size() ? expq[got] : 16'h0);
          end
          got++;
          checks++; if (in_ready) failures++;
        end
        #1;
      end
    join
    checks++; if (pix_out != 32'(ow * oh) || words_out != 32'(expq.size())) failures++;
    $display("%0dx%0d maps=%0d pool=%0d relu=%0d: %0d words", w, h, no, pool, relu, got);
  endtask

  initial begin
    cfg = '0; vec_valid = 0; out_ready = 0;
    foreach (vec[i]) vec[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(4, 4, 20, 4, 1, 1);
    run(3, 2, 128, 0, 0, 0);
    run(2, 6, 7, 8, 1, 0);
    run(5, 1, 33, 2, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
