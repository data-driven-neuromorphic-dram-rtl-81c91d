// tb_nh_ccm: loads kernels and biases for a random number of output maps
// through the kernel-load port, runs the compute core over a random sparse
// map held in an IDP model, and compares the NUM_MAC sums presented at each
// output pixel with sums computed in the testbench (bias << shift plus all
// products of the K x K window). Maps beyond out_ch belong to disabled
// clusters and are not compared. Also checks the number of non-zero beats.
module tb_nh_ccm;
  import nh_pkg::*;
  import nh_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  nh_cfg_t cfg;
  logic k_valid, k_bias, kern_done, rd_en, pre_ready, res_valid, comp_done;
  logic [6:0] k_map;
  logic [KAW-1:0] k_addr;
  logic [DW-1:0] k_data, rd_data;
  logic [DIMW:0] rows_done, release_row;
  logic [DIMW-1:0] pt_row, pt_col;
  logic [17:0] pt_addr, rd_addr;
  acc_t results [NUM_MAC];
  logic [31:0] nz_beats, sm_words;
  int checks = 0, failures = 0;

  nh_ccm dut (.*);
  nh_idp_model idp (.*);
  always #5 clk = ~clk;
  int ndone = 0;
  always @(posedge clk) if (comp_done) ndone++;
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int w, h, c, k, no, shift, bit pool);
    int img[], kern[], bias[];
    int pad, s, npx, nzm;
    img = new[w * h * c]; kern = new[no * c * k * k]; bias = new[no];
    foreach (img[i]) img[i] = rnd_act(60);
    foreach (kern[i]) kern[i] = int'($urandom % 201) - 100;
    foreach (bias[i]) bias[i] = int'($urandom % 41) - 20;
    idp.load(w, h, c, img);
    cfg = '{width: DIMW'(w), height: DIMW'(h), in_ch: CHW'(c), out_ch: 8'(no),
            ksize: 3'(k), pool: pool, relu: 0, shift: 5'(shift)};
    rows_done = (DIMW+1)'(h);
    for (int o = 0; o < no; o++)
      for (int i = 0; i <= c * k * k; i++) begin
        @(negedge clk);
        k_valid = 1; k_map = 7'(o); k_bias = (i == 0); k_addr = KAW'(i - 1);
        k_data = 16'(i == 0 ? bias[o] : kern[o * c * k * k + i - 1]);
      end
    @(negedge clk) k_valid = 0; kern_done = 1;
    @(negedge clk) kern_done = 0;
    pad = (k - 1) / 2; s = pool ? 2 : 1; npx = 0; nzm = 0;
    for (int oyb = 0; oyb < h; oyb += s)
      for (int oxb = 0; oxb < w; oxb += s)
        for (int sy = 0; sy < s; sy++)
          for (int sx = 0; sx < s; sx++) begin
            int y, x;
            y = oyb + sy; x = oxb + sx;
            do begin
              pre_ready = ($urandom % 2);
              @(posedge clk); #1;
            end while (!res_valid);
            for (int o = 0; o < no; o++) begin
              int acc;
              acc = bias[o] <<< shift;
              for (int ky = 0; ky < k; ky++)
                for (int kx = 0; kx < k; kx++) begin
                  int iy, ix;
                  iy = y + ky - pad; ix = x + kx - pad;
                  if (iy >= 0 && ix >= 0 && iy < h && ix < w)
                    for (int ch = 0; ch < c; ch++) begin
                      acc += img[(iy * w + ix) * c + ch] * kern[((o * c + ch) * k + ky) * k + kx];
                      if (o == 0 && img[(iy * w + ix) * c + ch] != 0) nzm++;
                    end
                end
              checks++;
              if (results[o] != acc) begin
                failures++;
                if (failures < 10) $display("px (%0d,%0d) map %0d: %0d exp %0d", y, x, o, results[o], acc);
              end
            end
            npx++;
            @(negedge clk);
          end
    checks++; if (ndone != 1) begin failures++; $display("done pulses %0d", ndone); end
    ndone = 0;
    checks++; if (nz_beats != 32'(nzm)) begin failures++; $display("nz %0d exp %0d", nz_beats, nzm); end
    $display("%0dx%0dx%0d K=%0d maps=%0d: %0d pixels", w, h, c, k, no, npx);
  endtask

  initial begin
    cfg = '0; rows_done = '0; pre_ready = 1; k_valid = 0; k_bias = 0; k_map = '0;
    k_addr = '0; k_data = '0; kern_done = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(4, 4, 20, 3, 37, 3, 0);
    run(4, 4, 9, 1, 128, 0, 1);
    run(3, 5, 3, 5, 16, 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
