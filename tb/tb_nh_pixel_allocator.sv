// tb_nh_pixel_allocator: runs the pixel allocator over random sparse maps
// (several kernel sizes, channel counts, with and without pooling) held in an
// IDP model, and checks the broadcast beat stream against a list built in the
// testbench: for each output pixel (2x2 blocks when pooling), for each
// in-bounds window position, one beat per non-zero channel with kernel
// address (ch*K+ky)*K+kx, then one `last`. With pre_ready held high the
// cycle count must equal the documented cost: per output pixel 2 cycles plus
// words+3 per in-bounds and 1 per out-of-bounds window position.
module tb_nh_pixel_allocator;
  import nh_pkg::*;
  import nh_tb_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  nh_cfg_t cfg;
  logic [DIMW:0] rows_done, release_row;
  logic [DIMW-1:0] pt_row, pt_col;
  logic [17:0] pt_addr, rd_addr;
  logic rd_en, pre_ready, done;
  logic [DW-1:0] rd_data;
  nh_beat_t beat;
  logic [31:0] nz_beats, sm_words;
  int checks = 0, failures = 0;
  longint cyc = 0;

  nh_pixel_allocator dut (.*);
  nh_idp_model idp (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { bit last; int value; int kaddr; } exp_t;

  task automatic run(int w, h, c, k, bit pool, bit rdy_random);
    int img[];
    exp_t e[$];
    int pad, s, got, ncyc_exp, wpp;
    longint t0;
    img = new[w * h * c];
    foreach (img[i]) img[i] = rnd_act(65);
    idp.load(w, h, c, img);
    pad = (k - 1) / 2; s = pool ? 2 : 1;
    wpp = 0; ncyc_exp = 0;
    for (int oyb = 0; oyb < h; oyb += s)
      for (int oxb = 0; oxb < w; oxb += s)
        for (int sy = 0; sy < s; sy++)
          for (int sx = 0; sx < s; sx++) begin
            ncyc_exp += 2;
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int iy, ix;
                iy = oyb + sy + ky - pad; ix = oxb + sx + kx - pad;
                if (iy >= 0 && ix >= 0 && iy < h && ix < w) begin
                  int words;
                  words = (c + 15) / 16;
                  for (int ch = 0; ch < c; ch++)
                    if (img[(iy * w + ix) * c + ch] != 0) begin
                      e.push_back('{last: 0, value: img[(iy * w + ix) * c + ch], kaddr: (ch * k + ky) * k + kx});
                      words++;
                    end
                  ncyc_exp += words + 3;
                end else ncyc_exp += 1;
              end
            e.push_back('{last: 1, value: 0, kaddr: 0});
          end
    cfg = '{width: DIMW'(w), height: DIMW'(h), in_ch: CHW'(c), out_ch: 8'd16,
            ksize: 3'(k), pool: pool, relu: 0, shift: 0};
    rows_done = (DIMW+1)'(h);
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    t0 = cyc; got = 0;
    while (!done) begin
      pre_ready = rdy_random ? ($urandom % 3 != 0) : 1'b1;
      @(posedge clk); #1;
      if (beat.valid || beat.last) begin
        checks++;
        if (got >= e.size() || beat.last != e[got].last ||
            (!beat.last && (int'(beat.value) != e[got].value || int'(beat.kaddr) != e[got].kaddr))) begin
          failures++;
          if (failures < 10) $display("beat %0d: last %b v %0d a %0d", got, beat.last, beat.value, beat.kaddr);
        end
        got++;
      end
      @(negedge clk);
    end
    checks++; if (got != e.size()) begin failures++; $display("beats %0d exp %0d", got, e.size()); end
    if (!rdy_random) begin
      checks++;
      if (cyc - t0 != longint'(ncyc_exp)) begin failures++; $display("cycles %0d exp %0d", cyc - t0, ncyc_exp); end
    end
    $display("%0dx%0dx%0d K=%0d pool=%0d: %0d beats, %0d cycles", w, h, c, k, pool, got, cyc - t0);
  endtask

  initial begin
    cfg = '0; rows_done = '0; pre_ready = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    run(6, 4, 20, 3, 0, 0);
    run(6, 4, 20, 3, 1, 1);
    run(5, 5, 7, 5, 0, 1);
    run(4, 6, 33, 1, 1, 0);
    run(3, 3, 16, 7, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
