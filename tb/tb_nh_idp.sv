// tb_nh_idp: streams a kernel preamble and a compressed random map through
// the whole Input Data Processor (tracker, manager, pixel memory) with a
// small ring (WORDS=256) and random bus gaps, while the testbench plays the
// compute core: as rows complete it reads every pixel of the row back through
// the pointer table and the pixel memory and compares the words, then
// releases the row. Kernel words must come out of the kernel port in order.
module tb_nh_idp;
  import nh_pkg::*;
  import nh_tb_pkg::*;
  localparam int unsigned WORDS = 256;
  localparam int W = 5, HH = 11, C = 24, K = 3, NO = 4;
  logic clk = 0, rst_n = 0, start = 0;
  nh_cfg_t cfg;
  logic in_valid, in_ready, k_valid, k_bias, kern_done, rd_en;
  logic [DW-1:0] in_data, k_data, rd_data;
  logic [6:0] k_map;
  logic [KAW-1:0] k_addr;
  logic [DIMW:0] rows_done, release_row;
  logic [DIMW-1:0] pt_row, pt_col;
  logic [7:0] pt_addr, rd_addr;
  int checks = 0, failures = 0, kgot = 0;

  nh_idp #(.WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] kq[$], inq[$];
  logic [15:0] pix [W * HH][$];
  int img[];

  always @(posedge clk) if (k_valid) begin
    checks++;
    if (kgot >= kq.size() || k_data != kq[kgot]) failures++;
    kgot++;
  end

  initial begin
    img = new[W * HH * C];
    foreach (img[i]) img[i] = rnd_act(70);
    for (int i = 0; i < NO * (1 + C * K * K); i++) kq.push_back(16'($urandom));
    foreach (kq[i]) inq.push_back(kq[i]);
    for (int p = 0; p < W * HH; p++) begin
      for (int g = 0; g < (C + 15) / 16; g++) begin
        logic [15:0] sm; sm = '0;
        for (int i = 0; i < 16; i++) if (g * 16 + i < C && img[p * C + g * 16 + i] != 0) sm[i] = 1;
        pix[p].push_back(sm);
        for (int i = 0; i < 16; i++) if (sm[i]) pix[p].push_back(16'(img[p * C + g * 16 + i]));
      end
      foreach (pix[p][i]) inq.push_back(pix[p][i]);
    end
    cfg = '{width: DIMW'(W), height: DIMW'(HH), in_ch: CHW'(C), out_ch: 8'(NO),
            ksize: 3'(K), pool: 0, relu: 0, shift: 0};
    in_valid = 0; in_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    while (inq.size() > 0) begin
      in_valid = ($urandom % 4) != 0; in_data = inq[0];
      @(posedge clk);
      if (in_valid && in_ready) void'(inq.pop_front());
      #1;
    end
    in_valid = 0;
  end

  initial begin
    release_row = '0; pt_row = '0; pt_col = '0; rd_en = 0; rd_addr = '0;
    repeat (4) @(negedge clk);
    for (int r = 0; r < HH; r++) begin
      while (int'(rows_done) <= r) @(negedge clk);
      for (int x = 0; x < W; x++) begin
        pt_row = DIMW'(r); pt_col = DIMW'(x); #1;
        for (int i = 0; i < pix[r * W + x].size(); i++) begin
          rd_en = 1; rd_addr = pt_addr + 8'(i);
          @(negedge clk);
          rd_en = 0;
          checks++;
          if (rd_data != pix[r * W + x][i]) begin
            failures++;
            if (failures < 10) $display("row %0d col %0d word %0d: %h exp %h", r, x, i, rd_data, pix[r * W + x][i]);
          end
        end
      end
      repeat ($urandom % 50) @(negedge clk);
      release_row = (DIMW+1)'(r + 1);
    end
    checks++; if (kgot != kq.size()) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
