// tb_nh_idp_manager: feeds tagged pixel words of a compressed random map into
// the IDP manager with a small ring (WORDS=128, more than one compressed row) and plays the compute core:
// after each completed row it checks the pointer of every pixel of that row,
// then releases it only after a random delay. Checks: words are written in
// order to consecutive ring addresses, rows_done counts rows, pointers
// address each pixel's first word, p_ready drops while the ring or the
// pointer table is full, and no word of a row not yet released is ever
// overwritten.
module tb_nh_idp_manager;
  import nh_pkg::*;
  import nh_tb_pkg::*;
  localparam int unsigned WORDS = 128;
  localparam int W = 4, HH = 14, C = 20;
  logic clk = 0, rst_n = 0, start = 0;
  logic p_valid, p_ready, p_pix_start, p_row_end, mem_wr_en;
  logic [DW-1:0] p_data, mem_wr_data;
  logic [DIMW-1:0] p_row, p_col, pt_row, pt_col;
  logic [6:0] mem_wr_addr, pt_addr;
  logic [DIMW:0] rows_done, release_row;
  int checks = 0, failures = 0, stalls = 0;

  nh_idp_manager #(.WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: rows_done %0d release %0d q %0d p_ready %b occ %0d", rows_done, release_row, q.size(), p_ready, dut.occ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("fail: %s", what); end
  endtask

  typedef struct { logic [15:0] d; bit ps; int row, col; bit re; } tag_t;
  tag_t q[$];
  int first[int];          // pixel -> word number of its first word
  logic [15:0] firstw[int]; // pixel -> its first (SM) word
  logic [15:0] ring [WORDS];
  int owner [WORDS];       // row whose word occupies each ring slot
  int nwr = 0;

  initial begin
    int img[];
    img = new[W * HH * C];
    foreach (img[i]) img[i] = rnd_act(50);
    for (int p = 0; p < W * HH; p++) begin
      logic [15:0] pw[$];
      pw.delete();
      for (int g = 0; g < 2; g++) begin
        logic [15:0] sm; sm = '0;
        for (int i = 0; i < 16; i++) if (g * 16 + i < C && img[p * C + g * 16 + i] != 0) sm[i] = 1;
        pw.push_back(sm);
        for (int i = 0; i < 16; i++) if (sm[i]) pw.push_back(16'(img[p * C + g * 16 + i]));
      end
      firstw[p] = pw[0];
      foreach (pw[i]) q.push_back('{d: pw[i], ps: i == 0, row: p / W, col: p % W,
                                    re: (i == pw.size() - 1) && (p % W == W - 1)});
    end
    foreach (owner[i]) owner[i] = -1;
  end

  // producer
  initial begin
    int nw;
    p_valid = 0; p_data = '0; p_pix_start = 0; p_row = '0; p_col = '0; p_row_end = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    nw = 0;
    while (q.size() > 0) begin
      p_valid = ($urandom % 5) != 0;
      p_data = q[0].d; p_pix_start = q[0].ps; p_row = DIMW'(q[0].row);
      p_col = DIMW'(q[0].col); p_row_end = q[0].re;
      #1;
      if (p_valid && !p_ready) stalls++;
      if (p_valid && p_ready) begin
        chk(mem_wr_en && int'(mem_wr_addr) == nw % WORDS && mem_wr_data == q[0].d, "write order");
        chk(owner[nw % WORDS] < int'(release_row), "no overwrite of a needed row");
        owner[nw % WORDS] = q[0].row;
        ring[nw % WORDS] = q[0].d;
        if (q[0].ps) first[q[0].row * W + q[0].col] = nw;
        nw++;
        void'(q.pop_front());
      end else chk(!mem_wr_en, "no write");
      @(negedge clk);
    end
    p_valid = 0;
  end

  // consumer
  initial begin
    int rr;
    release_row = '0; pt_row = '0; pt_col = '0;
    repeat (6) @(negedge clk);
    for (rr = 0; rr < HH; rr++) begin
      while (int'(rows_done) <= rr) @(negedge clk);
      for (int x = 0; x < W; x++) begin
        pt_row = DIMW'(rr); pt_col = DIMW'(x); #1;
        chk(int'(pt_addr) == first[rr * W + x] % WORDS, "pointer");
        chk(ring[first[rr * W + x] % WORDS] == firstw[rr * W + x], "pointed word");
      end
      repeat (40 + $urandom % 120) @(negedge clk);
      release_row = (DIMW+1)'(rr + 1);
    end
    chk(int'(rows_done) == HH, "rows_done");
    chk(stalls > 0, "ring full stall happened");
    $display("stalls %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
