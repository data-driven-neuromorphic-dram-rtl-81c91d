// tb_nh_input_tracker: streams a kernel preamble and a compressed random map
// (channel counts that are and are not multiples of 16) through the input
// tracker with random gaps and random p_ready, and checks on every accepted
// word its routing (kernel or pixel), kernel tags (map, bias, address) and
// pixel tags (first word of pixel, row, column, end of row), plus the
// kern_done and layer_in_done pulses.
module tb_nh_input_tracker;
  import nh_pkg::*;
  import nh_tb_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  nh_cfg_t cfg;
  logic in_valid, in_ready, k_valid, k_bias, kern_done, p_valid, p_ready;
  logic p_pix_start, p_row_end, layer_in_done;
  logic [DW-1:0] in_data, k_data, p_data;
  logic [6:0] k_map;
  logic [KAW-1:0] k_addr;
  logic [DIMW-1:0] p_row, p_col;
  int checks = 0, failures = 0;

  nh_input_tracker dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic [15:0] d; bit kern; int map; bit bias; int addr;
                   bit ps; int row; int col; bit re; } tag_t;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("fail: %s", what); end
  endtask

  task automatic run(int w, h, c, k, no);
    int img[];
    tag_t q[$];
    logic [15:0] pw[$];
    int kd, ld;
    img = new[w * h * c];
    foreach (img[i]) img[i] = rnd_act(60);
    for (int o = 0; o < no; o++)
      for (int i = 0; i <= c * k * k; i++)
        q.push_back('{d: 16'($urandom), kern: 1, map: o, bias: i == 0, addr: i - 1,
                      ps: 0, row: 0, col: 0, re: 0});
    for (int p = 0; p < w * h; p++) begin
      pw.delete();
      for (int g = 0; g < (c + 15) / 16; g++) begin
        logic [15:0] sm; sm = '0;
        for (int i = 0; i < 16; i++) if (g * 16 + i < c && img[p * c + g * 16 + i] != 0) sm[i] = 1;
        pw.push_back(sm);
        for (int i = 0; i < 16; i++) if (sm[i]) pw.push_back(16'(img[p * c + g * 16 + i]));
      end
      foreach (pw[i])
        q.push_back('{d: pw[i], kern: 0, map: 0, bias: 0, addr: 0, ps: i == 0,
                      row: p / w, col: p % w, re: (i == pw.size() - 1) && (p % w == w - 1)});
    end
    cfg = '{width: DIMW'(w), height: DIMW'(h), in_ch: CHW'(c), out_ch: 8'(no),
            ksize: 3'(k), pool: 0, relu: 0, shift: 0};
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    kd = 0; ld = 0;
    while (q.size() > 0) begin
      in_valid = ($urandom % 4) != 0; in_data = q[0].d; p_ready = ($urandom % 4) != 0;
      #1;
      if (in_valid && in_ready) begin
        tag_t t; t = q.pop_front();
        if (t.kern) begin
          chk(k_valid && !p_valid, "kernel routed");
          chk(int'(k_map) == t.map && k_bias == t.bias && (t.bias || int'(k_addr) == t.addr) && k_data == t.d, "kernel tag");
          if (kern_done) kd++;
          chk(kern_done == (q.size() > 0 && !q[0].kern), "kern_done");
        end else begin
          chk(p_valid && !k_valid && p_data == t.d, "pixel routed");
          chk(p_pix_start == t.ps && int'(p_row) == t.row && int'(p_col) == t.col && p_row_end == t.re, "pixel tag");
          if (layer_in_done) ld++;
        end
      end
      @(negedge clk);
    end
    in_valid = 0;
    chk(kd == 1 && ld == 1, "done pulses");
    @(negedge clk);
    chk(!in_ready, "idle after layer");
  endtask

  initial begin
    in_valid = 0; in_data = '0; p_ready = 0; cfg = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(5, 4, 20, 3, 3);
    run(3, 3, 32, 1, 2);
    run(4, 2, 5, 5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
