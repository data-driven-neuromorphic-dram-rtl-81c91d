// tb_nh_controller: checks controller 2 of 8 (maps 32..47): its cluster is
// enabled only when out_ch > 32; beats become one bank read at the beat's
// kernel address with value/valid/last delayed by one cycle; kernel-load
// words for maps 32..47 become the right bank or bias write, others none.
module tb_nh_controller;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] out_ch;
  nh_beat_t beat;
  logic k_valid, k_bias;
  logic [6:0] k_map;
  logic [KAW-1:0] k_addr;
  logic [DW-1:0] k_data;
  logic en, kb_rd_en, mac_valid, mac_last;
  logic [KAW-1:0] kb_rd_addr, kb_wr_addr;
  logic [15:0] kb_wr_en, bias_wr;
  logic [DW-1:0] kb_wr_data;
  pix_t mac_value;
  int checks = 0, failures = 0;

  nh_controller #(.IDX(2)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("fail: %s", what); end
  endtask

  initial begin
    beat = '0; k_valid = 0; k_bias = 0; k_map = '0; k_addr = '0; k_data = '0; out_ch = 8'd20;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      nh_beat_t b;
      int oc;
      oc = 1 + $urandom % 128;
      out_ch = 8'(oc);
      b.valid = ($urandom % 2); b.last = !b.valid && ($urandom % 2);
      b.value = pix_t'($urandom); b.kaddr = KAW'($urandom % KBANK_WORDS);
      beat = b;
      k_valid = $urandom % 2; k_bias = $urandom % 2; k_map = 7'($urandom);
      k_addr = KAW'($urandom % KBANK_WORDS); k_data = 16'($urandom);
      #1;
      chk(en == (oc > 32), "enable");
      chk(kb_rd_en == (en && b.valid), "read enable");
      chk(!kb_rd_en || kb_rd_addr == b.kaddr, "read address");
      if (k_valid && k_map >= 32 && k_map < 48) begin
        chk(k_bias ? (bias_wr == 16'(1 << (k_map - 32)) && kb_wr_en == 0)
                   : (kb_wr_en == 16'(1 << (k_map - 32)) && bias_wr == 0), "load decode");
        chk(kb_wr_addr == k_addr && kb_wr_data == k_data, "load data");
      end else chk(kb_wr_en == 0 && bias_wr == 0, "no load");
      @(negedge clk);
      chk(mac_valid == (oc > 32 && b.valid) && mac_last == (oc > 32 && b.last), "flags delayed");
      chk(!mac_valid || mac_value == b.value, "value delayed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
