// tb_drnn_weight_bram: checks a small weight BRAM (4 inputs, 8 units, 4 lanes): random writes, then reads of every
// written address compared with a shadow copy, one cycle read latency, and
// that a read without rd_en keeps the previous output.
module tb_drnn_weight_bram;
  localparam int unsigned WORDS = (4 + 8) * 6; localparam int unsigned W = 64;
  localparam int unsigned AW = $clog2(WORDS);
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [W-1:0] shadow [int];
  int checks = 0, failures = 0;

  drnn_weight_bram #(.NX(4), .NH(8), .NPE(4)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int keys[$];
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      wr_en = 1;
      wr_addr = AW'($urandom % WORDS);
      if (i < 4) wr_addr = AW'(i == 0 ? 0 : i == 1 ? WORDS - 1 : i == 2 ? 1 : WORDS / 2);
      for (int b = 0; b < W; b++) wr_data[b] = 1'($urandom);
      shadow[int'(wr_addr)] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    foreach (shadow[k]) keys.push_back(k);
    foreach (keys[i]) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(keys[i]);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== shadow[keys[i]]) begin
        failures++;
        $display("addr %0d: got %h exp %h", keys[i], rd_data, shadow[keys[i]]);
      end
      rd_addr = AW'(keys[(i + 1) % keys.size()]);
      @(negedge clk);
      checks++;
      if (rd_data !== shadow[keys[i]]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
