// tb_nh_mac: drives one MAC unit with random beats (valid products, `last`
// beats, bias loads, clear, enable off) and compares each result with a
// software accumulator; the result must appear exactly one cycle after the
// `last` beat.
module tb_nh_mac;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0, en, clear, bias_wr, valid, last, res_valid;
  logic [4:0] shift;
  logic [DW-1:0] bias_data;
  pix_t value, weight;
  acc_t result;
  int checks = 0, failures = 0;
  longint model, bias;

  nh_mac dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {en, clear, bias_wr, valid, last} = '0; shift = 5'd3; bias_data = '0; value = '0; weight = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk) bias_wr = 1; bias_data = 16'(-7); bias = -7;
    @(negedge clk) bias_wr = 0; clear = 1;
    @(negedge clk) clear = 0; en = 1;
    model = bias <<< 3;
    for (int i = 0; i < 3000; i++) begin
      int r;
      r = $urandom % 20;
      valid = 0; last = 0;
      if (r == 0) begin
        last = 1;
        @(negedge clk);
        last = 0;
        checks++;
        if (!res_valid || result != acc_t'(model)) begin
          failures++;
          if (failures < 10) $display("result %0d exp %0d valid %b", result, model, res_valid);
        end
        model = bias <<< 3;
      end else if (r == 1) begin
        en = 0; valid = 1; value = pix_t'($urandom); weight = pix_t'($urandom);
        @(negedge clk);
        en = 1;
        checks++; if (res_valid) failures++;
      end else begin
        valid = 1; value = pix_t'($urandom); weight = pix_t'($urandom);
        model = longint'(signed'(32'(model + longint'(value) * longint'(weight))));
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
