// nh_idp_model: testbench stand-in for the NullHop Input Data Processor once
// a whole layer has been received: load() compresses a dense map into a word
// array and a per-pixel pointer table; the read side behaves like the real
// one (pointer lookup combinational, pixel-memory read one cycle late).
module nh_idp_model
  import nh_pkg::*;
(
  input  logic            clk,
  input  logic [DIMW-1:0] pt_row,
  input  logic [DIMW-1:0] pt_col,
  output logic [17:0]     pt_addr,
  input  logic            rd_en,
  input  logic [17:0]     rd_addr,
  output logic [DW-1:0]   rd_data
);
  logic [15:0] mem [int];
  int ptr [int];
  int width = 1;
  logic [15:0] wordsq[$];

  task automatic load(int w, h, c, int img[]);
    width = w;
    mem.delete(); ptr.delete();
    wordsq.delete();
    for (int p = 0; p < w * h; p++) begin
      ptr[p] = wordsq.size();
      for (int g = 0; g < (c + 15) / 16; g++) begin
        logic [15:0] sm; sm = '0;
        for (int i = 0; i < 16; i++) if (g * 16 + i < c && img[p * c + g * 16 + i] != 0) sm[i] = 1;
        wordsq.push_back(sm);
        for (int i = 0; i < 16; i++) if (sm[i]) wordsq.push_back(16'(img[p * c + g * 16 + i]));
      end
    end
    foreach (wordsq[i]) mem[i] = wordsq[i];
  endtask

  always_comb pt_addr = 18'(ptr.exists(int'(pt_row) * width + int'(pt_col)) ? ptr[int'(pt_row) * width + int'(pt_col)] : 0);
  always_ff @(posedge clk)
    if (rd_en) rd_data <= mem.exists(int'(rd_addr)) ? mem[int'(rd_addr)] : 16'hdead;
endmodule
