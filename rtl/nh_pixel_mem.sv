// nh_pixel_mem: the IDP pixel memory, a 512 KB single-port-write /
// single-port-read SRAM of 16-bit words (size from the paper, Fig. 5).
// Written as an array so that synthesis maps it to a memory macro. One write
// and one read per cycle; the read is synchronous: rd_data is valid the cycle
// after rd_en. Contents are not reset (the IDP never reads a word it has not
// written).
module nh_pixel_mem #(
  parameter int unsigned WORDS = nh_pkg::PIX_WORDS,
  parameter int unsigned W     = nh_pkg::DW,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [WORDS];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
