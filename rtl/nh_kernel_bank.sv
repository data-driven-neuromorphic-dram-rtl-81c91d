// nh_kernel_bank: the kernel memory bank of one MAC unit, a 4.5 KB SRAM of
// 2304 16-bit weights (Fig. 5), enough for a 3x3 kernel over 256 input channels.
// Weight (ch,ky,kx) of the bank's output map sits at address (ch*K+ky)*K+kx
// (this layout is this design's choice). Synchronous read, one cycle latency;
// loaded once per layer through the write port.
module nh_kernel_bank #(
  parameter int unsigned WORDS = nh_pkg::KBANK_WORDS,
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
