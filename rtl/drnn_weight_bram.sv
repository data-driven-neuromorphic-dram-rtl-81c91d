// drnn_weight_bram: the on-chip BRAM holding the delta-GRU weight matrix
// (Fig. 7: weights W in on-chip BRAM). Each word is one NUM_PE-wide slice of a
// weight column: word (j*NCH + k), lane l holds W[k*NUM_PE + l][j], where rows
// 0..H-1 belong to the reset gate, H..2H-1 to the update gate and 2H..3H-1 to
// the candidate, and column j is input x_j (j < X) or hidden h_(j-X).
// NCH = 3H/NUM_PE. Storing whole column slices lets one delta fetch its column
// as a burst of NCH consecutive words. One write port (loading), one
// synchronous read port (one cycle latency). Layout is this design's choice.
module drnn_weight_bram
  import drnn_pkg::*;
#(
  parameter int unsigned NX  = X,
  parameter int unsigned NH  = H,
  parameter int unsigned NPE = NUM_PE,
  localparam int unsigned NCH   = 3 * NH / NPE,
  localparam int unsigned DEPTH = (NX + NH) * NCH,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [NPE*DW-1:0] wr_data,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [NPE*DW-1:0] rd_data
);
  logic [NPE*DW-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
