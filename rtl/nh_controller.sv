// nh_controller: one of the eight NullHop controllers (Fig. 5), each driving
// a cluster of 16 MAC units and their kernel banks. A cluster is enabled when
// the layer has output maps in it (out_ch > 16*IDX), so 1 to 8 controllers
// serve 16-128 output maps per pass, as the paper states. For an enabled
// cluster the controller turns each broadcast beat into one shared kernel-bank
// read and delays the value and the valid/last flags by one cycle so that they
// meet the weight read from the banks. It also decodes kernel-load words
// addressed to its 16 maps into bank writes or bias writes.
// The cluster size follows the paper (128 MACs, 8 controllers); the decode
// and the one-cycle alignment are this design's choices.
module nh_controller
  import nh_pkg::*;
#(
  parameter int unsigned IDX = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [7:0]     out_ch,
  input  nh_beat_t       beat,
  // kernel load
  input  logic           k_valid,
  input  logic           k_bias,
  input  logic [6:0]     k_map,
  input  logic [KAW-1:0] k_addr,
  input  logic [DW-1:0]  k_data,
  // to the 16 kernel banks and MACs of the cluster
  output logic                     en,
  output logic                     kb_rd_en,
  output logic [KAW-1:0]           kb_rd_addr,
  output logic [MACS_PER_CTRL-1:0] kb_wr_en,
  output logic [MACS_PER_CTRL-1:0] bias_wr,
  output logic [KAW-1:0]           kb_wr_addr,
  output logic [DW-1:0]            kb_wr_data,
  output logic                     mac_valid,
  output logic                     mac_last,
  output pix_t                     mac_value
);
  localparam int unsigned CW = $clog2(MACS_PER_CTRL);
  logic mine;

  assign en         = out_ch > 8'(IDX * MACS_PER_CTRL);
  assign kb_rd_en   = en && beat.valid;
  assign kb_rd_addr = beat.kaddr;
  assign mine       = k_valid && (k_map[6:CW] == (7-CW)'(IDX));
  assign kb_wr_addr = k_addr;
  assign kb_wr_data = k_data;

  always_comb begin
    kb_wr_en = '0;
    bias_wr  = '0;
    if (mine) begin
      if (k_bias) bias_wr[k_map[CW-1:0]]  = 1'b1;
      else        kb_wr_en[k_map[CW-1:0]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_valid <= 1'b0; mac_last <= 1'b0; mac_value <= '0;
    end else begin
      mac_valid <= en && beat.valid;
      mac_last  <= en && beat.last;
      mac_value <= beat.value;
    end
  end
endmodule
