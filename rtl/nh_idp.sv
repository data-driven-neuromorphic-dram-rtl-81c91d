// nh_idp: NullHop Input Data Processor (Fig. 5): input tracker, IDP manager
// and the 512 KB pixel memory. It takes the 16-bit input bus, forwards kernel
// words to the compute core and buffers the compressed input feature map,
// serving the compute core's pointer lookups and pixel-memory reads.
module nh_idp
  import nh_pkg::*;
#(
  parameter int unsigned WORDS = PIX_WORDS,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  nh_cfg_t         cfg,
  input  logic            in_valid,
  input  logic [DW-1:0]   in_data,
  output logic            in_ready,
  output logic            k_valid,
  output logic            k_bias,
  output logic [6:0]      k_map,
  output logic [KAW-1:0]  k_addr,
  output logic [DW-1:0]   k_data,
  output logic            kern_done,
  output logic [DIMW:0]   rows_done,
  input  logic [DIMW:0]   release_row,
  input  logic [DIMW-1:0] pt_row,
  input  logic [DIMW-1:0] pt_col,
  output logic [AW-1:0]   pt_addr,
  input  logic            rd_en,
  input  logic [AW-1:0]   rd_addr,
  output logic [DW-1:0]   rd_data
);
  logic            p_valid, p_ready, p_pix_start, p_row_end, layer_in_done;
  logic [DW-1:0]   p_data;
  logic [DIMW-1:0] p_row, p_col;
  logic            wr_en;
  logic [AW-1:0]   wr_addr;
  logic [DW-1:0]   wr_data;

  nh_input_tracker u_trk (
    .clk, .rst_n, .start, .cfg, .in_valid, .in_data, .in_ready,
    .k_valid, .k_bias, .k_map, .k_addr, .k_data, .kern_done,
    .p_valid, .p_ready, .p_data, .p_pix_start, .p_row, .p_col, .p_row_end,
    .layer_in_done
  );

  nh_idp_manager #(.WORDS(WORDS)) u_mgr (
    .clk, .rst_n, .start, .p_valid, .p_ready, .p_data, .p_pix_start, .p_row,
    .p_col, .p_row_end, .mem_wr_en(wr_en), .mem_wr_addr(wr_addr),
    .mem_wr_data(wr_data), .rows_done, .release_row, .pt_row, .pt_col, .pt_addr
  );

  nh_pixel_mem #(.WORDS(WORDS)) u_mem (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data
  );
endmodule
