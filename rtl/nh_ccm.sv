// nh_ccm: NullHop Compute Core Module (Fig. 5): the pixel allocator, eight
// controllers, and NUM_MAC MAC units each with its own kernel memory bank.
// All enabled MAC units see the same non-zero pixel beat in the same cycle and
// each applies its own kernel, so up to 128 output maps are computed in
// parallel. The kernel bank of MAC m is loaded with map m's weights; its bias
// goes into the MAC. At the end of each output pixel all MACs present their
// sums together on results/res_valid for the pooling unit.
// Latency from a beat leaving the allocator to its product in the
// accumulator: 2 cycles; results appear 2 cycles after the `last` beat.
module nh_ccm
  import nh_pkg::*;
#(
  parameter int unsigned WORDS = PIX_WORDS,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  nh_cfg_t         cfg,
  input  logic            k_valid,
  input  logic            k_bias,
  input  logic [6:0]      k_map,
  input  logic [KAW-1:0]  k_addr,
  input  logic [DW-1:0]   k_data,
  input  logic            kern_done,   // starts the computation
  input  logic [DIMW:0]   rows_done,
  output logic [DIMW:0]   release_row,
  output logic [DIMW-1:0] pt_row,
  output logic [DIMW-1:0] pt_col,
  input  logic [AW-1:0]   pt_addr,
  output logic            rd_en,
  output logic [AW-1:0]   rd_addr,
  input  logic [DW-1:0]   rd_data,
  input  logic            pre_ready,
  output acc_t            results [NUM_MAC],
  output logic            res_valid,
  output logic            comp_done,
  output logic [31:0]     nz_beats,
  output logic [31:0]     sm_words
);
  nh_beat_t beat;
  logic [NUM_MAC-1:0] rv;

  nh_pixel_allocator #(.WORDS(WORDS)) u_alloc (
    .clk, .rst_n, .start(kern_done), .cfg, .rows_done, .release_row, .pt_row,
    .pt_col, .pt_addr, .rd_en, .rd_addr, .rd_data, .pre_ready, .beat,
    .done(comp_done), .nz_beats, .sm_words
  );

  for (genvar c = 0; c < NUM_CTRL; c++) begin : g_ctrl
    logic                     en, kb_rd_en, mac_valid, mac_last;
    logic [KAW-1:0]           kb_rd_addr, kb_wr_addr;
    logic [MACS_PER_CTRL-1:0] kb_wr_en, bias_wr;
    logic [DW-1:0]            kb_wr_data;
    pix_t                     mac_value;

    nh_controller #(.IDX(c)) u_ctrl (
      .clk, .rst_n, .out_ch(cfg.out_ch), .beat, .k_valid, .k_bias, .k_map,
      .k_addr, .k_data, .en, .kb_rd_en, .kb_rd_addr, .kb_wr_en, .bias_wr,
      .kb_wr_addr, .kb_wr_data, .mac_valid, .mac_last, .mac_value
    );

    for (genvar m = 0; m < MACS_PER_CTRL; m++) begin : g_mac
      localparam int unsigned I = c * MACS_PER_CTRL + m;
      logic [DW-1:0] w;
      nh_kernel_bank u_bank (
        .clk, .wr_en(kb_wr_en[m]), .wr_addr(kb_wr_addr), .wr_data(kb_wr_data),
        .rd_en(kb_rd_en), .rd_addr(kb_rd_addr), .rd_data(w)
      );
      nh_mac u_mac (
        .clk, .rst_n, .en, .clear(kern_done), .shift(cfg.shift),
        .bias_wr(bias_wr[m]), .bias_data(kb_wr_data), .valid(mac_valid),
        .last(mac_last), .value(mac_value), .weight(pix_t'(w)),
        .result(results[I]), .res_valid(rv[I])
      );
    end
  end

  assign res_valid = rv[0];
endmodule
