// nullhop_top: the NullHop CNN accelerator (Fig. 5). One convolution layer
// (stride 1, same padding, optional 2x2 max pooling and ReLU) is run per
// `start`: the host first sets cfg, pulses start, then streams on the input
// bus the kernels (per output map: bias, then in_ch*K*K weights) followed by
// the compressed input feature map. The Input Data Processor buffers the
// compressed pixels, the Compute Core Module broadcasts only non-zero values
// to up to 128 MAC units (one per output map), and the Pooling-ReLU-Encoding
// unit writes the compressed output layer to the output bus, ready to be
// streamed back for the next layer. Both buses are 16-bit valid/ready streams
// to the external DRAM, which is outside this module.
// Counters (nz_beats, sm_words, pix_out, words_out) report the work done for
// the layer; done pulses when the last output word has been sent.
module nullhop_top
  import nh_pkg::*;
#(
  parameter int unsigned WORDS = PIX_WORDS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  nh_cfg_t       cfg,
  input  logic          in_valid,
  input  logic [DW-1:0] in_data,
  output logic          in_ready,
  output logic          out_valid,
  output logic [DW-1:0] out_data,
  input  logic          out_ready,
  output logic          done,
  output logic [31:0]   nz_beats,
  output logic [31:0]   sm_words,
  output logic [31:0]   pix_out,
  output logic [31:0]   words_out
);
  localparam int unsigned AW = $clog2(WORDS);
  logic            k_valid, k_bias, kern_done, rd_en, pre_ready, res_valid, comp_done;
  logic [6:0]      k_map;
  logic [KAW-1:0]  k_addr;
  logic [DW-1:0]   k_data, rd_data;
  logic [DIMW:0]   rows_done, release_row;
  logic [DIMW-1:0] pt_row, pt_col;
  logic [AW-1:0]   pt_addr, rd_addr;
  acc_t            results [NUM_MAC];

  nh_idp #(.WORDS(WORDS)) u_idp (
    .clk, .rst_n, .start, .cfg, .in_valid, .in_data, .in_ready, .k_valid,
    .k_bias, .k_map, .k_addr, .k_data, .kern_done, .rows_done, .release_row,
    .pt_row, .pt_col, .pt_addr, .rd_en, .rd_addr, .rd_data
  );

  nh_ccm #(.WORDS(WORDS)) u_ccm (
    .clk, .rst_n, .cfg, .k_valid, .k_bias, .k_map, .k_addr, .k_data,
    .kern_done, .rows_done, .release_row, .pt_row, .pt_col, .pt_addr, .rd_en,
    .rd_addr, .rd_data, .pre_ready, .results, .res_valid, .comp_done,
    .nz_beats, .sm_words
  );

  nh_pre u_pre (
    .clk, .rst_n, .start, .cfg, .vec(results), .vec_valid(res_valid),
    .in_ready(pre_ready), .out_valid, .out_data, .out_ready, .done, .pix_out,
    .words_out
  );
endmodule
