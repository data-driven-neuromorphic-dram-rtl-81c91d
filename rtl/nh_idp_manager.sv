// nh_idp_manager: IDP Manager of the NullHop Input Data Processor.
// It writes the tagged pixel words from the input tracker into the pixel
// memory, used as a ring buffer, and records in a pointer table the ring
// address of the first word of every pixel of the last PT_ROWS input rows.
// It counts completed input rows (rows_done) for the compute core and takes
// back from it the oldest row still needed (release_row): input words are
// refused (p_ready low) while storing them would overwrite a needed row or
// the pointer table would need more than PT_ROWS rows. In this way a layer of
// any height streams through a fixed buffer, one pass over the input per
// layer. The ring and pointer-table scheme is this design's choice: the paper
// names the block and states that pixels are loaded once per 128 output maps
// and that the ordering scales to arbitrary image size.
// Read side: pt_row/pt_col give pt_addr combinationally; rd_en/rd_addr read
// the pixel memory with one cycle latency.
module nh_idp_manager
  import nh_pkg::*;
#(
  parameter int unsigned WORDS = PIX_WORDS,
  localparam int unsigned AW   = $clog2(WORDS),
  localparam int unsigned PTW  = $clog2(PT_ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  // from the input tracker
  input  logic            p_valid,
  output logic            p_ready,
  input  logic [DW-1:0]   p_data,
  input  logic            p_pix_start,
  input  logic [DIMW-1:0] p_row,
  input  logic [DIMW-1:0] p_col,
  input  logic            p_row_end,
  // pixel memory write port
  output logic            mem_wr_en,
  output logic [AW-1:0]   mem_wr_addr,
  output logic [DW-1:0]   mem_wr_data,
  // to / from the compute core
  output logic [DIMW:0]   rows_done,
  input  logic [DIMW:0]   release_row,
  input  logic [DIMW-1:0] pt_row,
  input  logic [DIMW-1:0] pt_col,
  output logic [AW-1:0]   pt_addr
);
  logic [AW-1:0] pt [PT_ROWS][MAX_W];
  logic [31:0]   row_base [PT_ROWS];
  logic [31:0]   wr_cnt;
  logic [DIMW:0] rows_started;
  logic [31:0]   occ;
  logic          row_start, space_ok, pt_ok, hs;

  assign row_start = p_pix_start && (p_col == '0);
  // words held for rows still needed
  assign occ = (release_row < rows_started) ? wr_cnt - row_base[release_row[PTW-1:0]] : 32'd0;
  assign space_ok = occ < WORDS;
  assign pt_ok    = !row_start || ((DIMW+1)'(p_row) + 1'b1 - release_row <= (DIMW+1)'(PT_ROWS));
  assign p_ready  = space_ok && pt_ok;
  assign hs       = p_valid && p_ready;

  assign mem_wr_en   = hs;
  assign mem_wr_addr = wr_cnt[AW-1:0];
  assign mem_wr_data = p_data;
  assign pt_addr     = pt[pt_row[PTW-1:0]][pt_col[$clog2(MAX_W)-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_cnt <= '0; rows_done <= '0; rows_started <= '0;
    end else if (start) begin
      wr_cnt <= '0; rows_done <= '0; rows_started <= '0;
    end else if (hs) begin
      wr_cnt <= wr_cnt + 32'd1;
      if (row_start) rows_started <= rows_started + 1'b1;
      if (p_row_end) rows_done <= rows_done + 1'b1;
    end
  end

  // pointer table and row bases: written before they are read, not reset
  always_ff @(posedge clk) begin
    if (hs && row_start)   row_base[p_row[PTW-1:0]] <= wr_cnt;
    if (hs && p_pix_start) pt[p_row[PTW-1:0]][p_col[$clog2(MAX_W)-1:0]] <= wr_cnt[AW-1:0];
  end

  // The buffer never overwrites a word that is still needed.
  assert property (@(posedge clk) disable iff (!rst_n) hs |-> occ < WORDS);
endmodule
