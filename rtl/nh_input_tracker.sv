// nh_input_tracker: Input Tracker of the NullHop Input Data Processor.
// It follows the 16-bit input bus during one layer. After `start` the first
// out_ch*(1+in_ch*K*K) words are kernel data: for each output map a bias word
// then its weights in (ch,ky,kx) order; they are tagged with their MAC number
// and bank address and sent to the compute core. All further words are the
// compressed input feature map (SM word + non-zero values per 16 channels,
// pixels row-major). The tracker counts popcounts of the SM words to know
// which word is which, and tags each pixel word with its pixel's row and
// column, first-word-of-pixel and last-word-of-row. It never expands zeros.
// The word layout and the kernel preamble are this design's choices; the
// paper names the block and says kernels and feature maps both come over the
// input bus from DRAM.
// Timing: combinational tagging; in_ready follows the IDP manager's ready in
// the pixel phase and is always 1 in the kernel phase. kern_done pulses on the
// last kernel word, layer_in_done when the last pixel word is taken.
module nh_input_tracker
  import nh_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  nh_cfg_t        cfg,
  // input bus
  input  logic           in_valid,
  input  logic [DW-1:0]  in_data,
  output logic           in_ready,
  // kernel load
  output logic           k_valid,
  output logic           k_bias,
  output logic [6:0]     k_map,
  output logic [KAW-1:0] k_addr,
  output logic [DW-1:0]  k_data,
  output logic           kern_done,
  // tagged pixel words
  output logic           p_valid,
  input  logic           p_ready,
  output logic [DW-1:0]  p_data,
  output logic           p_pix_start,
  output logic [DIMW-1:0] p_row,
  output logic [DIMW-1:0] p_col,
  output logic           p_row_end,
  output logic           layer_in_done
);
  typedef enum logic [1:0] {T_IDLE, T_KERN, T_PIX} tstate_e;
  tstate_e st;

  logic [7:0]     map_q;
  logic [KAW:0]   kidx_q;      // 0 = bias word, 1.. = weight index + 1
  logic [KAW:0]   kwords;      // in_ch*K*K
  logic [4:0]     grp_q;
  logic [4:0]     ngroups;
  logic           exp_sm_q;
  logic [4:0]     left_q;
  logic [DIMW-1:0] row_q, col_q;
  logic [4:0]     cnt;
  logic           grp_end, pix_end, hs;

  assign kwords  = (KAW+1)'(cfg.in_ch * cfg.ksize * cfg.ksize);
  assign ngroups = 5'((cfg.in_ch + CHW'(SMW - 1)) >> 4);
  assign cnt     = 5'($countones(in_data));

  assign in_ready = (st == T_KERN) || (st == T_PIX && p_ready);
  assign hs       = in_valid && in_ready;

  assign k_valid = (st == T_KERN) && in_valid;
  assign k_bias  = (kidx_q == '0);
  assign k_map   = map_q[6:0];
  assign k_addr  = KAW'(kidx_q - 1'b1);
  assign k_data  = in_data;
  assign kern_done = k_valid && (kidx_q == kwords) && (map_q == cfg.out_ch - 8'd1);

  assign p_valid     = (st == T_PIX) && in_valid;
  assign p_data      = in_data;
  assign p_pix_start = exp_sm_q && (grp_q == '0);
  assign p_row       = row_q;
  assign p_col       = col_q;
  assign grp_end     = exp_sm_q ? (cnt == '0) : (left_q == 5'd1);
  assign pix_end     = grp_end && (grp_q == ngroups - 5'd1);
  assign p_row_end   = pix_end && (col_q == cfg.width - 1'b1);
  assign layer_in_done = p_valid && p_ready && p_row_end && (row_q == cfg.height - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; map_q <= '0; kidx_q <= '0; grp_q <= '0; exp_sm_q <= 1'b1;
      left_q <= '0; row_q <= '0; col_q <= '0;
    end else if (start) begin
      st <= T_KERN; map_q <= '0; kidx_q <= '0; grp_q <= '0; exp_sm_q <= 1'b1;
      left_q <= '0; row_q <= '0; col_q <= '0;
    end else if (hs) begin
      if (st == T_KERN) begin
        if (kidx_q == kwords) begin
          kidx_q <= '0;
          map_q  <= map_q + 8'd1;
          if (kern_done) st <= T_PIX;
        end else kidx_q <= kidx_q + 1'b1;
      end else begin
        if (exp_sm_q) left_q <= cnt;
        else          left_q <= left_q - 5'd1;
        if (grp_end) begin
          exp_sm_q <= 1'b1;
          if (pix_end) begin
            grp_q <= '0;
            if (p_row_end) begin
              col_q <= '0;
              row_q <= row_q + 1'b1;
              if (layer_in_done) st <= T_IDLE;
            end else col_q <= col_q + 1'b1;
          end else grp_q <= grp_q + 5'd1;
        end else exp_sm_q <= 1'b0;
      end
    end
  end
endmodule
