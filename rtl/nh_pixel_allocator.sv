// nh_pixel_allocator: Pixel Allocator of the NullHop compute core (Fig. 5).
// It computes one output pixel at a time (stride 1, same padding). For each
// output pixel it visits the K x K input window; for every in-bounds input
// pixel it reads the compressed words from the pixel memory and, for each
// non-zero value only, broadcasts {value, kernel address (ch*K+ky)*K+kx} to
// the controllers. Zero channels never produce a beat: they cost nothing but
// the SM word that marks them (one word per 16 channels). After the window a
// `last` beat tells the MACs to hand their sums to the pooling unit.
// With pooling on, output pixels are visited in 2x2 blocks so the pooling unit
// can take the maximum on the fly.
// Timing, per in-bounds input pixel of the window: words+3 cycles (pointer
// lookup, one word read per cycle plus one cycle of read latency, window
// step); per out-of-bounds window position: 1 cycle; one more for
// the `last` beat, which waits for pre_ready. Before each output pixel it
// waits until the input rows it needs are complete (rows_done) and it tells
// the IDP manager the oldest row it still needs (release_row).
// Visiting order, read pipelining and address layout are this design's
// choices; the paper gives the block's role: zero pixel MACs are skipped.
module nh_pixel_allocator
  import nh_pkg::*;
#(
  parameter int unsigned WORDS = PIX_WORDS,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,     // begin computing the layer
  input  nh_cfg_t         cfg,
  input  logic [DIMW:0]   rows_done,
  output logic [DIMW:0]   release_row,
  output logic [DIMW-1:0] pt_row,
  output logic [DIMW-1:0] pt_col,
  input  logic [AW-1:0]   pt_addr,
  output logic            rd_en,
  output logic [AW-1:0]   rd_addr,
  input  logic [DW-1:0]   rd_data,
  input  logic            pre_ready,
  output nh_beat_t        beat,
  output logic            done,       // pulse after the last output pixel
  output logic [31:0]     nz_beats,   // non-zero beats sent this layer
  output logic [31:0]     sm_words    // sparsity-map words read this layer
);
  typedef enum logic [2:0] {A_IDLE, A_WAIT, A_WIN, A_RUN, A_ADV, A_END} astate_e;
  astate_e st;

  logic [DIMW-1:0] oyb, oxb;
  logic            sy, sx;
  logic [2:0]      ky, kx;
  logic [DIMW-1:0] oy, ox;
  logic signed [DIMW+1:0] iy, ix;
  logic [2:0]      pad;
  logic [5:0]      kk;
  logic [5:0]      wofs;      // ky*K + kx
  logic [4:0]      ngroups, grp;
  logic            exp_sm;
  logic [SMW-1:0]  sm;
  logic            rvalid;
  logic [AW-1:0]   addr;
  logic            inb;
  logic [DIMW:0]   need_row;
  logic [3:0]      lowbit;
  logic [CHW-1:0]  ch;
  logic            grp_end, pix_done;
  logic            win_last;

  assign pad     = (cfg.ksize - 3'd1) >> 1;
  assign kk      = 6'(cfg.ksize * cfg.ksize);
  assign ngroups = 5'((cfg.in_ch + CHW'(SMW - 1)) >> 4);
  assign oy      = oyb + DIMW'(sy);
  assign ox      = oxb + DIMW'(sx);
  assign iy      = $signed({2'b0, oy}) + $signed({8'b0, ky}) - $signed({8'b0, pad});
  assign ix      = $signed({2'b0, ox}) + $signed({8'b0, kx}) - $signed({8'b0, pad});
  assign inb     = (iy >= 0) && (ix >= 0) && (iy < $signed({2'b0, cfg.height}))
                && (ix < $signed({2'b0, cfg.width}));
  assign pt_row  = iy[DIMW-1:0];
  assign pt_col  = ix[DIMW-1:0];

  // last input row needed by the current block of output rows
  always_comb begin
    logic [DIMW+1:0] r;
    r = (DIMW+2)'(oyb) + (cfg.pool ? 1 : 0) + (DIMW+2)'(pad);
    if (r > (DIMW+2)'(cfg.height) - 1) r = (DIMW+2)'(cfg.height) - 1;
    need_row = (DIMW+1)'(r);
    release_row = (oyb > DIMW'(pad)) ? (DIMW+1)'(oyb - DIMW'(pad)) : '0;
  end

  always_comb begin
    lowbit = '0;
    for (int i = SMW - 1; i >= 0; i--) if (sm[i]) lowbit = 4'(i);
  end
  assign ch = CHW'({grp, 4'b0}) + CHW'(lowbit);

  // parse of the word returning from the pixel memory
  always_comb begin
    grp_end = 1'b0;
    if (st == A_RUN && rvalid) begin
      if (exp_sm) grp_end = (rd_data == '0);
      else        grp_end = ($countones(sm) == 1);
    end
  end
  assign pix_done = grp_end && (grp == ngroups - 5'd1);
  assign rd_en    = (st == A_RUN) && !pix_done;
  assign rd_addr  = addr;
  assign win_last = (ky == cfg.ksize - 3'd1) && (kx == cfg.ksize - 3'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; beat <= '0; done <= 1'b0; rvalid <= 1'b0;
      oyb <= '0; oxb <= '0; sy <= 1'b0; sx <= 1'b0; ky <= '0; kx <= '0;
      grp <= '0; exp_sm <= 1'b1; sm <= '0; addr <= '0; wofs <= '0;
      nz_beats <= '0; sm_words <= '0;
    end else begin
      beat   <= '0;
      done   <= 1'b0;
      rvalid <= rd_en;
      unique case (st)
        A_IDLE: if (start) begin
          st <= A_WAIT; oyb <= '0; oxb <= '0; sy <= 1'b0; sx <= 1'b0;
          ky <= '0; kx <= '0; wofs <= '0; nz_beats <= '0; sm_words <= '0;
        end
        A_WAIT: if (rows_done > need_row) st <= A_WIN;
        A_WIN: begin
          if (inb) begin
            addr <= pt_addr; grp <= '0; exp_sm <= 1'b1; st <= A_RUN;
          end else if (win_last) st <= A_END;
          else begin
            if (kx == cfg.ksize - 3'd1) begin kx <= '0; ky <= ky + 3'd1; end
            else kx <= kx + 3'd1;
            wofs <= wofs + 6'd1;
          end
        end
        A_RUN: begin
          if (rd_en) addr <= addr + 1'b1;
          if (rvalid) begin
            if (exp_sm) begin
              sm <= rd_data;
              sm_words <= sm_words + 32'd1;
              if (rd_data != '0) exp_sm <= 1'b0;
            end else begin
              beat.valid <= 1'b1;
              beat.value <= rd_data;
              beat.kaddr <= KAW'(ch * kk + CHW'(wofs));
              nz_beats   <= nz_beats + 32'd1;
              sm[lowbit] <= 1'b0;
            end
            if (grp_end) begin
              exp_sm <= 1'b1;
              grp    <= grp + 5'd1;
            end
            if (pix_done) st <= A_ADV;
          end
        end
        A_ADV: begin
          if (win_last) st <= A_END;
          else begin
            if (kx == cfg.ksize - 3'd1) begin kx <= '0; ky <= ky + 3'd1; end
            else kx <= kx + 3'd1;
            wofs <= wofs + 6'd1;
            st <= A_WIN;
          end
        end
        A_END: if (pre_ready) begin
          beat.last <= 1'b1;
          ky <= '0; kx <= '0; wofs <= '0;
          st <= A_WAIT;
          if (cfg.pool && !sx) sx <= 1'b1;
          else if (cfg.pool && !sy) begin sx <= 1'b0; sy <= 1'b1; end
          else begin
            sx <= 1'b0; sy <= 1'b0;
            if (oxb + DIMW'(cfg.pool ? 2 : 1) >= cfg.width) begin
              oxb <= '0;
              if (oyb + DIMW'(cfg.pool ? 2 : 1) >= cfg.height) begin
                st <= A_IDLE; done <= 1'b1;
              end else oyb <= oyb + DIMW'(cfg.pool ? 2 : 1);
            end else oxb <= oxb + DIMW'(cfg.pool ? 2 : 1);
          end
        end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
