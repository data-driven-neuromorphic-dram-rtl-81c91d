// nh_pre: NullHop Pooling-ReLU-Encoding unit (Fig. 5).
// It takes the NUM_MAC sums of one output pixel at a time, scales each to 16
// bits (arithmetic shift right by cfg.shift, then saturation), and with
// pooling on keeps a running per-map maximum over the four pixels of a 2x2
// block, which the compute core delivers consecutively ("on the fly"): only
// one pixel in four is written out. ReLU is then applied and the pixel is
// compressed the same way the input is: per 16 output maps a sparsity-map
// word followed by the non-zero values, so the layer can be streamed back
// as the next layer's input. Output words leave one per cycle on a
// valid/ready bus; in_ready is low while a pixel is still being sent.
// Pooling, ReLU and the compressed output follow the paper; the rounding
// (truncating shift with saturation) and the max-before-ReLU order (which
// gives the same result) are this design's choices.
module nh_pre
  import nh_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  nh_cfg_t       cfg,
  input  acc_t          vec [NUM_MAC],
  input  logic          vec_valid,
  output logic          in_ready,
  output logic          out_valid,
  output logic [DW-1:0] out_data,
  input  logic          out_ready,
  output logic          done,          // pulse after the layer's last word
  output logic [31:0]   pix_out,       // output pixels written this layer
  output logic [31:0]   words_out      // output words written this layer
);
  pix_t q    [NUM_MAC];
  pix_t pbuf [NUM_MAC];
  pix_t obuf [NUM_MAC];
  logic        obuf_full, exp_sm;
  logic [1:0]  pcnt;
  logic [2:0]  grp, ngroups;
  logic [SMW-1:0] rem, sm_now;
  logic [3:0]  lowbit;
  logic [31:0] npix;

  // scale and saturate
  always_comb begin
    for (int i = 0; i < NUM_MAC; i++) begin
      acc_t s;
      s = vec[i] >>> cfg.shift;
      if (s > acc_t'(32767))       q[i] = 16'sh7fff;
      else if (s < acc_t'(-32768)) q[i] = -16'sh8000;
      else                         q[i] = pix_t'(s);
    end
  end

  assign ngroups = 3'((9'(cfg.out_ch) + 9'd15) >> 4) - 3'd1;  // last group index
  assign npix    = cfg.pool ? 32'(cfg.width >> 1) * 32'(cfg.height >> 1)
                            : 32'(cfg.width) * 32'(cfg.height);

  always_comb begin
    for (int i = 0; i < SMW; i++)
      sm_now[i] = (obuf[{grp, 4'(i)}] != '0) && (8'({grp, 4'(i)}) < cfg.out_ch);
  end
  always_comb begin
    lowbit = '0;
    for (int i = SMW - 1; i >= 0; i--) if (rem[i]) lowbit = 4'(i);
  end

  assign in_ready  = !obuf_full;
  assign out_valid = obuf_full;
  assign out_data  = exp_sm ? sm_now : obuf[{grp, lowbit}];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      obuf_full <= 1'b0; exp_sm <= 1'b1; pcnt <= '0; grp <= '0; rem <= '0;
      pix_out <= '0; words_out <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        obuf_full <= 1'b0; exp_sm <= 1'b1; pcnt <= '0; grp <= '0;
        pix_out <= '0; words_out <= '0;
      end else begin
        if (vec_valid) begin
          if (cfg.pool && pcnt != 2'd3) begin
            for (int i = 0; i < NUM_MAC; i++)
              pbuf[i] <= (pcnt == 2'd0 || q[i] > pbuf[i]) ? q[i] : pbuf[i];
            pcnt <= pcnt + 2'd1;
          end else begin
            for (int i = 0; i < NUM_MAC; i++) begin
              pix_t m;
              m = (cfg.pool && pbuf[i] > q[i]) ? pbuf[i] : q[i];
              obuf[i] <= (cfg.relu && m < 0) ? '0 : m;
            end
            pcnt <= '0;
            obuf_full <= 1'b1; exp_sm <= 1'b1; grp <= '0;
          end
        end
        if (out_valid && out_ready) begin
          words_out <= words_out + 32'd1;
          if (exp_sm) begin
            rem <= sm_now;
            if (sm_now != '0) exp_sm <= 1'b0;
            else if (grp == ngroups) obuf_full <= 1'b0;
            else grp <= grp + 3'd1;
          end else begin
            rem[lowbit] <= 1'b0;
            if ($countones(rem) == 1) begin
              exp_sm <= 1'b1;
              if (grp == ngroups) obuf_full <= 1'b0;
              else grp <= grp + 3'd1;
            end
          end
          if ((exp_sm ? (sm_now == '0) : ($countones(rem) == 1)) && grp == ngroups) begin
            pix_out <= pix_out + 32'd1;
            if (pix_out + 32'd1 == npix) done <= 1'b1;
          end
        end
      end
    end
  end

  // A new pixel never arrives while the previous one is still being sent.
  assert property (@(posedge clk) disable iff (!rst_n) vec_valid |-> !obuf_full);
endmodule
