// nh_tb_pkg: reference model for the NullHop testbenches. It builds random
// sparse feature maps and kernels, compresses a dense map into the
// sparsity-map + non-zero-value word stream, and computes the expected
// compressed output of a layer (stride 1, same padding, bias, arithmetic
// shift with 16-bit saturation, optional 2x2 max pooling and ReLU), written
// independently of the RTL.
package nh_tb_pkg;
  // dense map index: (y*W + x)*C + c
  function automatic void compress(input int w, h, c, input int img[],
                                   ref logic [15:0] q[$]);
    for (int p = 0; p < w * h; p++)
      for (int g = 0; g < (c + 15) / 16; g++) begin
        logic [15:0] sm;
        sm = '0;
        for (int i = 0; i < 16; i++)
          if (g * 16 + i < c && img[p * c + g * 16 + i] != 0) sm[i] = 1'b1;
        q.push_back(sm);
        for (int i = 0; i < 16; i++)
          if (sm[i]) q.push_back(16'(img[p * c + g * 16 + i]));
      end
  endfunction

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // kern index: ((o*C + ch)*K + ky)*K + kx ; returns dense output map
  function automatic void conv(input int w, h, c, k, no, shift, input bit pool, relu,
                               input int img[], input int kern[], input int bias[],
                               ref int out[], ref int nz_macs);
    int pad, ow, oh;
    int full[];
    pad = (k - 1) / 2;
    full = new[w * h * no];
    nz_macs = 0;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        for (int o = 0; o < no; o++) begin
          longint acc;
          acc = longint'(bias[o]) <<< shift;
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++) begin
              int iy, ix;
              iy = y + ky - pad; ix = x + kx - pad;
              if (iy >= 0 && ix >= 0 && iy < h && ix < w)
                for (int ch = 0; ch < c; ch++) begin
                  int v;
                  v = img[(iy * w + ix) * c + ch];
                  if (v != 0) begin
                    acc += longint'(v) * longint'(kern[((o * c + ch) * k + ky) * k + kx]);
                    if (o == 0) nz_macs++;
                  end
                end
            end
          acc = 32'(acc);               // 32-bit accumulator
          full[(y * w + x) * no + o] = sat16(longint'(signed'(acc[31:0])) >>> shift);
        end
      end
    ow = pool ? w / 2 : w; oh = pool ? h / 2 : h;
    out = new[ow * oh * no];
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int o = 0; o < no; o++) begin
          int m;
          if (pool) begin
            m = full[((2 * y) * w + 2 * x) * no + o];
            for (int d = 1; d < 4; d++) begin
              int v;
              v = full[((2 * y + d / 2) * w + 2 * x + d % 2) * no + o];
              if (v > m) m = v;
            end
          end else m = full[(y * w + x) * no + o];
          if (relu && m < 0) m = 0;
          out[(y * ow + x) * no + o] = m;
        end
  endfunction

  function automatic int rnd_act(input int zero_pct);
    if (($urandom % 100) < zero_pct) return 0;
    return int'($urandom % 101) - 50;
  endfunction
endpackage
