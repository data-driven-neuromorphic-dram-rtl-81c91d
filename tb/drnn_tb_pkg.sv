// drnn_tb_pkg: bit-exact reference of one delta-GRU layer step for the
// DeltaRNN testbenches (Q8.8 activations and weights, Q16.16 sums, hard
// sigmoid and hard tanh), written independently of the RTL. Weights are a
// fixed function of (row, column) so that no table has to be stored:
// W[row][col] = ((row*37 + col*11 + seed) mod 61) - 30, a value in
// [-30, 30] / 256.
package drnn_tb_pkg;
  function automatic int wgt(input int row, col, seed);
    return ((row * 37 + col * 11 + seed) % 61) - 30;
  endfunction
  function automatic int sat_q(input int v);
    int s;
    s = v >>> 8;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction
  function automatic int hsig(input int v);
    int s;
    s = (v >>> 10) + 128;
    if (s < 0) return 0;
    if (s > 256) return 256;
    return s;
  endfunction
  function automatic int htanh(input int v);
    if (v > 256) return 256;
    if (v < -256) return -256;
    return v;
  endfunction

  // One time step. m: 4*nh sums (r, u, cx, ch), xref/href: last sent values,
  // h: h(t-1) in, h(t) out. Columns of h start at nx_max. Returns deltas sent.
  function automatic int step(input int nx, nx_max, nh, theta, seed, input int x[],
                              ref int m[], ref int xref[], ref int href[], ref int h[]);
    int sent;
    sent = 0;
    for (int j = 0; j < nx + nh; j++) begin
      int v, d, col;
      bit is_h;
      is_h = (j >= nx);
      v = is_h ? h[j - nx] : x[j];
      d = v - (is_h ? href[j - nx] : xref[j]);
      col = is_h ? nx_max + j - nx : j;
      if (d > theta || -d > theta) begin
        sent++;
        if (is_h) href[j - nx] = v; else xref[j] = v;
        if (d > 32767) d = 32767;
        if (d < -32768) d = -32768;
        for (int row = 0; row < 3 * nh; row++) begin
          int g;
          g = row / nh;
          if (g == 2 && is_h) g = 3;
          m[g * nh + row % nh] += d * wgt(row, col, seed);
        end
      end
    end
    for (int n = 0; n < nh; n++) begin
      int r, u, c, p1;
      r = hsig(m[n]);
      u = hsig(m[nh + n]);
      c = htanh(sat_q(m[2 * nh + n]) + ((r * sat_q(m[3 * nh + n])) >>> 8));
      p1 = u * (h[n] - c);
      h[n] = htanh(c + (p1 >>> 8));
    end
    return sent;
  endfunction
endpackage
