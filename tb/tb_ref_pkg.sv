// tb_ref_pkg: integer reference model of the residual block for the
// testbenches.  It computes the three convolutions directly (zero padding for
// the 3x3 layer), with exact two's complement sums, then bias, scaling with
// round half up, shortcut add, ReLU and saturation, using the same parameter
// functions as the hardware.  Activation arrays are indexed
// [pixel * channels + channel], pixel = y*W + x.
package tb_ref_pkg;
  import ccnn_pkg::*;

  // statistics of one reference run
  typedef struct {
    int relu;     // values clamped to 0
    int sat;      // values clamped to 255
    int negw;     // negative weights in the three layers
    int sc_add;   // outputs whose shortcut input was non-zero
  } stats_t;

  function automatic int post(longint acc, int seed, int o, int sc, bit use_sc, ref stats_t st);
    longint v;
    v = acc + bias(seed, o);
    v = (v * scale(seed, o) + (longint'(1) << (SCALE_SH - 1))) >>> SCALE_SH;
    if (use_sc) begin
      v += sc;
      if (sc != 0) st.sc_add++;
    end
    if (v < 0) begin st.relu++; return 0; end
    if (v > 255) begin st.sat++; return 255; end
    return int'(v);
  endfunction

  // one convolution layer (K = 1 or 3, stride 1, zero padding K/2)
  function automatic void conv(int seed, int nin, int nout, int k, int h, int w,
                               ref int src[], ref int dst[], ref int sc[], input bit use_sc,
                               ref stats_t st);
    int wt [];
    longint acc;
    int yy, xx, p;
    wt = new[nout * nin * k * k];
    for (int o = 0; o < nout; o++)
      for (int m = 0; m < nin; m++)
        for (int dy = 0; dy < k; dy++)
          for (int dx = 0; dx < k; dx++) begin
            wt[((o * nin + m) * k + dy) * k + dx] = wgt(seed, o, m, dy, dx);
            if (wgt(seed, o, m, dy, dx) < 0) st.negw++;
          end
    dst = new[h * w * nout];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        for (int o = 0; o < nout; o++) begin
          acc = 0;
          for (int dy = 0; dy < k; dy++)
            for (int dx = 0; dx < k; dx++) begin
              yy = y + dy - k / 2;
              xx = x + dx - k / 2;
              if (yy < 0 || yy >= h || xx < 0 || xx >= w) continue;
              p = yy * w + xx;
              for (int m = 0; m < nin; m++)
                acc += longint'(wt[((o * nin + m) * k + dy) * k + dx]) * src[p * nin + m];
            end
          dst[(y * w + x) * nout + o] =
            post(acc, seed, o, use_sc ? sc[(y * w + x) * nout + o] : 0, use_sc, st);
        end
  endfunction

  // the whole bottleneck block: 1x1 (seed), 3x3 (seed+1), 1x1 + shortcut (seed+2)
  function automatic void block(int seed, int cin, int cmid, int h, int w,
                                ref int img[], ref int out[], ref stats_t st);
    int a1 [], a2 [], none [];
    conv(seed,     cin,  cmid, 1, h, w, img, a1,  none, 1'b0, st);
    conv(seed + 1, cmid, cmid, 3, h, w, a1,  a2,  none, 1'b0, st);
    conv(seed + 2, cmid, cin,  1, h, w, a2,  out, img,  1'b1, st);
  endfunction
endpackage
