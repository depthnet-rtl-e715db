// depthnet_ref_pkg: bit-exact software model of the accelerator's
// arithmetic, used by the testbenches as the reference.
//
// Feature maps are int arrays [channel][row*w + col] of 16-bit Q7.8 values.
//   post()    : (+ bias<<8) -> arithmetic >> 8 -> saturate to 16 bit ->
//               LeakyReLU as floor(x*205/1024) for negative x;
//   dw_ref()  : 3x3 depthwise convolution, zero padding 1, stride 1 or 2
//               (outputs at even input positions);
//   pw_ref()  : 1x1 convolution over one 32-channel group, plus a partial
//               sum, stride 1 or 2;
//   dc_ref()  : 3x3 stride-2 depthwise deconvolution computed the naive
//               way: zeros inserted between pixels, then a 3x3 convolution
//               over the (2h+2) x (2w+2) padded map.
//
// Provenance: the convolution and deconvolution definitions (deconvolution
// as in the paper's equations (1)-(4)) with this design's fixed-point
// rounding, so results must match bit for bit.
package depthnet_ref_pkg;
  localparam int L = 32;
  localparam int D = 4864;
  typedef int fmap_t [L][D];
  typedef longint accmap_t [L][D];
  typedef int kern_t [L][9];
  typedef int wmat_t [L][L];
  typedef int bias_t [L];

  function automatic int post(longint acc, int bias, bit bias_en, bit act_en);
    longint v;
    longint q;
    v = acc;
    if (bias_en) v += longint'(bias) * 256;
    q = v >>> 8;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    if (act_en && q < 0) q = longint'($floor(real'(q) * 205.0 / 1024.0));
    return int'(q);
  endfunction

  function automatic int px(const ref fmap_t m, input int c, input int y, input int x, input int h, input int w);
    if (y < 0 || x < 0 || y >= h || x >= w) return 0;
    return m[c][y * w + x];
  endfunction

  function automatic void dw_ref(const ref fmap_t in, input int h, input int w, const ref kern_t k,
                                 input bit s2, const ref bias_t b, input bit fin, input bit act,
                                 ref fmap_t out);
    int ho, wo, st;
    st = s2 ? 2 : 1; ho = h / st; wo = w / st;
    for (int c = 0; c < L; c++)
      for (int y = 0; y < ho; y++)
        for (int x = 0; x < wo; x++) begin
          longint s;
          s = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              s += longint'(px(in, c, y * st + ky - 1, x * st + kx - 1, h, w)) * k[c][ky * 3 + kx];
          out[c][y * wo + x] = post(s, b[c], fin, act);
        end
  endfunction

  function automatic void pw_ref(const ref fmap_t in, input int h, input int w, const ref wmat_t wt,
                                 input bit s2, const ref accmap_t init, ref accmap_t acc);
    int ho, wo, st;
    st = s2 ? 2 : 1; ho = h / st; wo = w / st;
    for (int o = 0; o < L; o++)
      for (int y = 0; y < ho; y++)
        for (int x = 0; x < wo; x++) begin
          longint s;
          s = init[o][y * wo + x];
          for (int i = 0; i < L; i++) s += longint'(in[i][(y * st) * w + x * st]) * wt[o][i];
          acc[o][y * wo + x] = s;
        end
  endfunction

  function automatic void dc_ref(const ref fmap_t in, input int h, input int w, const ref kern_t k,
                                 const ref bias_t b, input bit fin, input bit act, ref fmap_t out);
    for (int c = 0; c < L; c++)
      for (int y = 0; y < 2 * h; y++)
        for (int x = 0; x < 2 * w; x++) begin
          longint s;
          s = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int py, pxx;
              py = y + ky; pxx = x + kx;
              if (py >= 2 && pxx >= 2 && py % 2 == 0 && pxx % 2 == 0 &&
                  (py - 2) / 2 < h && (pxx - 2) / 2 < w)
                s += longint'(in[c][((py - 2) / 2) * w + (pxx - 2) / 2]) * k[c][ky * 3 + kx];
            end
          out[c][y * 2 * w + x] = post(s, b[c], fin, act);
        end
  endfunction
endpackage
