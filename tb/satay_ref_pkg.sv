// satay_ref_pkg: integer reference models used by the testbenches.
// Every function recomputes a layer from its definition on whole feature
// maps held in dynamic arrays (NHWC order, index (y*W + x)*C + c), without
// any of the streaming machinery of the RTL: convolution as a direct sum,
// activations from their formulas, pooling, 2x nearest upsampling, channel
// concatenation/split and residual add. Weights come from wgen(), a hash of
// (layer id, index), which the testbenches also load into the hardware.
// Arithmetic follows the number formats of the RTL: 16-bit Q8.8
// activations, 8-bit integer weights, accumulator shifted right by SHIFT
// and saturated.
package satay_ref_pkg;
  typedef int arr_t[];

  localparam int SHIFT = 7;

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // deterministic pseudo-random weight in [-31, 31]
  function automatic int wgen(int layer, int idx);
    int unsigned h;
    h = int'(layer) * 32'd1103515245 + int'(idx) * 32'd2654435761 + 32'd12345;
    h = h ^ (h >> 13);
    h = h * 32'd2246822519;
    h = h ^ (h >> 16);
    return int'(h % 63) - 31;
  endfunction

  function automatic arr_t rand_map(int n, int lo, int hi);
    arr_t a = new[n];
    foreach (a[i]) a[i] = lo + int'($urandom % (hi - lo + 1));
    return a;
  endfunction

  function automatic int hswish(int x);
    longint t, dd;
    t = longint'(x) + 768;
    if (t < 0) t = 0;
    if (t > 1536) t = 1536;
    dd = (t * 10923) >>> 16;               // t/6 with the 2^16/6 constant
    return sat16((longint'(x) * dd) >>> 8);
  endfunction

  function automatic arr_t ref_hswish(arr_t a);
    arr_t o = new[a.size()];
    foreach (o[i]) o[i] = hswish(a[i]);
    return o;
  endfunction

  function automatic arr_t ref_leaky(arr_t a);
    arr_t o = new[a.size()];
    foreach (o[i]) o[i] = leaky(a[i]);
    return o;
  endfunction

  function automatic int leaky(int x);
    return (x > 0) ? x : int'((longint'(x) * 26) >>> 8);
  endfunction

  // act: 0 none, 1 hardswish, 2 leaky
  function automatic arr_t conv(arr_t in, int H, int W, int C, int F, int K, int S, int P,
                                int layer, int act);
    int Ho = (H + 2 * P - K) / S + 1;
    int Wo = (W + 2 * P - K) / S + 1;
    arr_t o = new[Ho * Wo * F];
    for (int oy = 0; oy < Ho; oy++)
      for (int ox = 0; ox < Wo; ox++)
        for (int f = 0; f < F; f++) begin
          longint acc = 0;
          int y;
          for (int c = 0; c < C; c++)
            for (int i = 0; i < K; i++)
              for (int j = 0; j < K; j++) begin
                int iy = oy * S + i - P, ix = ox * S + j - P;
                if (iy >= 0 && iy < H && ix >= 0 && ix < W)
                  acc += longint'(in[(iy * W + ix) * C + c]) *
                         longint'(wgen(layer, ((f * C + c) * K + i) * K + j));
              end
          y = sat16(acc >>> SHIFT);
          if (act == 1) y = hswish(y);
          else if (act == 2) y = leaky(y);
          o[(oy * Wo + ox) * F + f] = y;
        end
    return o;
  endfunction

  function automatic arr_t cbs(arr_t in, int H, int W, int C, int F, int K, int S, int layer);
    return conv(in, H, W, C, F, K, S, K / 2, layer, 1);
  endfunction

  function automatic arr_t maxpool(arr_t in, int H, int W, int C, int K, int P);
    arr_t o = new[H * W * C];
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int c = 0; c < C; c++) begin
          int m = -32768;
          for (int i = 0; i < K; i++)
            for (int j = 0; j < K; j++) begin
              int iy = y + i - P, ix = x + j - P;
              if (iy >= 0 && iy < H && ix >= 0 && ix < W && in[(iy * W + ix) * C + c] > m)
                m = in[(iy * W + ix) * C + c];
            end
          o[(y * W + x) * C + c] = m;
        end
    return o;
  endfunction

  function automatic arr_t upsample2(arr_t in, int H, int W, int C);
    arr_t o = new[4 * H * W * C];
    for (int y = 0; y < 2 * H; y++)
      for (int x = 0; x < 2 * W; x++)
        for (int c = 0; c < C; c++)
          o[(y * 2 * W + x) * C + c] = in[((y / 2) * W + x / 2) * C + c];
    return o;
  endfunction

  // concatenate two maps of NPIX pixels and C channels each
  function automatic arr_t cat2(arr_t a, arr_t b, int npix, int C);
    arr_t o = new[2 * npix * C];
    for (int p = 0; p < npix; p++)
      for (int c = 0; c < C; c++) begin
        o[p * 2 * C + c]     = a[p * C + c];
        o[p * 2 * C + C + c] = b[p * C + c];
      end
    return o;
  endfunction

  // channels [c0, c0+n) of a map with C channels
  function automatic arr_t chans(arr_t a, int npix, int C, int c0, int n);
    arr_t o = new[npix * n];
    for (int p = 0; p < npix; p++)
      for (int c = 0; c < n; c++) o[p * n + c] = a[p * C + c0 + c];
    return o;
  endfunction

  function automatic arr_t add(arr_t a, arr_t b);
    arr_t o = new[a.size()];
    foreach (o[i]) o[i] = sat16(longint'(a[i]) + longint'(b[i]));
    return o;
  endfunction

  function automatic arr_t bottleneck(arr_t in, int H, int W, int C, bit shortcut, int layer);
    arr_t h = cbs(in, H, W, C, C, 1, 1, layer);
    arr_t y = cbs(h, H, W, C, C, 3, 1, layer + 1);
    return shortcut ? add(in, y) : y;
  endfunction

  function automatic arr_t c3(arr_t in, int H, int W, int Ci, int Co, int N, bit shortcut, int layer);
    int np = H * W;
    arr_t a = cbs(chans(in, np, Ci, 0, Ci / 2), H, W, Ci / 2, Co / 2, 1, 1, layer);
    arr_t b = cbs(chans(in, np, Ci, Ci / 2, Ci / 2), H, W, Ci / 2, Co / 2, 1, 1, layer + 1);
    for (int i = 0; i < N; i++) b = bottleneck(b, H, W, Co / 2, shortcut, layer + 2 + 2 * i);
    b = cbs(b, H, W, Co / 2, Co / 2, 1, 1, layer + 2 + 2 * N);
    return cat2(a, b, np, Co / 2);
  endfunction

  function automatic arr_t sppf(arr_t in, int H, int W, int C, int layer);
    int np = H * W, ch = C / 2;
    arr_t x  = conv(in, H, W, C, ch, 1, 1, 0, layer, 0);
    arr_t m1 = maxpool(x, H, W, ch, 5, 2);
    arr_t m2 = maxpool(m1, H, W, ch, 5, 2);
    arr_t m3 = maxpool(m2, H, W, ch, 5, 2);
    arr_t q  = cat2(cat2(x, m1, np, ch), cat2(m2, m3, np, ch), np, 2 * ch);
    // cat2 of two 2-channel-group maps interleaves as [x m1 | m2 m3]: same order
    return conv(q, H, W, 4 * ch, C, 1, 1, 0, layer + 1, 0);
  endfunction
endpackage
