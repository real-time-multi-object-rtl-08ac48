// tb_ref_pkg: behavioural reference model of the quantised YOLOv8n network
// and test-data generators, shared by the testbenches.
//
// Everything here is plain integer arithmetic on whole feature maps, written
// independently of the RTL's streaming structure: a convolution is the
// textbook triple sum over kernel rows, kernel columns and input channels.
// Test data are generated, not stored:
//   weight(layer, o, col)  pseudo-random in -8..7, col = (ky*K + kx)*CI + ci
//   pixel(y, x, c)         pseudo-random in 0..255
//   threshold(layer, i)    evenly spaced, spread to the expected spread of
//                          that layer's accumulators so all 16 codes occur.
// Each reference layer records its geometry (kernel, channels, folding) by
// layer id; the testbenches use that table to program thresholds, to drive
// weight streams and to answer DMA reads.
package tb_ref_pkg;

  localparam int MAXL = 64;

  int geo_k   [MAXL];
  int geo_ci  [MAXL];
  int geo_co  [MAXL];
  int geo_ib  [MAXL];
  int geo_pe  [MAXL];
  int geo_simd[MAXL];
  int geo_px  [MAXL];   // output pixels per frame
  int geo_q   [MAXL];   // 1 if thresholded

  class fmap;
    int c, h, w;
    int d[];
    function new(int c_, int h_, int w_);
      c = c_; h = h_; w = w_;
      d = new[c_ * h_ * w_];
      foreach (d[i]) d[i] = 0;
    endfunction
    function int get(int ci, int y, int x);
      if (y < 0 || y >= h || x < 0 || x >= w) return 0;
      return d[(ci * h + y) * w + x];
    endfunction
    function void set(int ci, int y, int x, int v);
      d[(ci * h + y) * w + x] = v;
    endfunction
  endclass

  // feature maps the stream source / sink helpers play and check, by slot
  fmap src_map[8];
  fmap ref_map[8];

  function automatic int unsigned mix(int unsigned a);
    a = a ^ (a >> 16);
    a = a * 32'h7feb352d;
    a = a ^ (a >> 15);
    a = a * 32'h846ca68b;
    a = a ^ (a >> 16);
    return a;
  endfunction

  function automatic int weight(int layer, int o, int col);
    int unsigned h;
    h = mix(32'(layer) * 32'h9e3779b1 ^ mix(32'(o) * 32'h85ebca6b ^ mix(32'(col) + 32'h1234)));
    return int'(h[3:0]) - 8;
  endfunction

  function automatic int pixel(int y, int x, int c);
    int unsigned h;
    h = mix(32'(y) * 32'd1000003 ^ mix(32'(x) * 32'd7919 + 32'(c) + 32'd77));
    return int'(h[7:0]);
  endfunction

  function automatic int threshold(int layer, int i);
    int mw, step;
    mw   = geo_k[layer] * geo_k[layer] * geo_ci[layer];
    step = int'($sqrt(real'(mw)) * real'(1 << geo_ib[layer]) / 3.0) + 1;
    return (i - 7) * step;
  endfunction

  function automatic int quant(int layer, int acc);
    int n;
    n = 0;
    for (int i = 0; i < 15; i++) if (acc >= threshold(layer, i)) n++;
    return n;
  endfunction

  function automatic void record(int layer, int k, int ci, int co, int ib, int pe, int simd, int px, int q);
    geo_k[layer] = k; geo_ci[layer] = ci; geo_co[layer] = co; geo_ib[layer] = ib;
    geo_pe[layer] = pe; geo_simd[layer] = simd; geo_px[layer] = px; geo_q[layer] = q;
  endfunction

  // convolution with "same" padding K/2, stride s; quantised if q
  function automatic fmap conv(fmap in, int ib, int layer, int co, int k, int s,
                               int pe = 4, int simd = 8, int q = 1);
    fmap o;
    int pad, oh, ow;
    pad = k / 2;
    oh  = (in.h + 2 * pad - k) / s + 1;
    ow  = (in.w + 2 * pad - k) / s + 1;
    record(layer, k, in.c, co, ib, pe, simd, oh * ow, q);
    o = new(co, oh, ow);
    for (int oc = 0; oc < co; oc++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          int acc;
          acc = 0;
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++)
              for (int ci = 0; ci < in.c; ci++)
                acc += weight(layer, oc, (ky * k + kx) * in.c + ci) *
                       in.get(ci, y * s + ky - pad, x * s + kx - pad);
          o.set(oc, y, x, q ? quant(layer, acc) : acc);
        end
    return o;
  endfunction

  function automatic fmap concat(fmap a, fmap b);
    fmap o;
    o = new(a.c + b.c, a.h, a.w);
    for (int c = 0; c < a.c; c++) for (int y = 0; y < a.h; y++) for (int x = 0; x < a.w; x++)
      o.set(c, y, x, a.get(c, y, x));
    for (int c = 0; c < b.c; c++) for (int y = 0; y < a.h; y++) for (int x = 0; x < a.w; x++)
      o.set(a.c + c, y, x, b.get(c, y, x));
    return o;
  endfunction

  function automatic fmap slice(fmap a, int c0, int n);
    fmap o;
    o = new(n, a.h, a.w);
    for (int c = 0; c < n; c++) for (int y = 0; y < a.h; y++) for (int x = 0; x < a.w; x++)
      o.set(c, y, x, a.get(c0 + c, y, x));
    return o;
  endfunction

  function automatic fmap add(fmap a, fmap b);
    fmap o;
    o = new(a.c, a.h, a.w);
    foreach (o.d[i]) o.d[i] = a.d[i] + b.d[i];
    return o;
  endfunction

  function automatic fmap maxpool(fmap a, int k);
    fmap o;
    o = new(a.c, a.h, a.w);
    for (int c = 0; c < a.c; c++) for (int y = 0; y < a.h; y++) for (int x = 0; x < a.w; x++) begin
      int m;
      m = 0;
      for (int dy = -k/2; dy <= k/2; dy++) for (int dx = -k/2; dx <= k/2; dx++)
        if (a.get(c, y + dy, x + dx) > m) m = a.get(c, y + dy, x + dx);
      o.set(c, y, x, m);
    end
    return o;
  endfunction

  function automatic fmap upsample2(fmap a);
    fmap o;
    o = new(a.c, 2 * a.h, 2 * a.w);
    for (int c = 0; c < a.c; c++) for (int y = 0; y < o.h; y++) for (int x = 0; x < o.w; x++)
      o.set(c, y, x, a.get(c, y / 2, x / 2));
    return o;
  endfunction

  function automatic fmap bottleneck(fmap in, int ib, int layer, int sc);
    fmap h, y;
    h = conv(in, ib, layer, in.c, 3, 1);
    y = conv(h, 4, layer + 1, in.c, 3, 1);
    return sc ? add(in, y) : y;
  endfunction

  function automatic fmap c2f(fmap in, int ib, int layer, int co, int n, int sc);
    fmap y, cat, m;
    int c;
    c   = co / 2;
    y   = conv(in, ib, layer, 2 * c, 1, 1);
    cat = y;
    m   = slice(y, c, c);
    for (int i = 0; i < n; i++) begin
      m   = bottleneck(m, sc ? 4 + i : 4, layer + 1 + 2 * i, sc);
      cat = concat(cat, m);
    end
    return conv(cat, sc ? 4 + n : 4, layer + 1 + 2 * n, co, 1, 1);
  endfunction

  function automatic fmap sppf(fmap in, int layer, int co);
    fmap x, y1, y2, y3;
    x  = conv(in, 4, layer, in.c / 2, 1, 1);
    y1 = maxpool(x, 5);
    y2 = maxpool(y1, 5);
    y3 = maxpool(y2, 5);
    return conv(concat(concat(concat(x, y1), y2), y3), 4, layer + 1, co, 1, 1);
  endfunction

  function automatic fmap image(int h, int w);
    fmap o;
    o = new(3, h, w);
    for (int c = 0; c < 3; c++) for (int y = 0; y < h; y++) for (int x = 0; x < w; x++)
      o.set(c, y, x, pixel(y, x, c));
    return o;
  endfunction

  // whole network; returns the three raw head outputs (strides 8, 16, 32)
  function automatic void yolo(fmap img, int bw, int n1, int n2, int n3, int n4, int nh,
                               output fmap d0, output fmap d1, output fmap d2);
    fmap t, p3, p4, p5, h4, d3, d4, d5;
    int l;
    t  = conv(img, 8, 0, bw, 3, 2, 8, 3);
    t  = conv(t, 4, 1, 2 * bw, 3, 2);
    l  = 2;
    t  = c2f(t, 4, l, 2 * bw, n1, 1);           l += 2 + 2 * n1;
    t  = conv(t, 4, l, 4 * bw, 3, 2);           l += 1;
    p3 = c2f(t, 4, l, 4 * bw, n2, 1);           l += 2 + 2 * n2;
    t  = conv(p3, 4, l, 8 * bw, 3, 2);          l += 1;
    p4 = c2f(t, 4, l, 8 * bw, n3, 1);           l += 2 + 2 * n3;
    t  = conv(p4, 4, l, 16 * bw, 3, 2);         l += 1;
    t  = c2f(t, 4, l, 16 * bw, n4, 1);          l += 2 + 2 * n4;
    p5 = sppf(t, l, 16 * bw);                   l += 2;
    h4 = c2f(concat(upsample2(p5), p4), 4, l, 8 * bw, nh, 0);  l += 2 + 2 * nh;
    d3 = c2f(concat(upsample2(h4), p3), 4, l, 4 * bw, nh, 0);  l += 2 + 2 * nh;
    t  = conv(d3, 4, l, 4 * bw, 3, 2);          l += 1;
    d4 = c2f(concat(t, h4), 4, l, 8 * bw, nh, 0);              l += 2 + 2 * nh;
    t  = conv(d4, 4, l, 8 * bw, 3, 2);          l += 1;
    d5 = c2f(concat(t, p5), 4, l, 16 * bw, nh, 0);             l += 2 + 2 * nh;
    d0 = conv(d3, 4, l,     84, 1, 1, 4, 8, 0);
    d1 = conv(d4, 4, l + 1, 84, 1, 1, 4, 8, 0);
    d2 = conv(d5, 4, l + 2, 84, 1, 1, 4, 8, 0);
  endfunction

  // one 128-bit weight word: beat `beat` (= nf*SF + sf) of layer `layer`
  function automatic logic [127:0] weight_word(int layer, int beat);
    logic [127:0] wd;
    int sf_n, nf, sf, pe, simd;
    pe   = geo_pe[layer];
    simd = geo_simd[layer];
    sf_n = geo_k[layer] * geo_k[layer] * geo_ci[layer] / simd;
    nf   = beat / sf_n;
    sf   = beat % sf_n;
    wd   = '0;
    for (int p = 0; p < pe; p++)
      for (int s = 0; s < simd; s++)
        wd[(p * simd + s) * 4 +: 4] = 4'(weight(layer, nf * pe + p, sf * simd + s));
    return wd;
  endfunction

  function automatic int weight_beats(int layer);
    return (geo_co[layer] / geo_pe[layer]) * (geo_k[layer] * geo_k[layer] * geo_ci[layer] / geo_simd[layer]);
  endfunction

endpackage
