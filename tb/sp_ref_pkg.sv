// sp_ref_pkg -- reference model and test data for the SuperPoint accelerator
// testbenches.
//
// Test weights, thresholds and images come from an integer hash, so every
// testbench can regenerate them without data files. Weights are uniform in
// -3..3. Thresholds of a layer are spaced by a step that grows with the
// square root of the layer's fan-in, so the activation codes spread over
// their whole range; each channel gets its own offset. The reference
// functions compute convolutions, thresholding and pooling directly from the
// definitions on plain integer arrays indexed (c*H + y)*W + x, independent of
// the stream order and folding of the hardware.
package sp_ref_pkg;
  import sp_pkg::*;

  typedef int arr_t[];

  // Layer table of the network: input/output channels, kernel, folding,
  // input width, signed (no ReLU) output.
  localparam int L_CIN  [12] = '{1, 64, 64, 64, 64, 128, 128, 128, 128, 256, 128, 256};
  localparam int L_COUT [12] = '{64, 64, 64, 64, 128, 128, 128, 128, 256, 65, 256, 256};
  localparam int L_K    [12] = '{3, 3, 3, 3, 3, 3, 3, 3, 3, 1, 3, 1};
  localparam int L_SIMD [12] = '{1, 32, 16, 16, 8, 16, 8, 8, 8, 4, 8, 8};
  localparam int L_PE   [12] = '{32, 64, 32, 32, 32, 32, 16, 16, 32, 5, 32, 8};
  localparam int L_INB  [12] = '{8, 3, 3, 3, 3, 3, 3, 3, 3, 3, 3, 3};
  localparam bit L_SGN  [12] = '{0, 0, 0, 0, 0, 0, 0, 0, 0, 1, 0, 1};

  function automatic int unsigned hash(int unsigned a, int unsigned b, int unsigned c, int unsigned d);
    int unsigned h;
    h = 32'h811c9dc5;
    h = (h ^ a) * 32'h01000193; h ^= h >> 15;
    h = (h ^ b) * 32'h01000193; h ^= h >> 13;
    h = (h ^ c) * 32'h01000193; h ^= h >> 16;
    h = (h ^ d) * 32'h85ebca6b; h ^= h >> 13;
    h = h * 32'hc2b2ae35;       h ^= h >> 16;
    return h;
  endfunction

  function automatic int isqrt(int v);
    int r;
    r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // weight of output channel oc at window element k (k = (ky*K+kx)*CIN + c)
  function automatic int wval(int l, int oc, int k);
    return int'(hash(l, oc, k, 7) % 7) - 3;
  endfunction

  function automatic int tval(int l, int ch, int i, int mw, int inb, bit sgn);
    int step, base;
    step = isqrt(mw) * ((inb > 3) ? 128 : 2);
    if (step < 1) step = 1;
    base = (int'(hash(l, ch, 0, 9) % 5) - 2) * step / 4;
    return base + (sgn ? (i - 3) : i) * step;
  endfunction

  // Paper rule: smallest i with t_i > x, else 7; minus 4 for signed outputs.
  function automatic int code(int l, int ch, int acc, int mw, int inb, bit sgn);
    int idx;
    idx = NUM_THR;
    for (int i = NUM_THR - 1; i >= 0; i--)
      if (tval(l, ch, i, mw, inb, sgn) > acc) idx = i;
    return sgn ? idx - 4 : idx;
  endfunction

  function automatic int pix(int f, int y, int x);
    return int'(hash(f, y, x, 3) % 256);
  endfunction

  // zero-padded KxK convolution followed by thresholding. Loop bounds are
  // taken from the array sizes so that the work happens at run time.
  function automatic arr_t conv_ref(int l, arr_t in, int cin, int cout, int k, int w, int h, int inb, bit sgn);
    arr_t o;
    int p, mw, acc, iy, ix, oc, y, x, ci;
    p  = (k - 1) / 2;
    mw = k * k * cin;
    ci = in.size() / (w * h);
    o  = new[cout * w * h];
    for (int i = 0; i < o.size(); i++) begin
      oc = i / (w * h);
      y  = (i / w) % h;
      x  = i % w;
      acc = 0;
      for (int ky = 0; ky < k; ky++)
        for (int kx = 0; kx < k; kx++) begin
          iy = y + ky - p; ix = x + kx - p;
          if (iy >= 0 && iy < h && ix >= 0 && ix < w)
            for (int c = 0; c < ci; c++)
              acc += wval(l, oc, (ky * k + kx) * cin + c) * in[(c * h + iy) * w + ix];
        end
      o[i] = code(l, oc, acc, mw, inb, sgn);
    end
    return o;
  endfunction

  function automatic arr_t layer_ref(int l, arr_t in, int w, int h);
    return conv_ref(l, in, L_CIN[l], L_COUT[l], L_K[l], w, h, L_INB[l], L_SGN[l]);
  endfunction

  function automatic arr_t pool_ref(arr_t in, int c, int w, int h);
    arr_t o;
    int m, v, ch, y, x;
    o = new[c * (w / 2) * (h / 2)];
    for (int i = 0; i < o.size(); i++) begin
      ch = i / ((w / 2) * (h / 2));
      y  = (i / (w / 2)) % (h / 2);
      x  = i % (w / 2);
      m  = 0;
      for (int dy = 0; dy < 2; dy++)
        for (int dx = 0; dx < 2; dx++) begin
          v = in[(ch * h + 2 * y + dy) * w + 2 * x + dx];
          if (v > m) m = v;
        end
      o[i] = m;
    end
    return o;
  endfunction

  // The 128 x W/8 x H/8 encoder output for image frame f.
  function automatic arr_t encoder_ref(int f, int w, int h);
    arr_t a;
    a = new[w * h];
    for (int i = 0; i < a.size(); i++) a[i] = pix(f, i / w, i % w);
    a = layer_ref(0, a, w, h);          a = layer_ref(1, a, w, h);
    a = pool_ref(a, 64, w, h);
    a = layer_ref(2, a, w/2, h/2);      a = layer_ref(3, a, w/2, h/2);
    a = pool_ref(a, 64, w/2, h/2);
    a = layer_ref(4, a, w/4, h/4);      a = layer_ref(5, a, w/4, h/4);
    a = pool_ref(a, 128, w/4, h/4);
    a = layer_ref(6, a, w/8, h/8);      a = layer_ref(7, a, w/8, h/8);
    return a;
  endfunction

  // Stream packing: the words of a C x W x H array, pixel by pixel in raster
  // order, n lanes of b bits per word, channel g*n+lane.
  function automatic int num_words(int c, int w, int h, int n);
    return w * h * (c / n);
  endfunction

  function automatic logic [255:0] pack_word(arr_t a, int c, int w, int h, int n, int b, int idx);
    logic [255:0] r;
    int px, g, y, x;
    r  = '0;
    px = idx / (c / n);
    g  = idx % (c / n);
    y  = px / w;
    x  = px % w;
    for (int ln = 0; ln < n; ln++)
      for (int bit_i = 0; bit_i < b; bit_i++)
        r[ln * b + bit_i] = a[((g * n + ln) * h + y) * w + x][bit_i];
    return r;
  endfunction

  // Host load sequences. Weight write n of a layer with fan-in mw, mh
  // outputs, folding simd/pe: row n/pe, PE n%pe.
  function automatic int num_wgt(int mw, int mh, int simd);
    return (mw / simd) * mh;
  endfunction

  function automatic wgt_wr_t wgt_word_g(int l, int mw, int mh, int simd, int pe, int n);
    wgt_wr_t r;
    int row, p, nf, sf, sfn;
    sfn    = mw / simd;
    row    = n / pe;
    p      = n % pe;
    nf     = row / sfn;
    sf     = row % sfn;
    r      = '0;
    r.we   = 1'b1;
    r.layer = 4'(l);
    r.row  = ROW_BITS'(row);
    r.pe   = PEIDX_BITS'(p);
    for (int s = 0; s < simd; s++)
      r.data[s * W_BITS +: W_BITS] = W_BITS'(wval(l, nf * pe + p, sf * simd + s));
    return r;
  endfunction

  function automatic wgt_wr_t wgt_word(int l, int n);
    return wgt_word_g(l, L_K[l] * L_K[l] * L_CIN[l], L_COUT[l], L_SIMD[l], L_PE[l], n);
  endfunction

  function automatic thr_wr_t thr_word_g(int l, int mw, int inb, bit sgn, int n);
    thr_wr_t r;
    r       = '0;
    r.we    = 1'b1;
    r.layer = 4'(l);
    r.ch    = CH_BITS'(n / NUM_THR);
    r.idx   = TIDX_BITS'(n % NUM_THR);
    r.data  = THR_BITS'(tval(l, n / NUM_THR, n % NUM_THR, mw, inb, sgn));
    return r;
  endfunction

  function automatic thr_wr_t thr_word(int l, int n);
    return thr_word_g(l, L_K[l] * L_K[l] * L_CIN[l], L_INB[l], L_SGN[l], n);
  endfunction

endpackage
