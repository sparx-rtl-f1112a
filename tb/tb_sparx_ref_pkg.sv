// Reference model of one SPARX inference, written directly from the layer
// definitions (integer arithmetic, no hardware structure): 3x3 zero-padded
// convolution to 8 channels with 16-bit saturating accumulation in k order,
// batch norm ((acc*scale)>>>8 + bias, saturated to 16 bits), ReLU clipped
// to 0..127, 2x2 max pooling, a 10-output fully connected layer with the
// same accumulation, class bias, and argmax (first maximum).  The
// approximate product is sign(w*x) * (|w||x| - (|w|-2^kw)(|x|-2^kx)), the
// exact product minus the term the ILM drops.  The testbench fills the
// arrays, then calls infer().
package tb_sparx_ref_pkg;

  byte     img   [4096];     // input bank contents
  byte     cw    [216];      // conv weights [k][ch]
  byte     fw    [20480];    // FC weights [k][n]
  shortint scale [8];
  shortint bias  [8];
  shortint fb    [10];
  int      logits[10];

  function automatic int lead_pow(int v);
    int q = 1;
    while (q * 2 <= v) q = q * 2;
    return q;
  endfunction

  function automatic int mul(int w, int x, bit approx);
    int aw, ax, m;
    if (!approx) return w * x;
    aw = (w < 0) ? -w : w;
    ax = (x < 0) ? -x : x;
    if (aw == 0 || ax == 0) m = 0;
    else m = aw * ax - (aw - lead_pow(aw)) * (ax - lead_pow(ax));
    return ((w < 0) != (x < 0)) ? -m : m;
  endfunction

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int infer(bit approx, bit cifar, int base);
    int h, cin, npix, h2, npool, best, bi;
    int act [8][1024];
    int pooled [2048];
    h = cifar ? 32 : 28;
    cin = cifar ? 3 : 1;
    npix = h * h;
    h2 = h / 2;
    npool = 8 * h2 * h2;
    for (int ch = 0; ch < 8; ch++) begin
      for (int p = 0; p < npix; p++) begin
        int y, x, acc, v;
        y = p / h; x = p % h; acc = 0;
        for (int k = 0; k < cin * 9; k++) begin
          int ci, ky, kx, iy, ix, xv;
          ci = k / 9; ky = (k % 9) / 3; kx = k % 3;
          iy = y + ky - 1; ix = x + kx - 1;
          if (iy < 0 || ix < 0 || iy >= h || ix >= h) xv = 0;
          else xv = int'(img[base + ci * npix + iy * h + ix]);
          acc = sat16(longint'(acc) + mul(int'(cw[k * 8 + ch]), xv, approx));
        end
        v = sat16(((longint'(acc) * longint'(scale[ch])) >>> 8) + longint'(bias[ch]));
        act[ch][p] = (v < 0) ? 0 : (v > 127 ? 127 : v);
      end
    end
    for (int ch = 0; ch < 8; ch++)
      for (int y2 = 0; y2 < h2; y2++)
        for (int x2 = 0; x2 < h2; x2++) begin
          int m;
          m = act[ch][2 * y2 * h + 2 * x2];
          if (act[ch][2 * y2 * h + 2 * x2 + 1] > m) m = act[ch][2 * y2 * h + 2 * x2 + 1];
          if (act[ch][(2 * y2 + 1) * h + 2 * x2] > m) m = act[ch][(2 * y2 + 1) * h + 2 * x2];
          if (act[ch][(2 * y2 + 1) * h + 2 * x2 + 1] > m) m = act[ch][(2 * y2 + 1) * h + 2 * x2 + 1];
          pooled[ch * h2 * h2 + y2 * h2 + x2] = m;
        end
    for (int n = 0; n < 10; n++) begin
      int acc;
      acc = 0;
      for (int k = 0; k < npool; k++)
        acc = sat16(longint'(acc) + mul(int'(fw[k * 10 + n]), pooled[k], approx));
      logits[n] = sat16(longint'(acc) + longint'(fb[n]));
    end
    best = logits[0]; bi = 0;
    for (int n = 1; n < 10; n++) if (logits[n] > best) begin best = logits[n]; bi = n; end
    return bi;
  endfunction

endpackage
