// lpr_ref_pkg: plain behavioural reference of the quantised networks, used
// by the testbenches to work out expected outputs independently of the RTL.
//
// Feature maps are flat int arrays indexed (r*W + c)*C + ch.  Weights of a
// layer are flat int arrays indexed o*KDIM + e with e = (ky*3 + kx)*CIN + ch
// for 3x3 kernels and e = ch for 1x1 kernels (the window element order of
// the RTL).  The functions compute with whole integers and loops, one output
// at a time, with no folding, line buffers or streaming.
package lpr_ref_pkg;
  import lpr_pkg::*;

  typedef int fmap_t [];

  // same-padded stride-1 convolution, then ReLU + shift + clip, or linear
  function automatic fmap_t conv(fmap_t x, int H, int W, int CIN, int COUT, int K,
                                 fmap_t w, int shift, bit relu, int obits);
    fmap_t y;
    int kdim;
    kdim = K * K * CIN;
    y = new[H * W * COUT];
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        for (int o = 0; o < COUT; o++) begin
          longint acc;
          acc = 0;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int ch = 0; ch < CIN; ch++) begin
                int rr, cc, e;
                rr = r + ky - K / 2;
                cc = c + kx - K / 2;
                e  = (ky * K + kx) * CIN + ch;
                if (rr >= 0 && rr < H && cc >= 0 && cc < W)
                  acc += longint'(w[o * kdim + e]) * x[(rr * W + cc) * CIN + ch];
              end
          if (relu) begin
            longint v;
            v = acc >>> shift;
            if (v < 0) v = 0;
            if (v > (1 << obits) - 1) v = (1 << obits) - 1;
            y[(r * W + c) * COUT + o] = int'(v);
          end else begin
            y[(r * W + c) * COUT + o] = int'(acc);
          end
        end
    return y;
  endfunction

  function automatic fmap_t pool2(fmap_t x, int H, int W, int C);
    fmap_t y;
    y = new[(H / 2) * (W / 2) * C];
    for (int r = 0; r < H / 2; r++)
      for (int c = 0; c < W / 2; c++)
        for (int ch = 0; ch < C; ch++) begin
          int m;
          m = x[((2*r) * W + 2*c) * C + ch];
          for (int d = 1; d < 4; d++) begin
            int v;
            v = x[((2*r + d/2) * W + 2*c + d%2) * C + ch];
            if (v > m) m = v;
          end
          y[(r * (W / 2) + c) * C + ch] = m;
        end
    return y;
  endfunction

  function automatic fmap_t gmax(fmap_t x, int H, int W, int C);
    fmap_t y;
    y = new[C];
    for (int ch = 0; ch < C; ch++) begin
      y[ch] = x[ch];
      for (int p = 1; p < H * W; p++) if (x[p * C + ch] > y[ch]) y[ch] = x[p * C + ch];
    end
    return y;
  endfunction

  // sigmoid of the 8-bit code of (acc >>> shift), as an 8-bit fraction
  function automatic int qsig(longint acc, int shift);
    longint q;
    real xv;
    q = acc >>> shift;
    if (q < -128) q = -128;
    if (q > 127) q = 127;
    xv = real'(q) * 3.5 / 128.0;
    return int'(255.0 / (1.0 + $exp(-xv)));
  endfunction

  // random weights in the range of a WBITS weight (1 bit: +1 / -1); with
  // full = 0 the range is made symmetric (the most negative code is left
  // out) so that deep random ReLU networks keep non-zero activations
  function automatic fmap_t rand_w(int n, int wbits, bit full = 1'b0);
    fmap_t w;
    w = new[n];
    foreach (w[i]) begin
      if (wbits == 1) w[i] = ($urandom_range(0, 1) != 0) ? 1 : -1;
      else            w[i] = int'($urandom_range(full ? 0 : 1, (1 << wbits) - 1)) - (1 << (wbits - 1));
    end
    return w;
  endfunction

  // memory word 'addr' of a layer's weight memory (layout of mvau.sv)
  function automatic logic [511:0] word_of(fmap_t w, int kdim, int pe, int simd,
                                           int wbits, int addr);
    logic [511:0] word;
    int sf_n, nf, sf;
    sf_n = kdim / simd;
    nf = addr / sf_n;
    sf = addr % sf_n;
    word = '0;
    for (int p = 0; p < pe; p++)
      for (int s = 0; s < simd; s++) begin
        int v;
        v = w[(nf * pe + p) * kdim + sf * simd + s];
        if (wbits == 1) v = (v > 0) ? 1 : 0;
        for (int b = 0; b < wbits; b++) word[(p * simd + s) * wbits + b] = v[b];
      end
    return word;
  endfunction

  // ---- whole-network references -------------------------------------

  function automatic int lpd_kdim(int i);
    return LPD_K[i] * LPD_K[i] * ((i == 0) ? LPD_IN_CH : LPD_COUT[i - 1]);
  endfunction

  function automatic int lpcr_kdim(int i);
    return LPCR_K[i] * LPCR_K[i] * ((i == 0) ? 1 : LPCR_COUT[i - 1]);
  endfunction

  // detection network: img is IMG x IMG x 3 (8 bit); returns the grid of
  // (IMG/32)^2 x 18 sigmoid outputs
  function automatic fmap_t lpd_ref(fmap_t img, int IMG, fmap_t w [LPD_NL], int sig_shift);
    fmap_t x;
    int hw, cin;
    x = img; hw = IMG; cin = LPD_IN_CH;
    // the run-time size test in the loop conditions keeps a simulator from
    // unrolling the layer loop (and everything inlined in it) when it compiles
    for (int i = 0; i < LPD_NL && x.size() > 0; i++) begin
      int ib;
      bit lin;
      ib  = (i == 0) ? PIXBITS : ABITS;
      lin = (i == LPD_NL - 1);
      x = conv(x, hw, hw, cin, LPD_COUT[i], LPD_K[i], w[i],
               relu_shift(lpd_kdim(i), LPD_WBITS, ib), !lin, ABITS);
      cin = LPD_COUT[i];
      if (LPD_POOL[i] != 0) begin
        x = pool2(x, hw, hw, cin);
        hw = hw / 2;
      end
    end
    foreach (x[k]) x[k] = qsig(longint'(x[k]), sig_shift);
    return x;
  endfunction

  // recognition network up to the global max pool: returns 296 scores
  function automatic fmap_t lpcr_ref(fmap_t img, int H, int W, fmap_t w [LPCR_NL]);
    fmap_t x;
    int h, wd, cin;
    x = pool2(img, H, W, 1);
    h = H / 2; wd = W / 2; cin = 1;
    for (int i = 0; i < LPCR_NL && x.size() > 0; i++) begin
      int ib;
      ib = (i == 0) ? PIXBITS : ABITS;
      x = conv(x, h, wd, cin, LPCR_COUT[i], LPCR_K[i], w[i],
               relu_shift(lpcr_kdim(i), LPCR_WBITS[i], ib), 1'b1, ABITS);
      cin = LPCR_COUT[i];
      if (LPCR_POOL[i] != 0) begin
        x = pool2(x, h, wd, cin);
        h = h / 2; wd = wd / 2;
      end
    end
    return gmax(x, h, wd, cin);
  endfunction

  // decoder reference for one position: returns {kept, class}
  function automatic int decode_pos(fmap_t s, int pos, int thr, real scale, output bit kept);
    int best, bv;
    longint sum;
    best = 0; bv = s[pos * NCLS];
    for (int j = 1; j < NCLS; j++) if (s[pos * NCLS + j] > bv) begin bv = s[pos * NCLS + j]; best = j; end
    sum = 0;
    for (int j = 0; j < NCLS; j++) sum += longint'(int'(4096.0 * $exp(-scale * real'(bv - s[pos * NCLS + j]))));
    kept = (sum * thr) <= (1 << 20);
    return best;
  endfunction

  function automatic byte ascii_of(int cls);
    if (cls < 10) return byte'(48 + cls);
    if (cls < 36) return byte'(65 + cls - 10);
    return 8'h20;
  endfunction
endpackage
