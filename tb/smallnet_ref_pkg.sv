// smallnet_ref_pkg -- bit-exact software reference of the smallNet arithmetic,
// used by the testbenches to work out expected values independently of the
// RTL. Values are Q16.16 in 32-bit ints; products are (a*b) >>> 16 with
// truncation; products and sums saturate to the 32-bit range. Images and
// feature maps are flat dynamic arrays in raster order (index r*W + c).
package smallnet_ref_pkg;

  typedef int arr_t[];

  localparam int ONE = 65536;

  // activation kinds, same encoding as the RTL
  localparam int K_NONE = 0, K_RELU = 1, K_SIG = 2;

  function automatic int sat32(longint v);
    if (v > 64'sd2147483647) return 32'h7fffffff;
    if (v < -64'sd2147483648) return 32'h80000000;
    return int'(v);
  endfunction

  function automatic int radd(int a, int b);
    return sat32(longint'(a) + longint'(b));
  endfunction

  function automatic int rmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return sat32(p >>> 16);
  endfunction

  // piecewise-linear sigmoid: breakpoints 1, 2.375, 5
  function automatic int rsig(int x);
    longint ax, y;
    ax = (x < 0) ? -longint'(x) : longint'(x);
    if (ax >= 5 * 65536)      y = 65536;
    else if (ax >= 155648)    y = (ax >> 5) + 55296;   // 2.375, 0.84375
    else if (ax >= 65536)     y = (ax >> 3) + 40960;   // 1.0, 0.625
    else                      y = (ax >> 2) + 32768;   // 0.5
    if (x < 0) y = 65536 - y;
    return int'(y);
  endfunction

  function automatic int ract(int kind, int x);
    case (kind)
      K_RELU: return (x < 0) ? 0 : x;
      K_SIG:  return rsig(x);
      default: return x;
    endcase
  endfunction

  // KxK convolution, stride 1, 'same' padding: PT = (K-1)/2 zero rows and
  // columns before the image, the other K-1-PT after it (for K = 2: zeros
  // right and bottom). w holds the K*K taps in raster order. Sum order as in
  // the hardware: lane 0 is b + p0, the other lanes are the products; the
  // lanes, padded with zeros to a power of two, are added pairwise level by
  // level. For K = 2: ((b + p00) + p01) + (p10 + p11).
  function automatic arr_t rconvk(arr_t x, int W, int H, arr_t w, int b, int K, int kind);
    arr_t y = new[W*H];
    int pt, nt;
    pt = (K - 1) / 2;
    nt = 1;
    while (nt < K*K) nt *= 2;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        arr_t l;
        l = new[nt];
        foreach (l[k]) l[k] = 0;
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) begin
            int rr, cc, px;
            rr = r + i - pt;
            cc = c + j - pt;
            px = (rr >= 0 && rr < H && cc >= 0 && cc < W) ? x[rr*W + cc] : 0;
            l[i*K+j] = rmul(px, w[i*K+j]);
          end
        l[0] = radd(b, l[0]);
        for (int n = nt / 2; n >= 1; n /= 2)
          for (int k = 0; k < n; k++) l[k] = radd(l[2*k], l[2*k+1]);
        y[r*W+c] = ract(kind, l[0]);
      end
    return y;
  endfunction

  // the network's 2x2 convolution
  function automatic arr_t rconv(arr_t x, int W, int H, int w[4], int b, int kind);
    arr_t wk;
    wk = new[4];
    foreach (w[k]) wk[k] = w[k];
    return rconvk(x, W, H, wk, b, 2, kind);
  endfunction

  // 2x2 max pooling, stride 2
  function automatic arr_t rpool(arr_t x, int W, int H);
    arr_t y = new[(W/2)*(H/2)];
    for (int r = 0; r < H/2; r++)
      for (int c = 0; c < W/2; c++) begin
        int m = x[(2*r)*W + 2*c];
        if (x[(2*r)*W + 2*c+1] > m)   m = x[(2*r)*W + 2*c+1];
        if (x[(2*r+1)*W + 2*c] > m)   m = x[(2*r+1)*W + 2*c];
        if (x[(2*r+1)*W + 2*c+1] > m) m = x[(2*r+1)*W + 2*c+1];
        y[r*(W/2)+c] = m;
      end
    return y;
  endfunction

  // dense layer; w flat as n*NI + i, b[n]
  function automatic arr_t rdense(arr_t x, int NI, int NO, arr_t w, arr_t b, int kind);
    arr_t y = new[NO];
    for (int n = 0; n < NO; n++) begin
      int acc = b[n];
      for (int i = 0; i < NI; i++) acc = radd(acc, rmul(x[i], w[n*NI+i]));
      y[n] = ract(kind, acc);
    end
    return y;
  endfunction

  // index of the largest value, lowest index on ties
  function automatic int rargmax(arr_t v);
    int best = 0;
    for (int i = 1; i < v.size(); i++) if (v[i] > v[best]) best = i;
    return best;
  endfunction

  // random Q16.16 value in [-range, range] (range in 1/65536 units)
  function automatic int rnd_fx(int range);
    return int'($urandom_range(2*range)) - range;
  endfunction


  // Whole network on a W x H image with the flat parameter vector p
  // (conv1 p[0..4], conv2 p[5..9], dense p[10..509]); gives the class and
  // the winning score.
  function automatic void rnet(arr_t img, int W, int H, arr_t p, int conv_kind, int dense_kind,
                               output int cls, output int score);
    int w1[4], w2[4];
    arr_t a, dw, db, y;
    int ni;
    for (int k = 0; k < 4; k++) begin w1[k] = p[k]; w2[k] = p[5+k]; end
    a = rconv(img, W, H, w1, p[4], conv_kind);
    a = rpool(a, W, H);
    a = rconv(a, W/2, H/2, w2, p[9], conv_kind);
    a = rpool(a, W/2, H/2);
    ni = (W/4) * (H/4);
    dw = new[ni*10];
    db = new[10];
    foreach (dw[k]) dw[k] = p[10+k];
    foreach (db[k]) db[k] = p[10+ni*10+k];
    y = rdense(a, ni, 10, dw, db, dense_kind);
    cls = rargmax(y);
    score = y[cls];
  endfunction

endpackage
