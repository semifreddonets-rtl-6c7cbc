// sf_ref_pkg: behavioural reference model of the SemifreddoNet arithmetic,
// used by the testbenches to work out expected results independently of
// the RTL. Feature maps are flat dynamic arrays of int indexed
// [(row*W + col)*C + channel]; every function computes a whole frame with
// plain loops, in the order the network definition gives, without any of
// the streaming machinery of the RTL.
package sf_ref_pkg;
  typedef int arr_t[];

  function automatic int sat8(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  // folded batch norm, requantisation, optional ReLU
  function automatic int bn(longint acc, int scale, int bias, int shift, bit relu);
    int y;
    y = sat8((acc * scale + bias) >>> shift);
    if (relu && y < 0) y = 0;
    return y;
  endfunction

  function automatic int odim(int n, int stride);
    return (stride == 2) ? (n + 1) / 2 : n;
  endfunction

  // 3x3 convolution, padding 1. depthwise: w[(k*9)+tap]; full:
  // w[((o*ci)+i)*9 + tap] with co outputs. Returns accumulators.
  function automatic arr_t conv3x3(arr_t x, int W, int H, int ci, int co,
                                   bit depthwise, int stride, arr_t w);
    arr_t y;
    int wo, ho, nout;
    wo = odim(W, stride); ho = odim(H, stride);
    nout = depthwise ? ci : co;
    y = new[wo * ho * nout];
    for (int r = 0; r < ho; r++)
      for (int c = 0; c < wo; c++)
        for (int o = 0; o < nout; o++) begin
          longint s = 0;
          for (int dr = -1; dr <= 1; dr++)
            for (int dc = -1; dc <= 1; dc++) begin
              int rr, cc, tap;
              rr = r * stride + dr; cc = c * stride + dc;
              tap = (dr + 1) * 3 + (dc + 1);
              if (rr >= 0 && rr < H && cc >= 0 && cc < W) begin
                if (depthwise)
                  s += longint'(x[(rr * W + cc) * ci + o]) * w[o * 9 + tap];
                else
                  for (int i = 0; i < ci; i++)
                    s += longint'(x[(rr * W + cc) * ci + i]) * w[(o * ci + i) * 9 + tap];
              end
            end
          y[(r * wo + c) * nout + o] = int'(s);
        end
    return y;
  endfunction

  // 1x1 convolution, w[o*ci + i]
  function automatic arr_t pw(arr_t x, int npix, int ci, int co, arr_t w);
    arr_t y = new[npix * co];
    for (int p = 0; p < npix; p++)
      for (int o = 0; o < co; o++) begin
        longint s = 0;
        for (int i = 0; i < ci; i++) s += longint'(x[p * ci + i]) * w[o * ci + i];
        y[p * co + o] = int'(s);
      end
    return y;
  endfunction

  // per-channel BN over a whole map
  function automatic arr_t bn_map(arr_t a, int C, arr_t scale, arr_t bias, int shift, bit relu);
    arr_t y = new[a.size()];
    for (int n = 0; n < a.size(); n++)
      y[n] = bn(a[n], scale[n % C], bias[n % C], shift, relu);
    return y;
  endfunction

  // channel range [lo, lo+n) of a C-channel map
  function automatic arr_t slice(arr_t x, int C, int lo, int n);
    int npix = x.size() / C;
    arr_t y = new[npix * n];
    for (int p = 0; p < npix; p++)
      for (int k = 0; k < n; k++) y[p * n + k] = x[p * C + lo + k];
    return y;
  endfunction

  // concatenate two n-channel maps and shuffle: out[2k]=a[k], out[2k+1]=b[k]
  function automatic arr_t cat_shuffle(arr_t a, arr_t b, int n);
    int npix = a.size() / n;
    arr_t y = new[npix * 2 * n];
    for (int p = 0; p < npix; p++)
      for (int k = 0; k < n; k++) begin
        y[p * 2 * n + 2 * k]     = a[p * n + k];
        y[p * 2 * n + 2 * k + 1] = b[p * n + k];
      end
    return y;
  endfunction

  // alpha blend with a in [0,256]
  function automatic int blend(int a, int xf, int xt);
    return (a * xf + (256 - a) * xt + 128) >>> 8;
  endfunction

  // ---- whole-block models. Trainable weights and all BN parameters are
  // looked up by unit ID in the tables below, which the testbench fills
  // when it writes them to the design; frozen weights come from the
  // design's constant function, as they are part of its definition.
  arr_t tbl_w[int];
  arr_t tbl_scale[int];
  arr_t tbl_bias[int];
  int   tbl_shift[int];

  function automatic arr_t bn_unit(arr_t a, int C, int id, bit relu);
    return bn_map(a, C, tbl_scale[id], tbl_bias[id], tbl_shift[id], relu);
  endfunction

  function automatic arr_t frozen_dw(int seed, int C);
    arr_t w = new[C * 9];
    foreach (w[n]) w[n] = int'(sf_pkg::frozen_weight(seed, n / 9, n % 9));
    return w;
  endfunction

  function automatic arr_t frozen_pw(int seed, int ci, int co);
    arr_t w = new[co * ci];
    foreach (w[n]) w[n] = int'(sf_pkg::frozen_weight(seed, n / ci, n % ci));
    return w;
  endfunction

  function automatic arr_t stem(arr_t x, int W, int H, int co, bit frozen, int seed, int id);
    arr_t w;
    if (frozen) begin
      w = new[co * 3 * 9];
      foreach (w[n]) w[n] = int'(sf_pkg::frozen_weight(seed, n / 27, n % 27));
    end else w = tbl_w[id];
    return bn_unit(conv3x3(x, W, H, 3, co, 1'b0, 2, w), co, id, 1'b1);
  endfunction

  function automatic arr_t regular_block(arr_t x, int W, int H, int C, bit frozen, int seed, int id);
    arr_t idh, br;
    int hc = C / 2;
    idh = slice(x, C, 0, hc);
    br  = slice(x, C, hc, hc);
    br  = bn_unit(conv3x3(br, W, H, hc, hc, 1'b1, 1, frozen ? frozen_dw(seed * 2, hc) : tbl_w[id]), hc, id, 1'b0);
    br  = bn_unit(pw(br, W * H, hc, hc, frozen ? frozen_pw(seed * 2 + 1, hc, hc) : tbl_w[id + 1]), hc, id + 1, 1'b1);
    return cat_shuffle(idh, br, hc);
  endfunction

  function automatic arr_t down_block(arr_t x, int W, int H, int C, bit frozen, int seed, int id);
    arr_t br[2];
    for (int b = 0; b < 2; b++) begin
      arr_t a;
      a = bn_unit(conv3x3(x, W, H, C, C, 1'b1, 2, frozen ? frozen_dw(seed * 4 + 2 * b, C) : tbl_w[id + 2 * b]),
                  C, id + 2 * b, 1'b0);
      br[b] = bn_unit(pw(a, odim(W, 2) * odim(H, 2), C, C,
                         frozen ? frozen_pw(seed * 4 + 2 * b + 1, C, C) : tbl_w[id + 2 * b + 1]),
                      C, id + 2 * b + 1, 1'b1);
    end
    return cat_shuffle(br[0], br[1], C);
  endfunction

  // one Semifreddo module over all three cores; alpha tables by blend ID
  arr_t tbl_alpha[int];

  function automatic void semifreddo(input arr_t f_in, input arr_t t1_in, input arr_t t2_in,
                                     input int W, input int H, input int C, input bit down,
                                     input int n_rep, input int seed, input int id_f,
                                     input int id_t1, input int id_t2, input bit shuffle,
                                     output arr_t f_out, output arr_t t1_out, output arr_t t2_out);
    arr_t f0, t1, t2, y1, y2;
    int co, wo, ho;
    co = down ? 2 * C : C; wo = down ? odim(W, 2) : W; ho = down ? odim(H, 2) : H;
    if (down) begin
      f0 = down_block(f_in, W, H, C, 1'b1, seed * 16, id_f);
      t1 = down_block(t1_in, W, H, C, 1'b0, 0, id_t1);
      t2 = down_block(t2_in, W, H, C, 1'b0, 0, id_t2);
    end else begin
      f0 = regular_block(f_in, W, H, C, 1'b1, seed * 16, id_f);
      t1 = regular_block(t1_in, W, H, C, 1'b0, 0, id_t1);
      t2 = regular_block(t2_in, W, H, C, 1'b0, 0, id_t2);
    end
    y1 = new[f0.size()]; y2 = new[f0.size()];
    foreach (f0[n]) begin
      y1[n] = blend(tbl_alpha[id_t1 + 4][n % co], f0[n], t1[n]);
      y2[n] = blend(tbl_alpha[id_t2 + 4][n % co], f0[n], t2[n]);
    end
    t1_out = new[f0.size()]; t2_out = new[f0.size()];
    foreach (f0[n]) begin
      bit sw = shuffle && (n % co) >= co / 2;
      t1_out[n] = sw ? y2[n] : y1[n];
      t2_out[n] = sw ? y1[n] : y2[n];
    end
    f_out = f0;
    for (int k = 1; k <= n_rep; k++)
      f_out = regular_block(f_out, wo, ho, co, 1'b1, seed * 16 + k, id_f + 4 + 2 * (k - 1));
  endfunction
endpackage
