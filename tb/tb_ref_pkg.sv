// tb_ref_pkg: behavioural reference of the dsODENet arithmetic for the
// testbenches, written independently of the RTL with plain 64-bit integers.
//
// Feature maps are flat arrays indexed c * H * W + y * W + x. Fixed point:
// FRAC = 12 fractional bits; products are summed exactly, shifted right
// arithmetically by 12 and saturated to the signed 24-bit range.
package tb_ref_pkg;

  typedef longint arr_t[];

  localparam int RFRAC = 12;

  function automatic longint rsat(input longint v);
    if (v > 64'sd8388607)  return 64'sd8388607;
    if (v < -64'sd8388608) return -64'sd8388608;
    return v;
  endfunction

  // sign-extend the low n bits of v
  function automatic longint sx(input longint v, input int n);
    longint m;
    m = longint'(1) << (n - 1);
    v = v & ((longint'(1) << n) - 1);
    return (v ^ m) - m;
  endfunction

  // 3x3 depthwise, padding 1
  function automatic arr_t ref_dw(arr_t x, int c, int h, int w, int s, arr_t wt);
    arr_t y;
    int ho = h / s, wo = w / s;
    y = new[c * ho * wo];
    for (int ch = 0; ch < c; ch++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < wo; ox++) begin
          longint acc = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int iy = oy * s + ky - 1, ix = ox * s + kx - 1;
              if (iy >= 0 && iy < h && ix >= 0 && ix < w)
                acc += x[ch * h * w + iy * w + ix] * wt[ch * 9 + ky * 3 + kx];
            end
          y[ch * ho * wo + oy * wo + ox] = rsat(acc >>> RFRAC);
        end
    return y;
  endfunction

  // dense KxK convolution, padding (K-1)/2; weights (o, i, ky, kx)
  function automatic arr_t ref_conv(arr_t x, int cin, int cout, int h, int w,
                                    int k, int s, arr_t wt);
    arr_t y;
    int ho = h / s, wo = w / s, pad = (k - 1) / 2;
    y = new[cout * ho * wo];
    for (int o = 0; o < cout; o++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < wo; ox++) begin
          longint acc = 0;
          for (int i = 0; i < cin; i++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int iy = oy * s + ky - pad, ix = ox * s + kx - pad;
                if (iy >= 0 && iy < h && ix >= 0 && ix < w)
                  acc += x[i * h * w + iy * w + ix] * wt[((o * cin + i) * k + ky) * k + kx];
              end
          y[o * ho * wo + oy * wo + ox] = rsat(acc >>> RFRAC);
        end
    return y;
  endfunction

  // batch norm (scale, shift), optional shortcut add, optional ReLU
  function automatic arr_t ref_bn(arr_t x, arr_t r, int c, int p, arr_t sc, arr_t sh,
                                  bit relu, bit res);
    arr_t y;
    y = new[c * p];
    for (int ch = 0; ch < c; ch++)
      for (int i = 0; i < p; i++) begin
        longint t = ((x[ch * p + i] * sc[ch]) >>> RFRAC) + sh[ch];
        if (res) t += r[ch * p + i];
        t = rsat(t);
        if (relu && t < 0) t = 0;
        y[ch * p + i] = t;
      end
    return y;
  endfunction

  // append the time channel (value t << FRAC) to an n-channel map
  function automatic arr_t ref_addtime(arr_t x, int n, int p, int t);
    arr_t y;
    y = new[(n + 1) * p];
    for (int i = 0; i < n * p; i++) y[i] = x[i];
    for (int i = 0; i < p; i++) y[n * p + i] = longint'(t) <<< RFRAC;
    return y;
  endfunction

  // take the first n channels of a map
  function automatic arr_t ref_first(arr_t x, int n, int p);
    arr_t y;
    y = new[n * p];
    for (int i = 0; i < n * p; i++) y[i] = x[i];
    return y;
  endfunction

  // ODEBlock: niter Euler steps; weights of one block, in load order
  // DW1 (n+1)*9, PW1 n*(n+1), BN1 2n, DW2, PW2, BN2
  function automatic arr_t ref_ode(arr_t z, int n, int h, int w, int niter, arr_t wt);
    int p = h * w;
    int o = 0;
    arr_t dw1, pw1, sc1, sh1, dw2, pw2, sc2, sh2, a;
    dw1 = new[(n + 1) * 9];  foreach (dw1[i]) dw1[i] = wt[o++];
    pw1 = new[n * (n + 1)];  foreach (pw1[i]) pw1[i] = wt[o++];
    sc1 = new[n];            foreach (sc1[i]) sc1[i] = wt[o++];
    sh1 = new[n];            foreach (sh1[i]) sh1[i] = wt[o++];
    dw2 = new[(n + 1) * 9];  foreach (dw2[i]) dw2[i] = wt[o++];
    pw2 = new[n * (n + 1)];  foreach (pw2[i]) pw2[i] = wt[o++];
    sc2 = new[n];            foreach (sc2[i]) sc2[i] = wt[o++];
    sh2 = new[n];            foreach (sh2[i]) sh2[i] = wt[o++];
    for (int t = 0; t < niter; t++) begin
      a = ref_addtime(z, n, p, t);
      a = ref_dw(a, n + 1, h, w, 1, dw1);
      a = ref_conv(a, n + 1, n, h, w, 1, 1, pw1);
      a = ref_bn(a, a, n, p, sc1, sh1, 1'b1, 1'b0);
      a = ref_addtime(a, n, p, t);
      a = ref_dw(a, n + 1, h, w, 1, dw2);
      a = ref_conv(a, n + 1, n, h, w, 1, 1, pw2);
      z = ref_bn(a, z, n, p, sc2, sh2, 1'b1, 1'b1);
    end
    return z;
  endfunction

  function automatic int ode_nparams(int n);
    return 2 * ((n + 1) * 9 + n * (n + 1) + 2 * n);
  endfunction

  // downsampling block, weights in load order SC, CONV1, BN1, CONV2, BN2
  function automatic arr_t ref_ds(arr_t x, int cin, int h, int w, bit dsc, arr_t wt);
    int cout = 2 * cin, ho = h / 2, wo = w / 2, po = ho * wo;
    int o = 0;
    arr_t scw, c1a, c1b, c2a, c2b, sc1, sh1, sc2, sh2, r, a, y;
    scw = new[cout * cin]; foreach (scw[i]) scw[i] = wt[o++];
    if (dsc) begin
      c1a = new[cin * 9];         foreach (c1a[i]) c1a[i] = wt[o++];
      c1b = new[cout * cin];      foreach (c1b[i]) c1b[i] = wt[o++];
    end else begin
      c1a = new[cout * cin * 9];  foreach (c1a[i]) c1a[i] = wt[o++];
    end
    sc1 = new[cout]; foreach (sc1[i]) sc1[i] = wt[o++];
    sh1 = new[cout]; foreach (sh1[i]) sh1[i] = wt[o++];
    if (dsc) begin
      c2a = new[cout * 9];        foreach (c2a[i]) c2a[i] = wt[o++];
      c2b = new[cout * cout];     foreach (c2b[i]) c2b[i] = wt[o++];
    end else begin
      c2a = new[cout * cout * 9]; foreach (c2a[i]) c2a[i] = wt[o++];
    end
    sc2 = new[cout]; foreach (sc2[i]) sc2[i] = wt[o++];
    sh2 = new[cout]; foreach (sh2[i]) sh2[i] = wt[o++];
    r = ref_conv(x, cin, cout, h, w, 1, 2, scw);
    if (dsc) begin
      a = ref_dw(x, cin, h, w, 2, c1a);
      a = ref_conv(a, cin, cout, ho, wo, 1, 1, c1b);
    end else a = ref_conv(x, cin, cout, h, w, 3, 2, c1a);
    a = ref_bn(a, a, cout, po, sc1, sh1, 1'b1, 1'b0);
    if (dsc) begin
      y = ref_dw(a, cout, ho, wo, 1, c2a);
      y = ref_conv(y, cout, cout, ho, wo, 1, 1, c2b);
    end else y = ref_conv(a, cout, cout, ho, wo, 3, 1, c2a);
    return ref_bn(y, r, cout, po, sc2, sh2, 1'b1, 1'b1);
  endfunction

  function automatic int ds_nparams(int cin, bit dsc);
    int cout = 2 * cin;
    int n = cout * cin + 4 * cout;
    if (dsc) n += cin * 9 + cout * cin + cout * 9 + cout * cout;
    else     n += cout * cin * 9 + cout * cout * 9;
    return n;
  endfunction

  // a random parameter: small conv weights (|w| < 0.25) or BN scale/shift
  function automatic longint rnd(input int range_bits);
    return longint'($urandom_range(0, (1 << range_bits) - 1)) - (longint'(1) << (range_bits - 1));
  endfunction

endpackage
