// tb_ref_pkg: golden model of the network arithmetic for the testbenches.
//
// Written independently of the RTL: plain longint arithmetic on queues, one
// function per layer type, following the number formats documented in the
// README (activations 8 fractional bits, weights 6, MAC results 12; full
// precision accumulation, rounding half away from zero, saturation).
package tb_ref_pkg;
  typedef longint arr_t[$];

  function automatic longint rnd(longint x, int n);
    longint h;
    h = longint'(1) << (n - 1);
    if (x >= 0) return (x + h) / (longint'(1) << n);
    return -((-x + h) / (longint'(1) << n));
  endfunction

  function automatic longint satw(longint x, int w);
    longint mx, mn;
    mx = (longint'(1) << (w - 1)) - 1;
    mn = -(longint'(1) << (w - 1));
    return (x > mx) ? mx : (x < mn) ? mn : x;
  endfunction

  // depthwise: x[h*C+c], w[k*C+c] -> y[j*C+c]
  function automatic arr_t dw_ref(arr_t x, int H, int C, int K, int S, arr_t w);
    arr_t y;
    for (int j = 0; j * S + K <= H; j++)
      for (int c = 0; c < C; c++) begin
        longint acc = 0;
        for (int k = 0; k < K; k++) acc += x[(j * S + k) * C + c] * w[k * C + c];
        y.push_back(satw(rnd(satw(rnd(acc, 2), 32), 4), 16));
      end
    return y;
  endfunction

  // pointwise + bias + ReLU: x[h*CI+ci], w[ci*CO+co], b[co] -> y[h*CO+co]
  function automatic arr_t pw_ref(arr_t x, int H, int CI, int CO, arr_t w, arr_t b);
    arr_t y;
    for (int h = 0; h < H; h++)
      for (int co = 0; co < CO; co++) begin
        longint acc = 0, m, a;
        for (int ci = 0; ci < CI; ci++) acc += x[h * CI + ci] * w[ci * CO + co];
        m = satw(satw(rnd(acc, 2), 32) + b[co] * 64, 32);
        a = satw(rnd(m, 4), 16);
        y.push_back(a < 0 ? 0 : a);
      end
    return y;
  endfunction

  // GAP + FC: x[h*C+c], w[c] -> logit (12 fractional bits)
  function automatic longint gap_ref(arr_t x, int H, int C, arr_t w);
    longint acc = 0, recip;
    for (int h = 0; h < H; h++)
      for (int c = 0; c < C; c++) acc += x[h * C + c] * w[c];
    recip = ((longint'(1) << 24) + H / 2) / H;
    return satw(rnd(acc * recip, 26), 32);
  endfunction

  function automatic arr_t rand_arr(int n, int lo, int hi);
    arr_t a;
    for (int i = 0; i < n; i++) a.push_back(longint'(lo) + longint'($urandom_range(hi - lo)));
    return a;
  endfunction
endpackage
