// ssr_ref_pkg -- reference arithmetic for the testbenches.
//
// Straightforward, unpipelined re-statements of the number formats used by
// the RTL (LayerNorm, softmax, reformat, GELU), written from the formulas in
// the module headers, not from the RTL structure: plain loops over a row,
// native 64-bit arithmetic and real-valued math for GELU.
package ssr_ref_pkg;

  function automatic longint isqrt_ref(input longint unsigned v);
    longint unsigned r;
    r = longint'($sqrt(real'(v)));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return longint'(r);
  endfunction

  // LayerNorm of one row, output y*256 (gamma/beta Q8.8)
  function automatic void layernorm_ref(input int n, input int x[], input int g[], input int b[],
                                        output int y[]);
    longint s, mu, sq, var_, sig, inv;
    y = new[n];
    s = 0;
    for (int i = 0; i < n; i++) s += x[i];
    mu = (s < 0) ? -((-s) / n) : s / n;
    sq = 0;
    for (int i = 0; i < n; i++) sq += (x[i] - mu) * (x[i] - mu);
    var_ = sq / n;
    sig = isqrt_ref(var_);
    if (sig == 0) sig = 1;
    inv = (64'd1 << 40) / sig;
    for (int i = 0; i < n; i++) begin
      logic signed [127:0] p, pa, pb, pc;
      longint v;
      pa = x[i] - mu; pb = inv; pc = g[i];
      p = pa * pb * pc;
      v = longint'(p >>> 40) + b[i];
      if (v > 64'sd2147483647) v = 64'sd2147483647;
      if (v < -64'sd2147483648) v = -64'sd2147483648;
      y[i] = int'(v);
    end
  endfunction

  function automatic int exp2_ref(input longint d);
    int fr [8] = '{65535, 60097, 55109, 50535, 46341, 42495, 38968, 35734};
    if (d >= 128) return 0;
    return fr[d % 8] >> (d / 8);
  endfunction

  // softmax of one row, output Q1.15
  function automatic void softmax_ref(input int n, input int shift, input int x[], output int p[]);
    int mx;
    longint sum, inv;
    int e[];
    p = new[n]; e = new[n];
    mx = x[0];
    for (int i = 1; i < n; i++) if (x[i] > mx) mx = x[i];
    sum = 0;
    for (int i = 0; i < n; i++) begin
      e[i] = exp2_ref((longint'(mx) - longint'(x[i])) >> shift);
      sum += e[i];
    end
    inv = (64'd1 << 32) / sum;
    for (int i = 0; i < n; i++) p[i] = int'((longint'(e[i]) * inv) >> 17);
  endfunction

  function automatic int reformat_ref(input int x, input int mult, input int shift);
    longint v;
    v = longint'(x) * mult;
    if (shift > 0) v = (v + (64'sd1 <<< (shift - 1))) >>> shift;
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int gelu_ref(input int q);
    real x, g, y;
    x = q / 16.0;
    g = 0.5 * x * (1.0 + $tanh($sqrt(2.0 / 3.14159265358979) * (x + 0.044715 * x * x * x)));
    y = $floor(16.0 * g + 0.5);
    if (y > 127.0) return 127;
    if (y < -128.0) return -128;
    return int'(y);
  endfunction

endpackage
