// tb_ref_pkg: reference arithmetic for the testbenches.
//
// Plain integer models of every number operation of the accelerator, written
// with 64-bit integers and no hardware structure: saturation to Q7.8, the
// exponent approximation, square root, the score scale, row softmax and
// layer normalisation. Also fx2fp, which builds the IEEE-754 single word of
// a Q7.8 value (exactly representable), for filling the external memory.
package tb_ref_pkg;

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int acc2fx(longint a);
    return sat16(a >>> 8);
  endfunction

  // 2^(x*log2e) with the integer part as a shift and a cubic for 2^f.
  function automatic longint ref_exp(int x);
    longint y, ip, f, t, p, n;
    if (x > 0) return 65536;
    y  = longint'(x) * 369;
    ip = y >>> 16;
    f  = y - (ip <<< 16);
    t  = (f * 3638) >> 16;
    t  = (f * (15743 + t)) >> 16;
    t  = (f * (45426 + t)) >> 16;
    p  = 65536 + t;
    n  = -ip;
    if (n >= 17) return 0;
    return p >> n;
  endfunction

  function automatic longint isqrt(longint v);
    longint r;
    r = 0;
    for (int b = 31; b >= 0; b--) begin
      longint c;
      c = r | (longint'(1) << b);
      if (c * c <= v) r = c;
    end
    return r;
  endfunction

  function automatic int score_scale(int dk);
    return sat16(65536 / isqrt(longint'(dk) << 16));
  endfunction

  function automatic int score(longint dot, int inv);
    return sat16((longint'(acc2fx(dot)) * inv) >>> 8);
  endfunction

  // softmax of one row (values Q7.8), result Q7.8
  function automatic void softmax_row(input int s[], output int p[]);
    int m; longint sum, recip;
    longint e[];
    e = new[s.size()];
    p = new[s.size()];
    m = -32768;
    foreach (s[j]) if (s[j] > m) m = s[j];
    sum = 0;
    foreach (s[j]) begin e[j] = ref_exp(sat16(longint'(s[j]) - m)); sum += e[j]; end
    recip = (longint'(1) << 32) / sum;
    foreach (s[j]) p[j] = sat16((e[j] * recip) >> 24);
  endfunction

  // residual + layer norm of one row
  function automatic void ln_row(input int a[], input int b[], input int g[], input int be[],
                                 output int o[]);
    int n; longint sum, mean, sq, v, sd, inv;
    int z[];
    n = a.size();
    z = new[n];
    o = new[n];
    sum = 0;
    for (int j = 0; j < n; j++) begin z[j] = sat16(longint'(a[j]) + b[j]); sum += z[j]; end
    mean = (sum < 0) ? -((-sum) / n) : sum / n;
    mean = sat16(mean);
    sq = 0;
    for (int j = 0; j < n; j++) sq += (z[j] - mean) * (z[j] - mean);
    v = sq / n;
    if (v > 64'hFFFF_FFFE) v = 64'hFFFF_FFFE;
    sd = isqrt(v + 1);
    inv = (longint'(1) << 24) / sd;
    if (inv > 64'hFF_FFFF) inv = 64'hFF_FFFF;
    for (int j = 0; j < n; j++) begin
      int nr;
      nr = sat16(((z[j] - mean) * inv) >>> 16);
      o[j] = sat16(((longint'(g[j]) * nr) >>> 8) + be[j]);
    end
  endfunction

  // IEEE-754 single word of the Q7.8 value v (v/256 is exact in float)
  function automatic logic [31:0] fx2fp(int v);
    int unsigned m; int e; logic s;
    if (v == 0) return 32'd0;
    s = v < 0;
    m = s ? -v : v;
    e = 31;
    while (m[e] == 1'b0) e--;
    // value = m * 2^-8, leading one at bit e -> exponent e-8
    return {s, 8'(e - 8 + 127), 23'((longint'(m) << (23 - e)) & 32'h7F_FFFF)};
  endfunction

endpackage
