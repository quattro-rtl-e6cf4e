// quattro_ref_pkg: golden model used by the testbenches.
//
// A plain, integer-only restatement of the accelerator's arithmetic, written
// against the number-format rules (16-bit values with 10 fraction bits,
// round-half-up shifts, saturation) rather than against the RTL: vectors are
// dynamic int arrays and every operation is a straightforward loop.
package quattro_ref_pkg;

  function automatic longint rsh(input longint v, input int s);
    if (s == 0) return v;
    return (v + (longint'(1) << (s - 1))) >>> s;
  endfunction

  function automatic int sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // one output of a linear layer
  function automatic int lin(input int x[], input int w[], input int b, input bit relu);
    longint s;
    int r;
    s = 0;
    foreach (x[i]) s += longint'(x[i]) * longint'(w[i]);
    s += longint'(b) * 1024;
    r = sat16(rsh(s, 10));
    if (relu && r < 0) r = 0;
    return r;
  endfunction

  // exp(d), d <= 0, Q.10 in and out: 2^(d log2 e), integer part as a shift,
  // 2^f ~= 1 + 0.65625 f + 0.34375 f^2 on the fraction
  function automatic int expq(input longint d);
    longint y, ip, fr, p;
    y  = rsh(d * 23637, 14);
    ip = y >>> 10;
    fr = y - ip * 1024;
    p  = 1024 + rsh(fr * 672, 10) + rsh(fr * fr * 352, 20);
    if (ip < -11) return 0;
    return int'(p >> (-ip));
  endfunction

  function automatic void softmax(input int s[], output int p[]);
    int mx;
    longint sum, r;
    int e[];
    e = new[s.size()];
    p = new[s.size()];
    mx = -32768;
    foreach (s[i]) if (s[i] > mx) mx = s[i];
    sum = 0;
    foreach (s[i]) begin
      e[i] = expq(longint'(s[i]) - mx);
      sum += e[i];
    end
    r = (longint'(1) << 26) / sum;
    foreach (s[i]) p[i] = int'(rsh(longint'(e[i]) * r, 16));
  endfunction

  // sqrt by bisection on integers
  function automatic longint isqrt(input longint v);
    longint lo, hi, mid;
    lo = 0; hi = 32'hFFFF_FFFF;
    if (hi > v + 1) hi = v + 1;
    while (hi - lo > 1) begin
      mid = (lo + hi) / 2;
      if (mid * mid <= v) lo = mid; else hi = mid;
    end
    return (v == 0) ? 0 : lo;
  endfunction

  function automatic void layernorm(input int x[], input int g[], input int b[], output int y[]);
    longint sum, sq, mean, var_, sig, inv, dd;
    int n, lg;
    n = x.size();
    lg = $clog2(n);
    y = new[n];
    sum = 0;
    foreach (x[i]) sum += x[i];
    mean = sat16(rsh(sum, lg));
    sq = 0;
    foreach (x[i]) sq += (x[i] - mean) * (x[i] - mean);
    var_ = (sq >>> lg) + 10;
    sig = isqrt(var_);
    inv = (longint'(1) << 30) / sig;
    foreach (x[i]) begin
      dd = sat16(rsh((x[i] - mean) * inv, 20));
      y[i] = sat16(rsh(dd * g[i], 10) + b[i]);
    end
  endfunction

  // attention scale floor(2^16 / sqrt(dh))
  function automatic int scale_q16(input int dh);
    return int'($floor(65536.0 / $sqrt(real'(dh))));
  endfunction

  function automatic int score(input int q[], input int k[], input int dh);
    longint s;
    s = 0;
    foreach (q[i]) s += longint'(q[i]) * longint'(k[i]);
    return sat16(rsh(longint'(sat16(rsh(s, 10))) * scale_q16(dh), 16));
  endfunction

endpackage
