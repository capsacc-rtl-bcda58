// capsacc_ref_pkg: reference arithmetic for the CapsAcc testbenches, written
// from the number formats (real-valued math, then rounding), independently of
// the look-up tables inside the RTL.
package capsacc_ref_pkg;
  function automatic int sat8i(input longint x);
    if (x > 127) return 127;
    if (x < -128) return -128;
    return int'(x);
  endfunction

  // 25-bit signed wrap, arithmetic shift, saturate to 8 bits
  function automatic int reduce(input longint sum, input int shift);
    longint w;
    w = sum & 64'h1FF_FFFF;
    if (w[24]) w = w - 64'h200_0000;
    return sat8i(w >>> shift);
  endfunction

  // Q3.4 inputs -> Q4.4 norm, through a 12-bit Q8.4 index
  function automatic int norm_ref(input int xs[], input int n);
    longint s2; longint idx; real r;
    s2 = 0;
    for (int i = 0; i < n; i++) s2 += xs[i] * xs[i];
    idx = s2 >> 4;
    if (idx > 4095) idx = 4095;
    r = 4.0 * $sqrt(real'(idx));
    idx = longint'($floor(r + 0.5));
    return (idx > 255) ? 255 : int'(idx);
  endfunction

  // element Q3.4 (top 6 bits used), norm Q4.4 (>>3, max 31) -> Q0.7
  function automatic int squash_ref(input int s, input int nrm);
    int s6, n5; real v; int q;
    s6 = s >>> 2;
    n5 = nrm >> 3; if (n5 > 31) n5 = 31;
    v = 128.0 * (real'(s6) / 4.0) * (real'(n5) / 2.0) / (1.0 + (real'(n5) / 2.0) ** 2);
    q = (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
    return sat8i(q);
  endfunction

  function automatic int exp_ref(input int x);
    real e;
    e = $exp(real'(x) / 16.0) * 256.0 + 0.5;
    return (e >= 65535.0) ? 65535 : int'($floor(e));
  endfunction

  function automatic int softmax_ref(input int xs[], input int n, input int k);
    longint sum; longint q;
    sum = 0;
    for (int i = 0; i < n; i++) sum += exp_ref(xs[i]);
    if (sum == 0) return 0;
    q = (longint'(exp_ref(xs[k])) * 128) / sum;
    return (q > 127) ? 127 : int'(q);
  endfunction
endpackage
