// tb_lbi_ref_pkg: software reference of the LBI arithmetic for the
// testbenches. Written from the algorithm, not from the RTL: integers hold
// the fixed-point words (16 fraction bits for data, 19 for mu), and every
// helper reproduces one arithmetic rule of the core:
//   w20      wrap to a 20-bit two's-complement word
//   mu_ref   1/k by the non-restoring recurrence r -/+ k*2^-i, z +/- 2^-i,
//            20 steps starting from r = 1, z = 0
//   mul_ref  e * mu rounded to nearest (ties up), saturated to 20 bits
//   shr_ref  max(|v| - lambda, 0) * sign(v)
//   cycles_ref  21 + sum_i (3*ceil(k_i/M) + ceil(log2 M) + 6)
package tb_lbi_ref_pkg;

  function automatic longint w20(longint x);
    longint m;
    m = x & 64'hFFFFF;
    if (m >= 64'h80000) m -= 64'h100000;
    return m;
  endfunction

  function automatic longint mu_ref(longint k, int stages = 20);
    longint r, z;
    r = longint'(1) << (stages - 1);
    z = 0;
    for (int i = 0; i < stages; i++) begin
      if (r >= 0) begin r -= k << (stages - 1 - i); z += longint'(1) << (stages - 1 - i); end
      else        begin r += k << (stages - 1 - i); z -= longint'(1) << (stages - 1 - i); end
    end
    return z;   // stages-1 = 19 fraction bits
  endfunction

  function automatic longint mul_ref(longint e, longint mu);
    longint p;
    p = (e * mu + (longint'(1) << 18)) >>> 19;
    if (p > 524287)  p = 524287;
    if (p < -524288) p = -524288;
    return p;
  endfunction

  function automatic longint shr_ref(longint v, longint lam);
    if (v > lam)  return v - lam;
    if (v < -lam) return v + lam;
    return 0;
  endfunction

  function automatic int clog2_ref(longint x);
    int c;
    c = 0;
    while ((longint'(1) << c) < x) c++;
    return c;
  endfunction

  function automatic longint cycles_ref(longint n, longint l, longint m);
    longint c, k;
    c = 21;
    for (longint i = 1; i <= l; i++) begin
      k = ((i - 1) % n) + 1;
      c += 3 * ((k + m - 1) / m + 2) + clog2_ref(m);
    end
    return c;
  endfunction

endpackage
