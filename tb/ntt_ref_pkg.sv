// ntt_ref_pkg -- reference arithmetic for the testbenches.
//
// Works with plain integer '%' arithmetic, independent of the Barrett
// reduction in the RTL. ref_ntt() evaluates the polynomial directly:
// out[p] = mask^log2(n) * A(w^bitrev(p)) mod q, which is what an in-place
// Cooley-Tukey NTT with natural-order input, bit-reversed output and a
// per-layer output mask must produce.
package ntt_ref_pkg;
  localparam longint Q = 3329;

  function automatic longint mulq(input longint a, input longint b);
    return (a * b) % Q;
  endfunction

  function automatic longint powq(input longint b, input longint e);
    longint r = 1;
    for (longint i = 0; i < e; i++) r = mulq(r, b);
    return r;
  endfunction

  // primitive n-th root: 17 has order 256 mod 3329
  function automatic longint root(input int n);
    return powq(17, 256 / n);
  endfunction

  function automatic int bitrev(input int x, input int bits);
    int r = 0;
    for (int b = 0; b < bits; b++) if (x & (1 << b)) r |= 1 << (bits - 1 - b);
    return r;
  endfunction

  function automatic int clog2(input int n);
    int l = 0;
    while ((1 << l) < n) l++;
    return l;
  endfunction

  // expected coefficient p of the masked NTT of a[0..n-1]
  function automatic longint ref_coef(input longint a[], input int n,
                                      input int p, input int mask_idx);
    longint w, x, acc, xp, m;
    int     lg;
    lg  = clog2(n);
    w   = root(n);
    x   = powq(w, bitrev(p, lg));
    acc = 0;
    xp  = 1;
    for (int i = 0; i < n; i++) begin
      acc = (acc + mulq(a[i], xp)) % Q;
      xp  = mulq(xp, x);
    end
    m = powq(powq(w, mask_idx), lg);
    return mulq(acc, m);
  endfunction
endpackage
