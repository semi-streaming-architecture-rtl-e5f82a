// tb_ref_pkg: reference arithmetic for the testbenches, written independently
// of the RTL (64-bit integer math on plain ints).
package tb_ref_pkg;
  // clamp(((acc*mult) >>> shift) + oz)
  function automatic int ref_rq(longint acc, longint mult, int shift, int oz, int mn, int mx);
    longint p;
    p = (acc * mult) >>> shift;
    p = p + oz;
    if (p < mn) return mn;
    if (p > mx) return mx;
    return int'(p);
  endfunction

  // residual addition of one lane (Fig. 4 formula)
  function automatic int ref_add(int x1, int x2, int a1z, int a2z,
                                 longint m1, int s1, longint m2, int s2,
                                 longint m3, int s3, int oz, int mn, int mx);
    longint a1, a2, p;
    a1 = (m1 * (longint'(x1 - a1z) * 1048576)) >>> s1;
    a2 = (m2 * (longint'(x2 - a2z) * 1048576)) >>> s2;
    a1 = longint'(int'(a1));
    a2 = longint'(int'(a2));
    p  = ((a1 + a2) * m3) >>> s3;
    p  = p + oz;
    if (p < mn) return mn;
    if (p > mx) return mx;
    return int'(p);
  endfunction
endpackage
