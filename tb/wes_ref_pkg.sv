// wes_ref_pkg: golden arithmetic for the testbenches of the WES engine.
//
// Written with 64-bit integer arithmetic, directly from the operator
// description, independent of the pipelined RTL:
//   out = sat_uint8(relu(round((shift_s(acc + bias) >> S) * M / 2^32)) + z_out)
package wes_ref_pkg;

  function automatic longint clamp64(longint v, longint lo, longint hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  // floor division by 2^n for n >= 0
  function automatic longint floor_pow2(longint v, int n);
    longint d;
    if (n == 0) return v;
    if (n >= 62) return (v < 0) ? -1 : 0;
    d = longint'(1) << n;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic int unsigned ref_requant(int acc, int bias, int unsigned sh,
                                              int unsigned m, int s, bit relu,
                                              int unsigned z_out);
    int     a;
    longint t, u, p, r;
    a = acc + bias;                                  // 32-bit wrap
    if (s > 0) t = clamp64(longint'(a) * (longint'(1) << s), -64'sd2147483648, 64'sd2147483647);
    else       t = floor_pow2(longint'(a), -s);
    u = floor_pow2(t, int'(sh));
    p = u * longint'(m);
    r = floor_pow2(p + 64'sd2147483648, 32);
    if (relu && r < 0) r = 0;
    r = r + longint'(z_out);
    return 32'(clamp64(r, 0, 255));
  endfunction

  // value after the mantissa product, before activation and zero point
  function automatic longint ref_scaled(int acc, int bias, int unsigned sh,
                                        int unsigned m, int s);
    int     a;
    longint t, u;
    a = acc + bias;
    if (s > 0) t = clamp64(longint'(a) * (longint'(1) << s), -64'sd2147483648, 64'sd2147483647);
    else       t = floor_pow2(longint'(a), -s);
    u = floor_pow2(t, int'(sh));
    return floor_pow2(u * longint'(m) + 64'sd2147483648, 32);
  endfunction

endpackage
