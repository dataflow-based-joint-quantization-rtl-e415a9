// jq_ref_pkg: reference arithmetic for the joint-quantization testbenches.
//
// These functions restate the integer scheme with plain 64-bit arithmetic
// and explicit floor division, independently of the shifts used in the RTL:
//   round-to-nearest division by 2^s  : floor((d + 2^(s-1)) / 2^s)
//   alignment by a signed shift k     : d * 2^k for k >= 0, the rounded
//                                       division above for k < 0
//   quantization                      : rounded division, then clipping to
//                                       the signed or unsigned n-bit range.
package jq_ref_pkg;

  function automatic longint pow2(int k);
    longint r = 1;
    for (int i = 0; i < k; i++) r = r * 2;
    return r;
  endfunction

  function automatic longint floor_div(longint a, longint b);
    if (a >= 0) return a / b;
    return -((-a + b - 1) / b);
  endfunction

  function automatic longint round_div_pow2(longint d, int s);
    if (s == 0) return d;
    return floor_div(d + pow2(s - 1), pow2(s));
  endfunction

  function automatic longint sat(longint v, longint lo, longint hi);
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  function automatic longint sat32(longint v);
    return sat(v, -pow2(31), pow2(31) - 1);
  endfunction

  function automatic longint align_ref(longint d, int k);
    if (k >= 0) return sat32(d * pow2(k));
    return sat32(round_div_pow2(d, -k));
  endfunction

  // Returns the clipped integer (not yet truncated to 8 bits).
  function automatic longint quant_ref(longint d, int s, int n, bit uns);
    longint lo, hi;
    if (n < 2) n = 2;
    if (n > 8) n = 8;
    if (uns) begin lo = 0; hi = pow2(n) - 1; end
    else     begin lo = -pow2(n - 1); hi = pow2(n - 1) - 1; end
    return sat(round_div_pow2(d, s), lo, hi);
  endfunction

  // 32-bit two's complement wrap of a 64-bit value.
  function automatic longint wrap32(longint v);
    logic [31:0] t;
    t = v[31:0];
    return longint'($signed(t));
  endfunction

endpackage
