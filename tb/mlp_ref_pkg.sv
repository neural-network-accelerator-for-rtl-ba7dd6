// mlp_ref_pkg: bit-true reference arithmetic for the testbenches.
//
// Written with plain integer division instead of shifts so that it does not share
// its formulation with the RTL: a sum with extra fraction bits is divided by
// 2**shift rounding toward minus infinity, clipped to the signed range of the
// target width, and, for a ReLU layer, negatives become zero.
package mlp_ref_pkg;

  // floor(a / 2**s) for any sign of a
  function automatic longint floor_div_pow2(longint a, int s);
    longint d = longint'(1) << s;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  // requantise: returns the value, reports saturation and ReLU clamping
  function automatic longint requant(longint acc, int shift, int w, bit relu,
                                     output bit sat, output bit clamp);
    longint v    = floor_div_pow2(acc, shift);
    longint maxv = (longint'(1) << (w - 1)) - 1;
    longint minv = -(longint'(1) << (w - 1));
    sat   = 1'b0;
    clamp = 1'b0;
    if (relu && v < 0) begin
      clamp = 1'b1;
      return 0;
    end
    if (v > maxv) begin sat = 1'b1; return maxv; end
    if (v < minv) begin sat = 1'b1; return minv; end
    return v;
  endfunction

  // a random signed w-bit value; with probability 1/small_div drawn over the full
  // range, otherwise over a quarter of it
  function automatic longint rand_signed(int w, int big_pct);
    longint span = longint'(1) << (w - 1);
    longint r;
    if (($urandom % 100) < big_pct) r = longint'($urandom % (2 * span)) - span;
    else                            r = longint'($urandom % (span / 2)) - span / 4;
    return r;
  endfunction

  // sign-extend the low w bits of v
  function automatic longint sext(longint v, int w);
    longint m = longint'(1) << (w - 1);
    longint t = v & ((longint'(1) << w) - 1);
    return (t ^ m) - m;
  endfunction

endpackage
