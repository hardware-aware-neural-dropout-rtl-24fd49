// tb_ref_pkg: reference arithmetic for the testbenches, written separately
// from the RTL: the xorshift32 random sequence, the per-lane seeding rule,
// the Q8.8 rescale with saturation, and the Masksembles mask formula.
package tb_ref_pkg;

  function automatic int unsigned ref_xs(int unsigned s);
    s = s ^ (s << 13);
    s = s ^ (s >> 17);
    s = s ^ (s << 5);
    return s;
  endfunction

  function automatic int unsigned ref_seed(int unsigned seed, int unsigned lane);
    int unsigned s;
    s = ref_xs((seed ^ (32'h9e3779b9 * (lane + 1))) | 1);
    return (s == 0) ? 1 : s;
  endfunction

  function automatic shortint ref_scale(shortint x, int unsigned scale);
    longint p;
    p = longint'(x) * longint'(scale);
    p = p >>> 8;
    if (p > 32767) p = 32767;
    if (p < -32768) p = -32768;
    return shortint'(p);
  endfunction

  function automatic bit ref_mask_bit(int unsigned seed, int unsigned idx, int unsigned p);
    int unsigned h;
    h = ref_xs(ref_seed(seed, idx));
    return (h >> 16) >= p;
  endfunction

endpackage
