// tb_ccim_ref_pkg: reference arithmetic for the testbenches, written from the
// number format alone (integer products of signed-magnitude operands), not
// from the RTL structure.
//   top(a,b)   - the DCIM part of |a|*|b| in units of 2^11: the contribution
//                of magnitude bits 6 and 5 minus their 2^10 cross term
//   trunc(a,b) - the dropped partial products with bit weight <= 2^3
//   acim(a,b)  - |a|*|b| - 2048*top - trunc
// and the expected lane result: D_POS, D_NEG, round-to-nearest ADC code and
// the saturated 8-bit sum.
package tb_ccim_ref_pkg;

  function automatic int mag(logic [7:0] x);
    return int'(x[6:0]);
  endfunction

  function automatic int top(logic [7:0] a, logic [7:0] b);
    int ah, bh, a5b5;
    ah   = int'(a[6]) * 64 + int'(a[5]) * 32;
    bh   = int'(b[6]) * 64 + int'(b[5]) * 32;
    a5b5 = int'(a[5] & b[5]) * 1024;
    return (ah * bh - a5b5) / 2048;
  endfunction

  function automatic int trunc(logic [7:0] a, logic [7:0] b);
    int t = 0;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4 - i; j++)
        if (a[i] && b[j]) t += 1 << (i + j);
    return t;
  endfunction

  function automatic int acim(logic [7:0] a, logic [7:0] b);
    return mag(a) * mag(b) - 2048 * top(a, b) - trunc(a, b);
  endfunction

  function automatic bit is_neg(logic [7:0] a, logic [7:0] b, bit negate);
    return bit'(a[7] ^ b[7] ^ negate);
  endfunction

  // floor((q + 1024) / 2048) clamped to the 7-bit signed range
  function automatic int adc_code(int q);
    int c = (q + 1024) >>> 11;
    if (c > 63)  c = 63;
    if (c < -64) c = -64;
    return c;
  endfunction

  function automatic int sat8(int v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  // exact signed product, used for the accuracy bound
  function automatic int exact(logic [7:0] a, logic [7:0] b, bit negate);
    return is_neg(a, b, negate) ? -(mag(a) * mag(b)) : mag(a) * mag(b);
  endfunction

  typedef logic [7:0] ops16_t [16];

  // expected CIMO of a 16-unit lane
  function automatic int lane_cimo(ops16_t a, ops16_t b, logic [15:0] ng);
    int dp = 0, dn = 0, q = 0;
    for (int u = 0; u < 16; u++)
      if (is_neg(a[u], b[u], ng[u])) begin
        dn += top(a[u], b[u]); q -= acim(a[u], b[u]);
      end else begin
        dp += top(a[u], b[u]); q += acim(a[u], b[u]);
      end
    return sat8(dp - dn + adc_code(q));
  endfunction

  // exact signed dot product of a 16-unit lane
  function automatic int lane_exact(ops16_t a, ops16_t b, logic [15:0] ng);
    int s = 0;
    for (int u = 0; u < 16; u++) s += exact(a[u], b[u], ng[u]);
    return s;
  endfunction

  // signed value of an SMF operand
  function automatic int smf_val(logic [7:0] x);
    return x[7] ? -int'(x[6:0]) : int'(x[6:0]);
  endfunction

  // SMF encoding of -127..127
  function automatic logic [7:0] to_smf(int v);
    return (v < 0) ? {1'b1, 7'(-v)} : {1'b0, 7'(v)};
  endfunction

endpackage
