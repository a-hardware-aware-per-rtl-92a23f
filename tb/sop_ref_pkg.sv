// sop_ref_pkg: reference arithmetic for the SOP testbenches.
//
// Exact integer models of what the matrix unit should compute: HIF
// shifted products, power-of-two scaling with rounding toward minus
// infinity, saturation to a signed width, and encoders that build scale
// words and sparse values from chosen fields (so expected values come from
// the fields, not from the decoders under test).
package sop_ref_pkg;

  typedef logic signed [159:0] big_t;

  // v * 2^s, rounding toward minus infinity when s < 0
  function automatic big_t pow2_mul(input big_t v, input int s);
    if (s >= 0) return v <<< s;
    if (s <= -159) return (v < 0) ? -1 : 0;
    return v >>> (-s);
  endfunction

  function automatic big_t sat(input big_t v, input int w);
    big_t mx, mn;
    mx = (big_t'(1) <<< (w - 1)) - 1;
    mn = -mx - 1;
    if (v > mx) return mx;
    if (v < mn) return mn;
    return v;
  endfunction

  function automatic bit in_range(input big_t v, input int w);
    return sat(v, w) == v;
  endfunction

  // HIF value as an integer: coef * 2^sh
  function automatic big_t hif_int(input int coef, input int sh);
    return big_t'(coef) <<< sh;
  endfunction

  // S1E5M5 scale word from fields: s eeeee mmmmm u
  function automatic logic [11:0] enc_s1e5m5(input int s, input int e, input int m, input int mu);
    return {1'(s), 5'(e), 5'(m), 1'(mu)};
  endfunction

  // integer significand (hidden bit included) and LSB exponent of an
  // S1E5M5 scale given its fields (bias 15, 5 mantissa bits)
  function automatic int s1e5m5_sig(input int e, input int m);
    return (e == 0) ? m : (32 + m);
  endfunction
  function automatic int s1e5m5_lsb_exp(input int e);
    return ((e == 0) ? 1 : e) - 15 - 5;
  endfunction

endpackage
