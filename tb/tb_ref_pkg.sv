// Reference arithmetic for the FlexiBit testbenches.
//
// Independent models of the element formats used by the design: an element
// of p bits holds, from bit 0 upward, a sign bit, e exponent bits (bias
// 2^(e-1)-1) and m = p-1-e mantissa bits with an implicit leading one; all
// zero exponent and mantissa bits encode zero. Values are computed in
// double precision, which is exact for the small formats the tests use.
package tb_ref_pkg;

  // 2^n for any integer n
  function automatic real pow2(input int n);
    real r;
    r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else        for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic int bias_of(input int e);
    return (e == 0) ? 0 : (1 << (e - 1)) - 1;
  endfunction

  function automatic real fp_decode(input int bits, input int p, input int e);
    int  s, ex, mn, m;
    real v;
    m  = p - 1 - e;
    s  = bits & 1;
    ex = (bits >> 1) & ((1 << e) - 1);
    mn = (bits >> (1 + e)) & ((1 << m) - 1);
    if (ex == 0 && mn == 0) return 0.0;
    ex = ex - bias_of(e);
    v = (1.0 + real'(mn) / real'(1 << m)) * pow2(ex);
    return s ? -v : v;
  endfunction

  // truncating conversion of an exact value into (po, eo) with saturation
  function automatic int fp_encode(input real v, input int po, input int eo);
    int  s, E, ev, emax, mo, mn;
    real a, f;
    mo = po - 1 - eo;
    if (v == 0.0) return 0;
    s = (v < 0.0);
    a = s ? -v : v;
    E = 0;
    while (a >= pow2(E + 1)) E++;
    while (a < pow2(E)) E--;
    ev   = E + bias_of(eo);
    emax = (1 << eo) - 1;
    if (ev < 0) return 0;
    f  = a / (pow2(E)) - 1.0;
    mn = int'($floor(f * real'(1 << mo)));
    if (ev > emax) begin
      ev = emax;
      mn = (1 << mo) - 1;
    end
    return s | (ev << 1) | (mn << (1 + eo));
  endfunction

  // sign-magnitude integers: bit 0 sign, bits 1.. magnitude
  function automatic int int_decode(input int bits, input int p);
    int mag;
    mag = (bits >> 1) & ((1 << (p - 1)) - 1);
    return (bits & 1) ? -mag : mag;
  endfunction

  function automatic int int_encode(input longint v, input int po);
    longint mag, mx;
    mx  = (64'sd1 <<< (po - 1)) - 1;
    mag = (v < 0) ? -v : v;
    if (mag > mx) mag = mx;
    if (mag == 0) return 0;
    return int'((mag << 1) | ((v < 0) ? 1 : 0));
  endfunction

  // random element of p bits that is a normal value or, rarely, zero
  function automatic int rand_elem(input int p);
    int r;
    r = int'($urandom) & ((1 << p) - 1);
    return r;
  endfunction

endpackage
