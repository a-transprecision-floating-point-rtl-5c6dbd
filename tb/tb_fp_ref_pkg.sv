// tb_fp_ref_pkg: reference model for the testbenches.
//
// Works through the simulator's double-precision `real`: a small-format
// operand is widened to a double exactly, the operation is done in double,
// and the result is rounded to the target format by rnd_fp(), which works
// on the double's bit fields (round to nearest, ties to even, denormals,
// overflow to infinity, canonical quiet NaN). Sums, differences and
// products of formats with at most 24 significand bits round correctly this
// way, since double has more than 2p+2 significand bits, so rounding twice
// gives the same result as rounding once. Nothing here shares code with the
// RTL, which works on integer significands.
package tb_fp_ref_pkg;

  function automatic real pow2(int k);
    return $bitstoreal({1'b0, 11'(k + 1023), 52'd0});
  endfunction

  function automatic longint unsigned qnan(int e, int m);
    return ((longint'(1) << e) - 1) << m | (longint'(1) << (m - 1));
  endfunction

  function automatic longint unsigned inf(int e, int m, bit s);
    return (longint'(s) << (e + m)) | (((longint'(1) << e) - 1) << m);
  endfunction

  function automatic bit is_nan(longint unsigned x, int e, int m);
    longint unsigned ef = (x >> m) & ((longint'(1) << e) - 1);
    longint unsigned mf = x & ((longint'(1) << m) - 1);
    return (ef == (longint'(1) << e) - 1) && (mf != 0);
  endfunction

  // exact value of a format-(e,m) bit pattern (NaN -> a double NaN)
  function automatic real to_real(longint unsigned x, int e, int m);
    bit s;
    longint unsigned ef, mf;
    int bias;
    real v;
    s  = x[e + m];
    ef = (x >> m) & ((longint'(1) << e) - 1);
    mf = x & ((longint'(1) << m) - 1);
    bias = (1 << (e - 1)) - 1;
    if (ef == (longint'(1) << e) - 1)
      return $bitstoreal(mf != 0 ? 64'h7FF8_0000_0000_0000 :
                         {s, 63'h7FF0_0000_0000_0000});
    if (ef == 0) v = real'(mf) * pow2(1 - bias - m);
    else         v = real'(mf + (longint'(1) << m)) * pow2(int'(ef) - bias - m);
    return s ? -v : v;
  endfunction

  // round a double to format (e,m)
  function automatic longint unsigned rnd_fp(real r, int e, int m);
    logic [63:0] b;
    bit s;
    int E, ue, bias, emin, emax, shift;
    longint unsigned mant, q, rem, half, res;
    bit up;
    b = $realtobits(r);
    s = b[63];
    E = int'(b[62:52]);
    if (E == 2047) return (b[51:0] != 0) ? qnan(e, m) : inf(e, m, s);
    if (E == 0) return longint'(s) << (e + m);
    bias = (1 << (e - 1)) - 1;
    emin = 1 - bias;
    emax = bias;
    ue   = E - 1023;
    mant = {12'd1, b[51:0]};
    if (ue > emax + 1) return inf(e, m, s);
    if (ue >= emin) shift = 52 - m;
    else            shift = 52 - m + (emin - ue);
    if (shift > 54) return longint'(s) << (e + m);
    q    = mant >> shift;
    rem  = mant & ((longint'(1) << shift) - 1);
    half = longint'(1) << (shift - 1);
    up   = (rem > half) || (rem == half && q[0]);
    if (ue >= emin) res = (longint'(ue + bias) << m) + (q - (longint'(1) << m)) + longint'(up);
    else            res = q + longint'(up);
    if (res >= (((longint'(1) << e) - 1) << m)) return inf(e, m, s);
    return (longint'(s) << (e + m)) | res;
  endfunction

  function automatic longint unsigned ref_add(longint unsigned a, longint unsigned b,
                                              bit sub, int e, int m);
    real ra, rb, r;
    if (is_nan(a, e, m) || is_nan(b, e, m)) return qnan(e, m);
    ra = to_real(a, e, m);
    rb = to_real(b, e, m);
    if (sub) rb = -rb;
    r = ra + rb;
    if (r == 0.0 && !(ra == 0.0 && rb == 0.0 && a[e+m] && (b[e+m] ^ sub)))
      return 0;  // exact zero is +0 unless -0 + -0
    return rnd_fp(r, e, m);
  endfunction

  function automatic longint unsigned ref_mul(longint unsigned a, longint unsigned b,
                                              int e, int m);
    real r;
    if (is_nan(a, e, m) || is_nan(b, e, m)) return qnan(e, m);
    r = to_real(a, e, m) * to_real(b, e, m);
    if (r == 0.0) return longint'(a[e+m] ^ b[e+m]) << (e + m);
    return rnd_fp(r, e, m);
  endfunction

  function automatic longint unsigned ref_f2f(longint unsigned a, int ei, int mi,
                                              int eo, int mo);
    if (is_nan(a, ei, mi)) return qnan(eo, mo);
    return rnd_fp(to_real(a, ei, mi), eo, mo);
  endfunction

  // float -> iw-bit integer, round to nearest even, saturating
  function automatic longint unsigned ref_f2i(longint unsigned a, int e, int m,
                                              int iw, bit sgn);
    real r, fl, d, lo, hi;
    longint v;
    lo = sgn ? -pow2(iw - 1) : 0.0;
    hi = sgn ? pow2(iw - 1) - 1.0 : pow2(iw) - 1.0;
    if (is_nan(a, e, m)) r = hi;
    else begin
      r  = to_real(a, e, m);
      fl = $floor(r);
      d  = r - fl;
      if (d > 0.5 || (d == 0.5 && $floor(fl / 2.0) * 2.0 != fl)) r = fl + 1.0;
      else r = fl;
      if (r < lo) r = lo;
      if (r > hi) r = hi;
    end
    v = longint'(r);
    return longint'(v) & ((iw == 64) ? -1 : ((longint'(1) << iw) - 1));
  endfunction

  function automatic longint unsigned ref_i2f(longint unsigned a, int iw, bit sgn,
                                              int e, int m);
    longint v;
    v = longint'(a & ((longint'(1) << iw) - 1));
    if (sgn && a[iw-1]) v = v - (longint'(1) << iw);
    if (v == 0) return 0;
    return rnd_fp(real'(v), e, m);
  endfunction

  // random operand of format (e,m) with extra weight on special values
  function automatic longint unsigned rand_fp(int e, int m);
    longint unsigned ones_e = (longint'(1) << e) - 1;
    longint unsigned x = {$urandom, $urandom} & ((longint'(1) << (e + m + 1)) - 1);
    int unsigned k = $urandom_range(0, 19);
    case (k)
      0: x = x & (longint'(1) << (e + m));                    // +-0
      1: x = (x & (longint'(1) << (e + m))) | (ones_e << m);  // +-inf
      2: x = (x & ~(ones_e << m)) | (ones_e << m) | 1;        // NaN
      3: x = x & ~(ones_e << m);                              // denormal
      4: x = (x & ~(ones_e << m)) | (longint'(1) << m);       // smallest normals
      5: x = (x & ~(ones_e << m)) | ((ones_e - 1) << m);      // largest binade
      default: ;
    endcase
    return x;
  endfunction

  // random operand near a (for cancellation and equal-exponent cases)
  function automatic longint unsigned near(longint unsigned a, int e, int m);
    longint unsigned x = a ^ longint'($urandom_range(0, 7));
    if ($urandom_range(0, 1)) x = x ^ (longint'(1) << (e + m));
    return x;
  endfunction

endpackage
