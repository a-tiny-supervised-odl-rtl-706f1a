// odl_ref_pkg: bit-exact reference arithmetic for the ODL core testbenches.
//
// Written independently of the RTL with 64-bit integer arithmetic: Q16.16
// saturating add and multiply, the fixed-point divide, the 16-bit xorshift
// (shifts 7, 9, 8), the piecewise-linear sigmoid and the base-2 softmax
// exponential. Testbenches build their expected values from these.
package odl_ref_pkg;

  localparam longint ONE  = 65536;
  localparam longint MAXV = 64'sd2147483647;
  localparam longint MINV = -64'sd2147483648;

  function automatic int sat(longint v);
    if (v > MAXV) return int'(MAXV);
    if (v < MINV) return int'(MINV);
    return int'(v);
  endfunction

  function automatic int radd(int a, int b);
    return sat(longint'(a) + longint'(b));
  endfunction

  function automatic int rmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return sat((p + 32768) >>> 16);
  endfunction

  function automatic int rdiv(int a, int b);
    longint ma, mb, q;
    bit neg;
    neg = (a < 0) != (b < 0);
    ma  = (a < 0) ? -longint'(a) : longint'(a);
    mb  = (b < 0) ? -longint'(b) : longint'(b);
    if (mb == 0) return neg ? int'(MINV) : int'(MAXV);
    q = (ma <<< 16) / mb;
    if (q > MAXV) return neg ? int'(MINV) : int'(MAXV);
    return neg ? int'(-q) : int'(q);
  endfunction

  function automatic shortint unsigned rxs(shortint unsigned s);
    shortint unsigned t;
    t = s ^ 16'(s << 7);
    t = t ^ (t >> 9);
    t = t ^ 16'(t << 8);
    return t;
  endfunction

  // state -> weight: signed 16-bit value / 32768, in Q16.16
  function automatic int rxw(shortint unsigned s);
    return int'(shortint'(s)) * 2;
  endfunction

  function automatic int rsig(int x);
    longint ax, y;
    ax = (x < 0) ? -longint'(x) : longint'(x);
    if (ax > MAXV) ax = MAXV;
    if (ax >= 5 * ONE)            y = ONE;
    else if (ax >= 155648)        y = ax / 32 + 55296;
    else if (ax >= ONE)           y = ax / 8 + 40960;
    else                          y = ax / 4 + 32768;
    return int'((x < 0) ? ONE - y : y);
  endfunction

  function automatic int rexp(int z);
    longint y, kk, f;
    if (z >= 0) return int'(ONE);
    y  = rmul(z, 94548);
    kk = y >>> 16;              // floor
    f  = y - kk * ONE;
    if (-kk >= 31) return 0;
    return int'((ONE + f) >>> (-kk));
  endfunction

endpackage
