// fx_model_pkg: reference arithmetic for the testbenches, written from the
// formulas (wide integer arithmetic, floor shift, saturation) rather than from
// the RTL, so that the checks are independent of the blocks under test.
package fx_model_pkg;
  function automatic longint sat(input longint v, input int n);
    longint hi, lo;
    hi = (longint'(1) <<< (n - 1)) - 1;
    lo = -(longint'(1) <<< (n - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction
  // (a*b) >> frac with floor, saturated to n bits
  function automatic longint fmul(input longint a, input longint b, input int frac, input int n);
    longint p;
    p = a * b;
    return sat(p >>> frac, n);
  endfunction
  // quadratic derivative approximation on |x|, clamped to [0, 2^15-1]
  function automatic longint f1(input longint x, input longint a0, input longint a1, input longint a2);
    longint u, u2, t;
    u  = (x < 0) ? ((x == -32768) ? 32767 : -x) : x;
    u2 = fmul(u, u, 10, 16);
    t  = fmul(a1, u, 10, 16) + fmul(a2, u2, 10, 16) + a0;
    return (t < 0) ? 0 : (t > 32767) ? 32767 : t;
  endfunction
  function automatic longint rnd_s(input int bits);
    longint r;
    r = longint'($urandom) & ((longint'(1) << bits) - 1);
    if (r >= (longint'(1) << (bits - 1))) r -= (longint'(1) << bits);
    return r;
  endfunction
endpackage
