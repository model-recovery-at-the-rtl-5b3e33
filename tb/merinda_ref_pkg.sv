// merinda_ref_pkg: reference arithmetic for the testbenches, written
// independently of the RTL with plain integers. Values are Q3.12 codes held in
// int; rounding is half up, results saturate to [-32768, 32767].
package merinda_ref_pkg;

  function automatic int sat16(longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // floor division by 2^s for any sign
  function automatic longint floor_shift(longint v, int s);
    longint d;
    d = longint'(1) << s;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic int rmul(int a, int b);
    return sat16(floor_shift(longint'(a) * longint'(b) + 2048, 12));
  endfunction

  function automatic int rsum_to_fx(longint acc_q24);
    return sat16(floor_shift(acc_q24 + 2048, 12));
  endfunction

  // four-segment piecewise-linear sigmoid, see the design notes
  function automatic int rsig(int x);
    int ax, p;
    ax = (x < 0) ? -x : x;
    if (ax > 32767) ax = 32767;
    if (ax >= 20480)      p = 4096;
    else if (ax >= 9728)  p = 3456 + ax / 32;
    else if (ax >= 4096)  p = 2560 + ax / 8;
    else                  p = 2048 + ax / 4;
    return (x < 0) ? 4096 - p : p;
  endfunction

  function automatic int rtanh(int x);
    return 2 * rsig(sat16(2 * longint'(x))) - 4096;
  endfunction

  function automatic real to_real(int q);
    return real'(q) / 4096.0;
  endfunction

  function automatic int to_q(real r);
    return sat16(longint'($floor(r * 4096.0 + 0.5)));
  endfunction

  // softmax with the same exponent and division scheme as the hardware
  function automatic int rexp_q(int d);  // d <= 0, Q.12
    longint t; longint n; int f; int mant; int sh;
    t = floor_shift(longint'(d) * 5909, 12);
    n = floor_shift(t, 12);
    f = int'(t - n * 4096);
    mant = 4096 + f;
    sh = int'(-n);
    if (sh > 12) return 0;
    return mant >> sh;
  endfunction

endpackage
