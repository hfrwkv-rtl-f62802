// tb_ref_pkg: reference models used by the testbenches. They restate the
// arithmetic of the design in plain integer/real form, written independently
// of the RTL, so that the testbenches can predict exact or bounded results.
package tb_ref_pkg;

  function automatic int sat9(input longint v);
    if (v > 255) return 255;
    if (v < -255) return -255;
    return int'(v);
  endfunction

  // Delta-PoT product: sign-magnitude, value in units of 1/512
  function automatic int ref_dpot(input int x, input int w);
    int mag, s0, s1, s2, units;
    longint p;
    bit neg;
    mag = (x < 0) ? -x : x;
    neg = (x < 0) ^ w[8];
    if (w[7:6] == 0) return 0;
    s0 = w[7:6];
    s1 = s0 + w[4:3];
    s2 = s1 + w[1:0];
    units = 2 * ((512 >> s0) + (w[5] ? (512 >> s1) : 0) + (w[2] ? (512 >> s2) : 0));
    p = (longint'(mag) * units) / 512;
    if (p > 255) p = 255;
    return neg ? -int'(p) : int'(p);
  endfunction

  function automatic int msb_pos(input longint unsigned v);
    for (int b = 63; b >= 0; b--) if (v[b]) return b;
    return -1;
  endfunction

  // Division model: 4 bits after the leading one, table round(128*x/y)
  function automatic int ref_div(input int x, input int y, input int qfrac);
    int k1, k2, i, j, f, e;
    longint q;
    if (y == 0) return 65535;
    if (x == 0) return 0;
    k1 = msb_pos(x); k2 = msb_pos(y);
    i = (k1 >= 4) ? ((x >> (k1 - 4)) & 15) : ((x << (4 - k1)) & 15);
    j = (k2 >= 4) ? ((y >> (k2 - 4)) & 15) : ((y << (4 - k2)) & 15);
    f = $rtoi(128.0 * (16.0 + i) / (16.0 + j) + 0.5);
    e = k1 - k2 + qfrac - 7;
    q = (e >= 0) ? (longint'(f) << e) : (longint'(f) >> (-e));
    return (q > 65535) ? 65535 : int'(q);
  endfunction

  // exp in Q8.8 as a real reference
  function automatic real real_exp_q88(input int x);
    return 256.0 * $exp(real'(x) / 256.0);
  endfunction

  // piecewise-linear sigmoid of the paper (real), result in Q8.8 units
  function automatic real real_sig_q88(input int x);
    real a, f;
    a = (x < 0 ? -real'(x) : real'(x)) / 256.0;
    if (a >= 5.0)        f = 1.0;
    else if (a >= 2.375) f = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   f = 0.125 * a + 0.625;
    else                 f = 0.25 * a + 0.5;
    if (x < 0) f = 1.0 - f;
    return 256.0 * f;
  endfunction

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage
