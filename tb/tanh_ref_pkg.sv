// tanh_ref_pkg: reference model of the tanh unit for the testbenches.
//
// ref_tanh() computes, in 64-bit integer arithmetic, the result the unit is
// specified to give: control points round(tanh(i/8) * 2^13) taken from the
// simulator's $tanh, the cubic Catmull-Rom weights of the 10-bit fraction t
// rounded half up to tv_frac bits (the second weight as 2 minus the other
// three), the dot product halved and rounded half up to 13 bits, clamped to
// [0, 2^13 - 1], and the sign of x restored. The error of the unit against
// the true tanh is measured separately in each testbench with $tanh.
package tanh_ref_pkg;

  function automatic longint ref_point(int i);
    real v;
    v = $tanh(real'(i) / 8.0) * 8192.0;
    return (v >= 0.0) ? longint'($floor(v + 0.5)) : -longint'($floor(-v + 0.5));
  endfunction

  function automatic int ref_tanh(int x, int tv_frac);
    longint a, k, t, sh, y;
    longint w[4], q[4], pt[4];
    longint acc;
    a = (x < 0) ? -longint'(x) : longint'(x);
    if (a > 32767) a = 32767;
    k = a >> 10;
    t = a & 1023;
    // doubled Catmull-Rom weights at scale 2^30
    w[0] = -t*t*t + 2*t*t*1024 - t*(1 << 20);
    w[2] = -3*t*t*t + 4*t*t*1024 + t*(1 << 20);
    w[3] = t*t*t - t*t*1024;
    sh = 30 - longint'(tv_frac);
    foreach (q[i]) q[i] = 0;
    for (int i = 0; i < 4; i++)
      if (i != 1) q[i] = (w[i] + (longint'(1) << (sh - 1))) >>> sh;
    q[1] = (longint'(2) << tv_frac) - q[0] - q[2] - q[3];
    for (int i = 0; i < 4; i++) pt[i] = ref_point(int'(k) - 1 + i);
    acc = 0;
    for (int i = 0; i < 4; i++) acc += pt[i] * q[i];
    y = (acc + (longint'(1) << tv_frac)) >>> (tv_frac + 1);
    if (y < 0) y = 0;
    if (y > 8191) y = 8191;
    return (x < 0) ? -int'(y) : int'(y);
  endfunction

endpackage
