// tb_ref_pkg: reference arithmetic for the testbenches.
//
// sin_ref/cos_ref recompute the Q1.14 table entries from $sin, and rotate_ref
// computes the rotation pipeline's result step by step in integer arithmetic
// (Q12.4 coordinates, products shifted right 14, round half up), so the
// testbenches can check the hardware bit-exactly. rotate_real gives the
// exact real-valued rotation for a tolerance check.
package tb_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic int sin_ref(int k);
    real s;
    int  v;
    s = 16384.0 * $sin(2.0 * PI * real'(k % 1024) / 1024.0);
    v = (s >= 0.0) ? int'($floor(s + 0.5)) : -int'($floor(-s + 0.5));
    if (v > 16383) v = 16383;
    if (v < -16384) v = -16384;
    return v;
  endfunction

  function automatic int cos_ref(int k);
    return sin_ref((k + 256) % 1024);
  endfunction

  // bit-level model of the five pipeline steps
  function automatic void rotate_ref(input int theta, cx, cy, x, y, output int ox, oy);
    int s, c, t0, t1, t2, t3, t4, t5;
    s  = sin_ref(theta);
    c  = cos_ref(theta);
    t0 = (x - cx) * 16;
    t1 = (y - cy) * 16;
    t2 = (t1 * -s) >>> 14;
    t3 = (t0 * c) >>> 14;
    t4 = (t0 * s) >>> 14;
    t5 = (t1 * c) >>> 14;
    ox = ((t2 + t3 + 8) >>> 4) + cx;
    oy = ((t4 + t5 + 8) >>> 4) + cy;
  endfunction

  function automatic void rotate_real(input int theta, cx, cy, x, y, output real ox, oy);
    real a;
    a  = 2.0 * PI * real'(theta) / 1024.0;
    ox = real'(x - cx) * $cos(a) - real'(y - cy) * $sin(a) + real'(cx);
    oy = real'(y - cy) * $cos(a) + real'(x - cx) * $sin(a) + real'(cy);
  endfunction

endpackage
