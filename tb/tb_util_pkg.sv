// tb_util_pkg -- real-number helpers shared by the testbenches: conversion
// to and from Q16.16, quaternion and rotation arithmetic in double
// precision, and a tolerance compare.  The reference values of every
// testbench are computed with these functions, independently of the RTL.
package tb_util_pkg;
  import slam_pkg::*;

  function automatic fx_t to_fx(input real r);
    return fx_t'($rtoi(r * 65536.0 + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  function automatic real fr(input fx_t v);
    return $itor(v) / 65536.0;
  endfunction

  function automatic bit near(input real a, input real b, input real tol);
    real d;
    d = a - b;
    if (d < 0.0) d = -d;
    return d <= tol;
  endfunction

  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * ($itor($urandom % 1000000) / 1000000.0);
  endfunction

  typedef real rq_t [4];     // w, x, y, z
  typedef real rv_t [3];
  typedef real rm_t [3][3];

  function automatic rq_t rq_norm(input rq_t q);
    real n;
    rq_t o;
    n = $sqrt(q[0]*q[0] + q[1]*q[1] + q[2]*q[2] + q[3]*q[3]);
    for (int i = 0; i < 4; i++) o[i] = q[i] / n;
    return o;
  endfunction

  function automatic rq_t rq_rand();
    rq_t q;
    q[0] = urand(0.5, 1.0);
    for (int i = 1; i < 4; i++) q[i] = urand(-0.5, 0.5);
    return rq_norm(q);
  endfunction

  function automatic rq_t rq_mul(input rq_t a, input rq_t b);
    rq_t r;
    r[0] = a[0]*b[0] - a[1]*b[1] - a[2]*b[2] - a[3]*b[3];
    r[1] = a[0]*b[1] + a[1]*b[0] + a[2]*b[3] - a[3]*b[2];
    r[2] = a[0]*b[2] - a[1]*b[3] + a[2]*b[0] + a[3]*b[1];
    r[3] = a[0]*b[3] + a[1]*b[2] - a[2]*b[1] + a[3]*b[0];
    return r;
  endfunction

  function automatic rq_t rq_conj(input rq_t a);
    rq_t r;
    r[0] = a[0]; r[1] = -a[1]; r[2] = -a[2]; r[3] = -a[3];
    return r;
  endfunction

  // rotation by quaternion: v' = q v q^*
  function automatic rv_t rq_rot(input rq_t q, input rv_t v);
    rq_t p, t;
    rv_t o;
    p[0] = 0.0; p[1] = v[0]; p[2] = v[1]; p[3] = v[2];
    t = rq_mul(rq_mul(q, p), rq_conj(q));
    o[0] = t[1]; o[1] = t[2]; o[2] = t[3];
    return o;
  endfunction

  function automatic quat_t q_fx(input rq_t q);
    quat_t o;
    o.w = to_fx(q[0]); o.x = to_fx(q[1]); o.y = to_fx(q[2]); o.z = to_fx(q[3]);
    return o;
  endfunction

  function automatic vec3_t v_fx(input rv_t v);
    vec3_t o;
    o.x = to_fx(v[0]); o.y = to_fx(v[1]); o.z = to_fx(v[2]);
    return o;
  endfunction

  function automatic real vfr(input vec3_t v, input int i);
    return fr((i == 0) ? v.x : (i == 1) ? v.y : v.z);
  endfunction
endpackage
