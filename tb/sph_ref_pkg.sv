// sph_ref_pkg: reference arithmetic for the testbenches.
//
// Everything here is computed in double-precision `real`, independently of the
// RTL operators: conversion between real and the 25-bit float format, the
// cubic-spline kernel, and the per-pair terms of both SPH stages. Each term
// comes with a bound, the product of the magnitudes of its factors, which the
// testbenches use to scale their tolerance (the hardware truncates to a 16-bit
// fraction at every operation).
package sph_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic logic [24:0] r2fp(real x);
    real a;
    int  e;
    logic s;
    logic [15:0] f;
    if (x == 0.0) return '0;
    s = (x < 0.0);
    a = s ? -x : x;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    f = 16'($rtoi((a - 1.0) * 65536.0));
    return {s, 8'(e + 127), f};
  endfunction

  function automatic real fp2r(logic [24:0] v);
    real m;
    int  e;
    if (v[23:16] == 0) return 0.0;
    m = 1.0 + real'(v[15:0]) / 65536.0;
    e = int'(v[23:16]) - 127;
    for (int k = 0; k < e; k++) m = m * 2.0;
    for (int k = 0; k > e; k--) m = m / 2.0;
    return v[24] ? -m : m;
  endfunction

  // Round a real to the 25-bit format and back.
  function automatic real q25(real x);
    return fp2r(r2fp(x));
  endfunction

  function automatic real fix2r(logic signed [63:0] v);
    return real'(v) / 4294967296.0;
  endfunction

  function automatic real ref_w(real q);
    if (q < 1.0) return 1.0 - 1.5 * q * q + 0.75 * q * q * q;
    if (q < 2.0) return 0.25 * (2.0 - q) ** 3;
    return 0.0;
  endfunction

  // (dw/dq)/q
  function automatic real ref_g(real q);
    if (q < 1.0) return -3.0 + 2.25 * q;
    if (q < 2.0) return -0.75 * (2.0 - q) ** 2 / q;
    return 0.0;
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // First stage. i: x y z vx vy vz h; j: the same plus m.
  // t: rho, rho div v, rho rot v (3), n; b: magnitude bounds; near2: q near 2.
  function automatic void ref_pipe1(input real i[7], input real j[8],
                                    output real t[6], output real b[6], output bit near2);
    real dx[3], dv[3], r2, h, q, m, w, g, gw, vr, vrb;
    h = 0.5 * (i[6] + j[6]);
    m = j[7];
    r2 = 0.0;
    vr = 0.0;
    vrb = 0.0;
    for (int k = 0; k < 3; k++) begin
      dx[k] = i[k] - j[k];
      dv[k] = j[3 + k] - i[3 + k];
      r2 += dx[k] * dx[k];
      vr += dv[k] * dx[k];
      vrb += rabs(dv[k] * dx[k]);
    end
    q = $sqrt(r2) / h;
    w = ref_w(q);
    g = ref_g(q);
    gw = m * g / (PI * h ** 5);
    t[0] = m * w / (PI * h ** 3);
    b[0] = m / (PI * h ** 3);
    t[1] = gw * vr;
    b[1] = rabs(m * 3.0 / (PI * h ** 5)) * vrb;
    t[2] = gw * (dv[1] * dx[2] - dv[2] * dx[1]);
    t[3] = gw * (dv[2] * dx[0] - dv[0] * dx[2]);
    t[4] = gw * (dv[0] * dx[1] - dv[1] * dx[0]);
    b[2] = rabs(m * 3.0 / (PI * h ** 5)) * (rabs(dv[1] * dx[2]) + rabs(dv[2] * dx[1]));
    b[3] = rabs(m * 3.0 / (PI * h ** 5)) * (rabs(dv[2] * dx[0]) + rabs(dv[0] * dx[2]));
    b[4] = rabs(m * 3.0 / (PI * h ** 5)) * (rabs(dv[0] * dx[1]) + rabs(dv[1] * dx[0]));
    t[5] = (q < 2.0) ? 1.0 : 0.0;
    b[5] = 0.0;
    near2 = (q > 1.999) && (q < 2.001);
  endfunction

  // Second stage. i: x y z vx vy vz h rho c A f; j: the same plus m.
  // t: dv/dt (3), du/dt; b: bounds; visc: viscosity active; near2: q near 2.
  function automatic void ref_pipe2(input real i[11], input real j[12], input real alpha,
                                    input real beta, output real t[4], output real b[4],
                                    output bit visc, output bit near2);
    real dx[3], dv[3], r2, h, c, rho, f, q, m, g, gw, vr, vrb, mu, pi_ij, cv, cu;
    h   = 0.5 * (i[6] + j[6]);
    rho = 0.5 * (i[7] + j[7]);
    c   = 0.5 * (i[8] + j[8]);
    f   = 0.5 * (i[10] + j[10]);
    m   = j[11];
    r2 = 0.0;
    vr = 0.0;
    vrb = 0.0;
    for (int k = 0; k < 3; k++) begin
      dx[k] = i[k] - j[k];
      dv[k] = i[3 + k] - j[3 + k];
      r2 += dx[k] * dx[k];
      vr += dv[k] * dx[k];
      vrb += rabs(dv[k] * dx[k]);
    end
    q  = $sqrt(r2) / h;
    g  = ref_g(q);
    gw = m * g / (PI * h ** 5);
    mu = h * vr / (r2 + 0.01 * h * h);
    visc = (vr <= 0.0);
    pi_ij = visc ? f * (-alpha * c * mu + beta * mu * mu) / rho : 0.0;
    cv = i[9] + j[9] + pi_ij;
    cu = i[9] + 0.5 * pi_ij;
    for (int k = 0; k < 3; k++) begin
      t[k] = -cv * gw * dx[k];
      b[k] = rabs(cv * gw * dx[k]) + rabs(gw) * rabs(dx[k]) * 1.0e-3 * (rabs(i[9]) + rabs(j[9]));
    end
    t[3] = cu * gw * vr;
    b[3] = rabs(cu * gw) * vrb + rabs(pi_ij * gw * vrb);
    near2 = (q > 1.999) && (q < 2.001);
  endfunction

endpackage
