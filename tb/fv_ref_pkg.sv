// fv_ref_pkg: reference model of the finite volume update in the
// simulator's double-precision arithmetic, and helpers that make random but
// physically valid cells. Testbenches compare the hardware with it within a
// small relative tolerance, since the hardware evaluates the same formulas
// in a different order of rounding.
package fv_ref_pkg;
  import fp_pkg::*;
  import fv_pkg::*;

  localparam real GAMMA = 1.4;

  typedef struct {
    real rho, mu, mv, e;
  } rstate_t;

  function automatic real r(input fp_t x);
    return $bitstoreal(x);
  endfunction

  function automatic fp_t b(input real x);
    return $realtobits(x);
  endfunction

  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * (real'($urandom_range(1000000)) / 1000000.0);
  endfunction

  function automatic real pressure(input rstate_t s);
    return (GAMMA - 1.0) * (s.e - 0.5 * (s.mu * s.mu + s.mv * s.mv) / s.rho);
  endfunction

  function automatic real sound(input rstate_t s);
    return $sqrt(GAMMA * pressure(s) / s.rho);
  endfunction

  function automatic rstate_t to_r(input state_t s);
    rstate_t o;
    o.rho = r(s.rho); o.mu = r(s.mu); o.mv = r(s.mv); o.e = r(s.e);
    return o;
  endfunction

  function automatic state_t to_b(input rstate_t s);
    state_t o;
    o.rho = b(s.rho); o.mu = b(s.mu); o.mv = b(s.mv); o.e = b(s.e);
    return o;
  endfunction

  // A random cell state: density, velocity and pressure in a safe range.
  function automatic rstate_t rand_state();
    rstate_t s;
    real u, v, p;
    s.rho = urand(0.5, 2.0);
    u = urand(-1.0, 1.0);
    v = urand(-1.0, 1.0);
    p = urand(0.5, 2.0);
    s.mu = s.rho * u;
    s.mv = s.rho * v;
    s.e  = p / (GAMMA - 1.0) + 0.5 * s.rho * (u * u + v * v);
    return s;
  endfunction

  function automatic node_rec_t make_rec(input rstate_t s, input real area);
    node_rec_t n;
    n.u    = to_b(s);
    n.area = b(area);
    n.p    = b(pressure(s));
    n.c    = b(sound(s));
    return n;
  endfunction

  // Lax-Friedrichs flux through one face, rotated to x-y and times |n|.
  function automatic rstate_t face_flux(input rstate_t L, input rstate_t R,
                                        input real nx, input real ny, input real len);
    rstate_t f;
    real uL, vL, uR, vR, unL, unR, utL, utR, pL, pR, cL, cR, a;
    real frho, fn, ft, fe;
    uL = L.mu / L.rho; vL = L.mv / L.rho;
    uR = R.mu / R.rho; vR = R.mv / R.rho;
    unL = uL * nx + vL * ny;  utL = -uL * ny + vL * nx;
    unR = uR * nx + vR * ny;  utR = -uR * ny + vR * nx;
    pL = pressure(L); pR = pressure(R);
    cL = sound(L);    cR = sound(R);
    a  = ((unL + unR) < 0.0 ? -(unL + unR) : (unL + unR)) / 2.0 + (cL + cR) / 2.0;
    frho = (L.rho * unL + R.rho * unR) / 2.0 - a * (R.rho - L.rho) / 2.0;
    fn   = ((L.rho * unL * unL + pL) + (R.rho * unR * unR + pR)) / 2.0
           - a * (R.rho * unR - L.rho * unL) / 2.0;
    ft   = (L.rho * unL * utL + R.rho * unR * utR) / 2.0
           - a * (R.rho * utR - L.rho * utL) / 2.0;
    fe   = ((L.e + pL) * unL + (R.e + pR) * unR) / 2.0 - a * (R.e - L.e) / 2.0;
    f.rho = frho * len;
    f.mu  = (fn * nx - ft * ny) * len;
    f.mv  = (fn * ny + ft * nx) * len;
    f.e   = fe * len;
    return f;
  endfunction

  // Tolerance test: |got - exp| small against the size of the terms.
  function automatic bit close(input real got, input real exp, input real scale);
    real d;
    d = got - exp;
    if (d < 0.0) d = -d;
    return d <= 1e-9 * (scale + (exp < 0.0 ? -exp : exp));
  endfunction

endpackage
