// tb_mppi_ref_pkg: real-valued (double precision) reference models used by
// the testbenches: the kinematic bicycle Euler step, the quadratic costs,
// the Box-Muller transform, xorshift32 and conversions to/from Q16.16. They
// are written from the equations, independently of the fixed-point RTL.
package tb_mppi_ref_pkg;
  import mppi_pkg::*;

  typedef struct {
    real x, y, th, v;
  } rstate_t;

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic real r_of(fx_t a);
    return real'(a) / 65536.0;
  endfunction

  function automatic fx_t fx_of(real a);
    return fx_t'($rtoi(a * 65536.0 + ((a < 0) ? -0.5 : 0.5)));
  endfunction

  function automatic rstate_t rs_of(state_t s);
    rstate_t r;
    r.x = r_of(s.x); r.y = r_of(s.y); r.th = r_of(s.th); r.v = r_of(s.v);
    return r;
  endfunction

  function automatic state_t st_of(rstate_t r);
    state_t s;
    s.x = fx_of(r.x); s.y = fx_of(r.y); s.th = fx_of(r.th); s.v = fx_of(r.v);
    return s;
  endfunction

  function automatic real wrap(real a);
    real pi = 3.14159265358979;
    while (a >= pi) a -= 2.0 * pi;
    while (a < -pi) a += 2.0 * pi;
    return a;
  endfunction

  function automatic rstate_t bicycle(rstate_t s, real steer, real accel, real dt, real inv_l);
    rstate_t n;
    real d;
    d = steer;
    if (d > 1.5) d = 1.5;
    if (d < -1.5) d = -1.5;
    n.x  = s.x + s.v * $cos(s.th) * dt;
    n.y  = s.y + s.v * $sin(s.th) * dt;
    n.th = wrap(s.th + s.v * $tan(d) * inv_l * dt);
    n.v  = s.v + accel * dt;
    return n;
  endfunction

  // (s - r)' diag(q) (s - r), heading error wrapped
  function automatic real qform(rstate_t s, rstate_t r, state_t q);
    real ex, ey, et, ev;
    ex = s.x - r.x; ey = s.y - r.y; et = wrap(s.th - r.th); ev = s.v - r.v;
    return r_of(q.x) * ex * ex + r_of(q.y) * ey * ey + r_of(q.th) * et * et + r_of(q.v) * ev * ev;
  endfunction

  function automatic logic [31:0] xs_next(logic [31:0] m);
    m ^= m << 13; m ^= m >> 17; m ^= m << 5;
    return m;
  endfunction

  // Box-Muller with Theta = pi * (u2 as signed fraction)
  function automatic void box_muller(logic [31:0] u1, logic [31:0] u2, output real zs, output real za);
    real r, th;
    r  = $sqrt(-2.0 * $ln(real'(u1) / 4294967296.0));
    th = 3.14159265358979 * real'(signed'(u2)) / 2147483648.0;
    zs = r * $sin(th);
    za = r * $cos(th);
  endfunction

  function automatic cfg_t default_cfg();
    cfg_t c;
    c.dt            = fx_of(0.05);
    c.inv_wheelbase = fx_of(1.0 / 0.33);
    c.inv_lambda    = fx_of(0.5);
    c.sigma_steer   = fx_of(0.3);
    c.sigma_accel   = fx_of(1.0);
    c.q.x  = fx_of(2.0);  c.q.y  = fx_of(2.0);  c.q.th  = fx_of(0.5); c.q.v  = fx_of(0.2);
    c.qf.x = fx_of(4.0);  c.qf.y = fx_of(4.0);  c.qf.th = fx_of(1.0); c.qf.v = fx_of(0.4);
    c.r.steer = fx_of(0.1); c.r.accel = fx_of(0.05);
    return c;
  endfunction
  // One MPPI iteration in double precision: nominal rollout with nearest
  // waypoints, K noisy rollouts with quadratic costs, exponential weights and
  // the weighted noise average, smoothed by a causal moving average over the
  // last sw steps (sw = 1: no smoothing). noise[k*n + t] is trajectory k's
  // sample at t.
  function automatic void mppi_iter(input cfg_t c, input state_t x0, input ctrl_t u[], input state_t wp[],
                                    input ctrl_t noise[], input int k_n, input int n,
                                    output real us[], output real ua[], output real jmin,
                                    input int sw = 1);
    rstate_t s, xr[];
    real j[], w[], sum, dt, il, ds[], da[];
    dt = r_of(c.dt); il = r_of(c.inv_wheelbase);
    xr = new[n + 1];
    j  = new[k_n];
    w  = new[k_n];
    us = new[n];
    ua = new[n];
    s = rs_of(x0);
    for (int t = 0; t <= n; t++) begin
      real bd, d;
      int best;
      bd = 1e300; best = 0;
      for (int m = 0; m < wp.size(); m++) begin
        d = (r_of(wp[m].x) - s.x) ** 2 + (r_of(wp[m].y) - s.y) ** 2;
        if (d < bd) begin bd = d; best = m; end
      end
      xr[t] = rs_of(wp[best]);
      if (t < n) s = bicycle(s, r_of(u[t].steer), r_of(u[t].accel), dt, il);
    end
    jmin = 1e300;
    for (int k = 0; k < k_n; k++) begin
      s = rs_of(x0);
      j[k] = 0;
      for (int t = 0; t < n; t++) begin
        real vs, va;
        vs = r_of(u[t].steer + noise[k*n + t].steer);
        va = r_of(u[t].accel + noise[k*n + t].accel);
        j[k] += qform(s, xr[t], c.q) + r_of(c.r.steer) * vs * vs + r_of(c.r.accel) * va * va;
        s = bicycle(s, vs, va, dt, il);
      end
      j[k] += qform(s, xr[n], c.qf);
      if (j[k] < jmin) jmin = j[k];
    end
    sum = 0;
    for (int k = 0; k < k_n; k++) begin
      w[k] = $exp(-(j[k] - jmin) * r_of(c.inv_lambda));
      sum += w[k];
    end
    ds = new[n];
    da = new[n];
    for (int t = 0; t < n; t++) begin
      ds[t] = 0; da[t] = 0;
      for (int k = 0; k < k_n; k++) begin
        ds[t] += w[k] / sum * r_of(noise[k*n + t].steer);
        da[t] += w[k] / sum * r_of(noise[k*n + t].accel);
      end
    end
    for (int t = 0; t < n; t++) begin
      int c;
      us[t] = 0; ua[t] = 0; c = 0;
      for (int i = t; i >= 0 && i > t - sw; i--) begin
        us[t] += ds[i]; ua[t] += da[i]; c++;
      end
      us[t] = r_of(u[t].steer) + us[t] / c;
      ua[t] = r_of(u[t].accel) + ua[t] / c;
    end
  endfunction
endpackage
