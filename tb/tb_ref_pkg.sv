// tb_ref_pkg -- reference arithmetic for the testbenches, in real numbers.
//
// The testbenches compute the expected outputs of the emulator from the
// model equations directly, with real arithmetic and no intermediate
// rounding, and accept the hardware result within a few LSBs.
package tb_ref_pkg;
  import dp_pkg::*;

  typedef struct {
    real re;
    real im;
  } rc_t;

  function automatic rc_t rc(input real re, input real im);
    rc_t r;
    r.re = re;
    r.im = im;
    return r;
  endfunction

  function automatic rc_t to_rc(input cplx_t x);
    return rc(real'(x.re), real'(x.im));
  endfunction

  // weight in Q2.14 as a real number
  function automatic rc_t w_rc(input cwgt_t w);
    return rc(real'(w.re) / 16384.0, real'(w.im) / 16384.0);
  endfunction

  function automatic rc_t rc_add(input rc_t a, input rc_t b);
    return rc(a.re + b.re, a.im + b.im);
  endfunction

  function automatic rc_t rc_mul(input rc_t a, input rc_t b);
    return rc(a.re * b.re - a.im * b.im, a.re * b.im + a.im * b.re);
  endfunction

  function automatic rc_t rc_scale(input rc_t a, input real s);
    return rc(a.re * s, a.im * s);
  endfunction

  // Quadratic-spline fractional-delay tap j (0..3) for fraction mu:
  // taps apply to x(t-n+1), x(t-n), x(t-n-1), x(t-n-2).
  function automatic real spline_tap(input int j, input real mu);
    case (j)
      0, 3:    return 0.5 * (mu * mu - mu);
      1:       return 1.0 - 0.5 * mu - 0.5 * mu * mu;
      default: return 1.5 * mu - 0.5 * mu * mu;
    endcase
  endfunction

  function automatic bit close(input cplx_t got, input rc_t exp_v, input real tol);
    real dr, di;
    dr = real'(got.re) - exp_v.re;
    di = real'(got.im) - exp_v.im;
    if (dr < 0) dr = -dr;
    if (di < 0) di = -di;
    return (dr <= tol) && (di <= tol);
  endfunction

  function automatic cplx_t rand_smp(input int amp);
    cplx_t x;
    x.re = smp_t'($signed($urandom_range(2 * amp, 0)) - amp);
    x.im = smp_t'($signed($urandom_range(2 * amp, 0)) - amp);
    return x;
  endfunction

  function automatic cwgt_t rand_wgt(input int amp);
    cwgt_t w;
    w.re = wgt_t'($signed($urandom_range(2 * amp, 0)) - amp);
    w.im = wgt_t'($signed($urandom_range(2 * amp, 0)) - amp);
    return w;
  endfunction
endpackage
