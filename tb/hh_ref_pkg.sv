// hh_ref_pkg: real-arithmetic Hodgkin-Huxley reference used by the
// testbenches. One call of hh_step advances a neuron by one forward-Euler step
// in the same order as the hardware (rates from V[t], gates updated, powers
// from the new gates, currents with V[t], then V), with dt = 2^-7 ms, the
// exact limits of the two 0/0 rate functions, and a spike when V crosses
// 0 mV upwards. hh_set1() and hh_set2() give the two parameter sets.
package hh_ref_pkg;
  localparam real DT = 1.0 / 128.0;

  typedef struct {
    real v, m, h, n;
  } hh_state_t;

  typedef struct {
    real e_na, e_k, e_l, g_na, g_k, g_l;
  } hh_params_t;

  function automatic hh_params_t hh_set1();
    hh_params_t p;
    p.e_na = 57.86; p.e_k = -75.76; p.e_l = -53.86; p.g_na = 130.0; p.g_k = 37.0; p.g_l = 0.6;
    return p;
  endfunction

  function automatic hh_params_t hh_set2();
    hh_params_t p;
    p.e_na = 55.0; p.e_k = -110.0; p.e_l = -95.0; p.g_na = 70.0; p.g_k = 8.0; p.g_l = 0.23;
    return p;
  endfunction

  function automatic hh_state_t hh_rest();
    hh_state_t s;
    s.v = -65.0; s.m = 0.0529; s.h = 0.5961; s.n = 0.3177;
    return s;
  endfunction

  function automatic real clip01(input real x);
    return x < 0.0 ? 0.0 : (x > 1.0 ? 1.0 : x);
  endfunction

  function automatic real vtrap(input real u);   // u / (1 - e^-u)
    if (u < 1.0/1024.0 && u > -1.0/1024.0) return 1.0 + u / 2.0;
    return u / (1.0 - $exp(-u));
  endfunction

  function automatic logic hh_step_p(inout hh_state_t s, input real i_ext, input hh_params_t p);
    real am, bm, ah, bh, an, bn, ina, ik, il, vn;
    logic spk;
    am = vtrap((s.v + 40.0) / 10.0);
    bm = 4.0 * $exp(-(s.v + 65.0) / 18.0);
    ah = 0.07 * $exp(-(s.v + 65.0) / 20.0);
    bh = 1.0 / (1.0 + $exp(-(s.v + 35.0) / 10.0));
    an = 0.1 * vtrap((s.v + 55.0) / 10.0);
    bn = 0.125 * $exp(-(s.v + 65.0) / 80.0);
    s.m = clip01(s.m + DT * (am * (1.0 - s.m) - bm * s.m));
    s.h = clip01(s.h + DT * (ah * (1.0 - s.h) - bh * s.h));
    s.n = clip01(s.n + DT * (an * (1.0 - s.n) - bn * s.n));
    ina = p.g_na * s.m * s.m * s.m * s.h * (s.v - p.e_na);
    ik  = p.g_k * s.n * s.n * s.n * s.n * (s.v - p.e_k);
    il  = p.g_l * (s.v - p.e_l);
    vn  = s.v + DT * (i_ext - ina - ik - il);
    spk = (s.v < 0.0) && (vn >= 0.0);
    s.v = vn;
    return spk;
  endfunction

  // parameter set 1, the design's default
  function automatic logic hh_step(inout hh_state_t s, input real i_ext);
    return hh_step_p(s, i_ext, hh_set1());
  endfunction
endpackage
