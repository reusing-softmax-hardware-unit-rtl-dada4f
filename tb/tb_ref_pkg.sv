// Real-valued reference models shared by the testbenches.
//
// Everything here is plain double-precision math, independent of the
// fixed-point datapath: conversion of Q16.16 / Q5.11 words to real, softmax
// by its definition, and GELU by its tanh form and by its erf definition.
package tb_ref_pkg;

  function automatic real fx2r(input logic signed [31:0] v);
    return real'(v) / 65536.0;
  endfunction

  function automatic real in2r(input logic signed [15:0] v);
    return real'(v) / 2048.0;
  endfunction

  function automatic real gelu_k(input real z);
    return $sqrt(2.0 / 3.14159265358979) * (z + 0.044715 * z * z * z);
  endfunction

  function automatic real gelu_tanh(input real z);
    return 0.5 * z * (1.0 + $tanh(gelu_k(z)));
  endfunction

  // erf by Abramowitz and Stegun 7.1.26 (absolute error below 1.5e-7).
  function automatic real erf_as(input real x);
    real t, e, sgn;
    sgn = (x < 0.0) ? -1.0 : 1.0;
    x   = (x < 0.0) ? -x : x;
    t   = 1.0 / (1.0 + 0.3275911 * x);
    e   = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t - 0.284496736) * t
                 + 0.254829592) * t * $exp(-x * x);
    return sgn * e;
  endfunction

  // GELU by its definition, 0.5 z (1 + erf(z / sqrt 2)).
  function automatic real gelu_erf(input real z);
    return 0.5 * z * (1.0 + erf_as(z / $sqrt(2.0)));
  endfunction

  function automatic real absr(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

  // Random Q5.11 input in [-lim, lim).
  function automatic logic signed [15:0] rand_in(input int lim);
    int r;
    r = int'($urandom_range(2 * lim * 2048 - 1, 0)) - lim * 2048;
    return 16'(r);
  endfunction

endpackage
