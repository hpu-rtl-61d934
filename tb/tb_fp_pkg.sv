// tb_fp_pkg -- helpers for the testbenches: conversion of binary16/binary32
// bit patterns to real numbers, random binary16 operands, and a tolerance
// compare.  The reference results of the testbenches are computed in real
// (double precision) arithmetic with these, independently of the RTL's own
// floating-point functions.
package tb_fp_pkg;

  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real f16_real(logic [15:0] h);
    real m;
    if (h[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    return (h[15] ? -m : m) * pow2(int'(h[14:10]) - 15);
  endfunction

  function automatic real f32_real(logic [31:0] f);
    real m;
    if (f[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    return (f[31] ? -m : m) * pow2(int'(f[30:23]) - 127);
  endfunction

  // random binary16 with biased exponent in [emin, emax]
  function automatic logic [15:0] rand_f16(int emin, int emax);
    logic [15:0] h;
    h[15]    = 1'($urandom_range(0, 1));
    h[14:10] = 5'($urandom_range(emin, emax));
    h[9:0]   = 10'($urandom_range(0, 1023));
    return h;
  endfunction

  function automatic bit close(real got, real want, real tol);
    real d;
    d = got - want;
    if (d < 0.0) d = -d;
    return d <= tol * (1.0 + (want < 0.0 ? -want : want));
  endfunction

endpackage
