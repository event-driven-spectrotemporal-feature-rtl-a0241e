// tb_fx_pkg: helpers shared by the testbenches: conversion between the
// Q7.24 fixed-point words of the design and real numbers, a tolerance
// compare, and a bit-exact integer reference of the fixed-point multiply
// and divide used by the end-to-end reference models.
package tb_fx_pkg;
  localparam real SCALE = 16777216.0;  // 2^24

  function automatic real to_r(logic signed [31:0] x);
    return $itor(x) / SCALE;
  endfunction

  function automatic logic signed [31:0] to_fx(real r);
    return 32'($rtoi(r * SCALE));
  endfunction

  function automatic bit near(real a, real b, real tol);
    real d;
    d = a - b;
    if (d < 0.0) d = -d;
    return d <= tol;
  endfunction

  function automatic longint urand_range(longint lo, longint hi);
    return lo + longint'($urandom % (hi - lo + 1));
  endfunction

  // random real in [lo, hi]
  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * ($itor($urandom % 1000001) / 1000000.0);
  endfunction

  // bit-exact references of the design's fixed-point operators
  function automatic int m(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 24);
  endfunction

  function automatic int dv(int n, int d);
    longint q;
    if (d <= 0) return 32'h7fffffff;
    q = (longint'(n) <<< 24) / longint'(d);
    return int'(q);
  endfunction
endpackage
