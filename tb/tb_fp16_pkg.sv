// tb_fp16_pkg -- testbench helpers: conversion between `real` and IEEE binary16
// bit patterns, written independently of the design's FP16 arithmetic so that
// reference values can be computed in double precision.
package tb_fp16_pkg;
  function automatic real h2r(logic [15:0] h);
    int  e;
    real m, r;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    r = m;
    if (e > 15) for (int i = 0; i < e - 15; i++) r = r * 2.0;
    else for (int i = 0; i < 15 - e; i++) r = r / 2.0;
    return h[15] ? -r : r;
  endfunction

  function automatic logic [15:0] r2h(real r);
    logic s;
    real  a;
    int   e, m;
    if (r == 0.0) return 16'h0000;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 15;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    m = int'((a - 1.0) * 1024.0);  // rounds to nearest
    if (m == 1024) begin m = 0; e++; end
    if (e <= 0) return 16'h0000;
    if (e >= 31) return {s, 15'h7C00};
    return {s, 5'(e), 10'(m)};
  endfunction

  function automatic real rabs(real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // |got - ref| <= rel * scale + abs_tol
  function automatic bit close(real got, real expv, real scale, real rel);
    return rabs(got - expv) <= rel * scale + 1.0e-3;
  endfunction
endpackage
