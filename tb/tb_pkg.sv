// tb_pkg: helpers shared by the testbenches: conversion between real numbers
// and the engine's 21-bit fixed-point format, random complex values and 2x2
// blocks, and 2x2 complex reference arithmetic in floating point.
package tb_pkg;
  import prep_pkg::*;

  function automatic fx_t to_fx(input real v);
    real s = v * real'(1 << F);
    if (s > 1048575.0)  s = 1048575.0;
    if (s < -1048576.0) s = -1048576.0;
    return fx_t'($rtoi(s + (s >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic real to_r(input fx_t v);
    return real'(v) / real'(1 << F);
  endfunction

  function automatic real rnd(input real lim);   // uniform in [-lim, lim]
    return lim * (real'($urandom_range(20000)) - 10000.0) / 10000.0;
  endfunction

  function automatic cplx_t mk(input real re, input real im);
    cplx_t c;
    c.re = to_fx(re);
    c.im = to_fx(im);
    return c;
  endfunction

  function automatic cplx_t rnd_c(input real lim);
    return mk(rnd(lim), rnd(lim));
  endfunction

  function automatic mat2_t rnd_m(input real lim);
    mat2_t m;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) m[i][j] = rnd_c(lim);
    return m;
  endfunction

  // 2x2 complex matrices as real arrays: [row][col][0 = re, 1 = im]
  typedef real rm_t [2][2][2];

  function automatic rm_t to_rm(input mat2_t m);
    rm_t r;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        r[i][j][0] = to_r(m[i][j].re);
        r[i][j][1] = to_r(m[i][j].im);
      end
    return r;
  endfunction

  function automatic rm_t rm_mul(input rm_t a, input rm_t b);
    rm_t r;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        r[i][j][0] = 0.0;
        r[i][j][1] = 0.0;
        for (int k = 0; k < 2; k++) begin
          r[i][j][0] += a[i][k][0] * b[k][j][0] - a[i][k][1] * b[k][j][1];
          r[i][j][1] += a[i][k][0] * b[k][j][1] + a[i][k][1] * b[k][j][0];
        end
      end
    return r;
  endfunction

  function automatic rm_t rm_herm(input rm_t a);
    rm_t r;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        r[i][j][0] = a[j][i][0];
        r[i][j][1] = -a[j][i][1];
      end
    return r;
  endfunction

  function automatic rm_t rm_inv(input rm_t a);   // general complex 2x2 inverse
    rm_t r;
    real dr, di, den, ir, ii;
    dr = a[0][0][0] * a[1][1][0] - a[0][0][1] * a[1][1][1] - (a[0][1][0] * a[1][0][0] - a[0][1][1] * a[1][0][1]);
    di = a[0][0][0] * a[1][1][1] + a[0][0][1] * a[1][1][0] - (a[0][1][0] * a[1][0][1] + a[0][1][1] * a[1][0][0]);
    den = dr * dr + di * di;
    ir = dr / den;
    ii = -di / den;
    r[0][0][0] = a[1][1][0] * ir - a[1][1][1] * ii;   r[0][0][1] = a[1][1][0] * ii + a[1][1][1] * ir;
    r[1][1][0] = a[0][0][0] * ir - a[0][0][1] * ii;   r[1][1][1] = a[0][0][0] * ii + a[0][0][1] * ir;
    r[0][1][0] = -(a[0][1][0] * ir - a[0][1][1] * ii); r[0][1][1] = -(a[0][1][0] * ii + a[0][1][1] * ir);
    r[1][0][0] = -(a[1][0][0] * ir - a[1][0][1] * ii); r[1][0][1] = -(a[1][0][0] * ii + a[1][0][1] * ir);
    return r;
  endfunction

  // largest absolute difference between a block and a real reference
  function automatic real rm_err(input mat2_t m, input rm_t ref_m);
    real e = 0.0, d;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++)
        for (int p = 0; p < 2; p++) begin
          d = (p == 0 ? to_r(m[i][j].re) : to_r(m[i][j].im)) - ref_m[i][j][p];
          if (d < 0) d = -d;
          if (d > e) e = d;
        end
    return e;
  endfunction

  function automatic real rm_max(input rm_t a);
    real e = 0.0;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++)
        for (int p = 0; p < 2; p++)
          if ((a[i][j][p] < 0 ? -a[i][j][p] : a[i][j][p]) > e) e = (a[i][j][p] < 0 ? -a[i][j][p] : a[i][j][p]);
    return e;
  endfunction

  localparam real LSB = 1.0 / real'(1 << F);

endpackage
