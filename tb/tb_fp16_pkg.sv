// Reference binary16 helpers for the testbenches: conversion to and from
// real, and a fused multiply-add computed in double precision and rounded
// once to binary16 (round to nearest even). Values below the binary16 normal
// range are flushed to zero, matching the datapath under test. Exact for
// operands whose product and sum fit in 53 bits, which the tests ensure by
// keeping exponents in a moderate range.
package tb_fp16_pkg;
  function automatic real fp16_to_real(input logic [15:0] h);
    int e;
    real m, r;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    r = m * (2.0 ** (e - 15));
    return h[15] ? -r : r;
  endfunction

  function automatic logic [15:0] real_to_fp16(input real r);
    logic s;
    real a, m, fl, fr;
    int e;
    longint unsigned q;
    s = r < 0.0;
    a = s ? -r : r;
    if (a == 0.0) return 16'h0000;
    e = 0;
    while (a >= 2.0 ** (e + 1)) e++;
    while (a < 2.0 ** e) e--;
    m  = a / (2.0 ** e) * 1024.0;       // in [1024, 2048)
    fl = real'(longint'(m));
    if (fl > m) fl = fl - 1.0;
    fr = m - fl;
    q  = longint'(fl);
    if (fr > 0.5 || (fr == 0.5 && q[0])) q++;
    if (q == 2048) begin q = 1024; e++; end
    if (e > 15)  return {s, 5'h1f, 10'h0};
    if (e < -14) return {s, 15'h0};
    return {s, 5'(e + 15), q[9:0]};
  endfunction

  function automatic logic [15:0] fma_ref(input logic [15:0] a, input logic [15:0] b,
                                          input logic [15:0] c);
    return real_to_fp16(fp16_to_real(a) * fp16_to_real(b) + fp16_to_real(c));
  endfunction

  // random normal binary16 with exponent field in [elo, ehi]
  function automatic logic [15:0] rand_fp16(input int elo, input int ehi);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(elo + int'($urandom % (ehi - elo + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction
endpackage
