// tb_fp_pkg -- testbench helpers for binary32 values: conversion from and to
// the simulator's real type (written out through binary64, rounding to
// nearest) and a one-ulp comparison for results of the truncating units.
package tb_fp_pkg;
  function automatic logic [31:0] f2b(real r);
    logic [63:0] d;
    int e;
    logic [23:0] m;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]} + 24'(d[28]);
    if (m[23]) begin m = 0; e++; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  function automatic real b2f(logic [31:0] b);
    logic [63:0] d;
    if (b[30:23] == 0) return 0.0;
    d = {b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // a and b differ by at most one unit in the last place
  function automatic logic near(logic [31:0] a, logic [31:0] b);
    int d;
    if (a[31] != b[31]) return (a[30:0] == 0 && b[30:0] == 0);
    d = int'(a[30:0]) - int'(b[30:0]);
    return d >= -1 && d <= 1;
  endfunction

  // random value of magnitude 0.001 .. 1000 with random sign
  function automatic logic [31:0] rnd_f();
    real r;
    r = (real'($urandom_range(1, 1000000)) / 1000.0) * (($urandom_range(0, 1) != 0) ? 1.0 : -1.0);
    return f2b(r);
  endfunction
endpackage
