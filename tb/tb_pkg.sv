// tb_pkg: helpers shared by the testbenches: conversion between real numbers
// and fp32 bit patterns, a tolerance check, random fp32 values, and real-valued
// reference versions of the activation functions used by the kernels.
// The test graph (every fourth vertex without neighbours) and the tolerance
// rule are this design's; nothing here is taken from the paper.
package tb_pkg;

  // real -> fp32 bits (round half up, subnormals flushed to zero)
  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    if (d[62:52] == 11'd0 || e <= 0) return 32'd0;
    m = {1'b0, d[51:29]} + 24'(d[28]);
    if (m[23]) begin
      m = '0;
      e = e + 1;
    end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // fp32 bits -> real (subnormals read as zero)
  function automatic real f2r(input logic [31:0] b);
    if (b[30:23] == 8'd0) return 0.0;
    return $bitstoreal({b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0});
  endfunction

  // true when got is within rel*|exp| + abs_tol of exp
  function automatic bit near(input real got, input real exp, input real rel, input real abs_tol);
    real d, m;
    d = got - exp;
    if (d < 0.0) d = -d;
    m = (exp < 0.0) ? -exp : exp;
    return d <= rel * m + abs_tol;
  endfunction

  // uniform in [-range, range)
  function automatic real rnd(input real range);
    return range * ((real'($urandom % 20001) / 10000.0) - 1.0);
  endfunction

  function automatic real relu_r(input real x);
    return (x > 0.0) ? x : 0.0;
  endfunction

  function automatic real lrelu_r(input real x);
    return (x > 0.0) ? x : 0.2 * x;
  endfunction

  function automatic real elu_r(input real x);
    return (x > 0.0) ? x : $exp(x) - 1.0;
  endfunction

  function automatic real sigmoid_r(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  // a random graph in CSR form shared by the kernel testbenches: vertex i
  // has neighbours g_col[g_ptr[i] .. g_ptr[i+1]-1]; every fourth vertex,
  // starting at 1, has none
  int unsigned g_ptr [257];
  int unsigned g_col [4096];
  int unsigned g_n;

  function automatic void make_graph(input int unsigned n, input int unsigned maxdeg);
    g_n = n;
    g_ptr[0] = 0;
    for (int unsigned i = 0; i < n; i++) begin
      int unsigned d;
      d = (i % 4 == 1) ? 0 : 1 + ($urandom % maxdeg);
      g_ptr[i+1] = g_ptr[i] + d;
      for (int unsigned k = 0; k < d; k++) g_col[g_ptr[i] + k] = $urandom % n;
    end
  endfunction

endpackage
