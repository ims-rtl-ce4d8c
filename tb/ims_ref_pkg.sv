// ims_ref_pkg: reference arithmetic for the testbenches.
//
// Plain integer models of the monitoring engine's computations, written
// from their definitions (sums of products with 64-bit integers, floor
// division by powers of two, clamping) rather than from the RTL:
//   pca_ref      y_k = floor( sum_j C[k][j] * (16*x_j - mu_j) / 64 ), clamped
//   dense_ref    out_o = floor( (1024*b_o + sum_i W[o][i]*in_i) / 4 ), clamped,
//                ReLU if asked
//   sigmoid_real the PLAN piecewise-linear sigmoid in real arithmetic
// Activations: 10 fractional bits; weights: 2; PCA coefficients: 12;
// PCA means: 4.
package ims_ref_pkg;

  localparam int NF = 22;
  localparam int NK = 8;
  localparam int NH = 32;

  function automatic int clamp16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // floor(v / 2^s) for any sign
  function automatic longint floor_div(input longint v, input int s);
    longint d;
    d = longint'(1) << s;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic int pca_ref(input int x[NF], input int c[NK][NF],
                                 input int mu[NF], input int k);
    longint acc;
    acc = 0;
    for (int j = 0; j < NF; j++) acc += longint'(c[k][j]) * longint'(16 * x[j] - mu[j]);
    return clamp16(floor_div(acc, 6));
  endfunction

  function automatic int dense_ref(input int in_v[], input int w[], input int b,
                                   input bit relu);
    longint acc;
    int r;
    acc = longint'(b) * 1024;
    for (int i = 0; i < in_v.size(); i++) acc += longint'(in_v[i]) * longint'(w[i]);
    r = clamp16(floor_div(acc, 2));
    if (relu && r < 0) r = 0;
    return r;
  endfunction

  function automatic real sigmoid_real(input int x);
    real a, y;
    a = (x < 0 ? -x : x) / 1024.0;
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = a / 32.0 + 0.84375;
    else if (a >= 1.0)   y = a / 8.0 + 0.625;
    else                 y = a / 4.0 + 0.5;
    if (x < 0) y = 1.0 - y;
    return y;
  endfunction

  function automatic real sigmoid_true(input int x);
    return 1.0 / (1.0 + $exp(-x / 1024.0));
  endfunction

endpackage
