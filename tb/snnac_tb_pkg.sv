// snnac_tb_pkg: reference models shared by the testbenches. They compute the
// accelerator's results from the number formats alone (Q1.6 weights and
// activations, partial sums with 12 fraction bits), without the RTL's
// pipeline: the piecewise-linear activation, a sigmoid table derived from the
// real sigmoid, and a fully-connected layer.
package snnac_tb_pkg;
  typedef int tab_t [16];

  // ReLU as a PWL table: slope 0 below zero, slope 1.0 (64 in Q1.6) above.
  function automatic void relu_table(output tab_t sl, output tab_t of);
    for (int s = 0; s < 16; s++) begin sl[s] = (s >= 8) ? 64 : 0; of[s] = 0; end
  endfunction

  function automatic real sigmoid(real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  // Sigmoid: chord of each unit segment [a, a+1), in Q1.6.
  function automatic void sigmoid_table(output tab_t sl, output tab_t of);
    for (int s = 0; s < 16; s++) begin
      real a, ya, yb, m;
      a  = s - 8;
      ya = sigmoid(a); yb = sigmoid(a + 1.0);
      m  = yb - ya;
      sl[s] = int'(m * 64.0);
      of[s] = int'((ya - m * a) * 64.0);
    end
  endfunction

  // PWL activation of a partial sum x (12 fraction bits) -> Q1.6, saturated.
  function automatic int afu_ref(input tab_t sl, input tab_t of, input int x);
    int xc, seg, y;
    xc = x;
    if (xc > 8 * 4096 - 1) xc = 8 * 4096 - 1;
    if (xc < -8 * 4096)    xc = -8 * 4096;
    seg = (xc >>> 12) + 8;
    y = ((sl[seg] * xc) >>> 12) + of[seg];
    if (y > 127)  y = 127;
    if (y < -128) y = -128;
    return y;
  endfunction

  // Deterministic small pseudo-random value in [-r, r].
  function automatic int prand(input int seed, input int r);
    int unsigned h;
    h = 32'(seed) * 32'h9E3779B1;
    h = h ^ (h >> 15);
    h = h * 32'h85EBCA6B;
    h = h ^ (h >> 13);
    return int'(h % (2 * r + 1)) - r;
  endfunction
endpackage
