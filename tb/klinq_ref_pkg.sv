// klinq_ref_pkg: bit-exact software model of the KLiNQ data path, used by
// the testbenches as the independent reference.
//
// Numbers are Q16.16 held in int; products are formed in 64 bits and
// shifted right by 16 (floor), sums are exact 64-bit sums, activations clamp
// negatives to zero and large positives to 0x7fffffff.
package klinq_ref_pkg;

  function automatic longint ref_mul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return p >>> 16;
  endfunction

  function automatic int ref_sat(longint v);
    if (v > 64'sd2147483647)  return 32'sh7fffffff;
    if (v < -64'sd2147483648) return 32'sh80000000;
    return int'(v);
  endfunction

  function automatic int ref_relu(longint v);
    if (v < 0) return 0;
    return ref_sat(v);
  endfunction

  // Full-precision neuron sum: sum(x[i]*w[woff+i]) + b.
  function automatic longint ref_dot(int x[], int w[], int woff, int b);
    longint s = longint'(b);
    foreach (x[i]) s += ref_mul(x[i], w[woff + i]);
    return s;
  endfunction

  // Averaged points: I groups then Q groups, mean rounded toward zero.
  function automatic void ref_avg(int trace[], int tl, int n, int groups, ref int avg[]);
    avg = new[2 * groups];
    for (int c = 0; c < 2; c++)
      for (int g = 0; g < groups; g++) begin
        longint s = 0;
        for (int k = 0; k < n; k++) s += trace[c*tl + g*n + k];
        avg[c*groups + g] = int'(s / n);
      end
  endfunction

  function automatic int ref_norm(int x, int xmin, int sh);
    longint d = longint'(x) - longint'(xmin);
    return ref_sat(d >>> sh);
  endfunction

  function automatic int ref_mf(int trace[], int env[]);
    longint s = 0;
    foreach (trace[i]) s += ref_mul(trace[i], env[i]);
    return ref_sat(s);
  endfunction

  // One whole readout. params layout: W1[h1][nin], b1, W2[h2][h1], b2,
  // W3[h2], b3, xmin I, xmin Q, shift I, shift Q. Returns the score; sat
  // tells whether any activation clamped an overflow.
  function automatic int ref_readout(int trace[], int mf, int params[], int tl,
                                     int n, int groups, int h1, int h2,
                                     output bit sat);
    int avg[];
    int x1[], a1[], a2[];
    int nin = 2 * groups + 1;
    int ob1 = nin * h1;
    int ow2 = ob1 + h1;
    int ob2 = ow2 + h2 * h1;
    int ow3 = ob2 + h2;
    int ob3 = ow3 + h2;
    int onm = ob3 + 1;
    longint s;
    sat = 0;
    ref_avg(trace, tl, n, groups, avg);
    x1 = new[nin];
    for (int i = 0; i < 2 * groups; i++)
      x1[i] = ref_norm(avg[i], params[onm + i / groups], params[onm + 2 + i / groups] & 31);
    x1[nin-1] = mf;
    a1 = new[h1];
    for (int o = 0; o < h1; o++) begin
      s = ref_dot(x1, params, o * nin, params[ob1 + o]);
      if (s > 64'sd2147483647) sat = 1;
      a1[o] = ref_relu(s);
    end
    a2 = new[h2];
    for (int o = 0; o < h2; o++) begin
      s = ref_dot(a1, params, ow2 + o * h1, params[ob2 + o]);
      if (s > 64'sd2147483647) sat = 1;
      a2[o] = ref_relu(s);
    end
    s = ref_dot(a2, params, ow3, params[ob3]);
    if (s > 64'sd2147483647) sat = 1;
    return ref_relu(s);
  endfunction

endpackage
