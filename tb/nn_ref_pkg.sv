// nn_ref_pkg: reference arithmetic for checking the two networks.
//
// Independent integer re-statement of the number formats the RTL uses:
// activations Q8.8 in 16 bits, coefficients int8 with 6 fraction bits, every
// right shift rounding toward minus infinity, results saturated to 16 bits.
package nn_ref_pkg;

  function automatic longint sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // one neuron: sum(x*w) + b, back to Q8.8
  function automatic longint neuron(input longint sum_xw, input longint b);
    return sat16((sum_xw + b * 256) >>> 6);
  endfunction

  function automatic longint hsig(input longint x);
    longint t;
    t = ((x * 51) >>> 8) + 128;
    if (t < 0)   return 0;
    if (t > 256) return 256;
    return t;
  endfunction

  function automatic longint softsign(input longint x);
    longint m, q;
    m = (x < 0) ? -x : x;
    q = (m * 256) / (m + 256);
    return (x < 0) ? -q : q;
  endfunction

  function automatic longint qmul(input longint a, input longint b);
    return sat16((a * b) >>> 8);
  endfunction

  // stage-1 forward pass; coef layout: per neuron N_in weights then bias
  function automatic void stage1(input int coef[], input int feat[], output longint sc[5]);
    longint x[32], y[32];
    int nin[3], nout[3];
    int ptr;
    nin  = '{20, 32, 18};
    nout = '{32, 18, 5};
    for (int i = 0; i < 20; i++) x[i] = feat[i];
    ptr = 0;
    for (int l = 0; l < 3; l++) begin
      for (int j = 0; j < nout[l]; j++) begin
        longint s;
        s = 0;
        for (int i = 0; i < nin[l]; i++) s += x[i] * coef[ptr + i];
        y[j] = neuron(s, coef[ptr + nin[l]]);
        if (l < 2 && y[j] < 0) y[j] = 0;
        ptr += nin[l] + 1;
      end
      for (int j = 0; j < nout[l]; j++) x[j] = y[j];
    end
    for (int j = 0; j < 5; j++) sc[j] = x[j];
  endfunction

  // LSTM over T frames of 5 inputs, 5 units; returns final h and argmax
  function automatic int lstm(input int coef[], input longint xs[][5], input int T,
                              output longint hout[5]);
    longint h[5], c[5], z[4][5];
    int best;
    for (int u = 0; u < 5; u++) begin h[u] = 0; c[u] = 0; end
    for (int t = 0; t < T; t++) begin
      for (int g = 0; g < 4; g++)
        for (int u = 0; u < 5; u++) begin
          longint s;
          int base;
          base = (g * 5 + u) * 11;
          s = 0;
          for (int k = 0; k < 5; k++) s += xs[t][k] * coef[base + k];
          for (int k = 0; k < 5; k++) s += h[k] * coef[base + 5 + k];
          z[g][u] = neuron(s, coef[base + 10]);
        end
      for (int u = 0; u < 5; u++) begin
        c[u] = sat16(qmul(hsig(z[1][u]), c[u]) + qmul(hsig(z[0][u]), softsign(z[2][u])));
        h[u] = qmul(hsig(z[3][u]), softsign(c[u]));
      end
    end
    best = 0;
    for (int u = 1; u < 5; u++) if (h[u] > h[best]) best = u;
    for (int u = 0; u < 5; u++) hout[u] = h[u];
    return best;
  endfunction

endpackage
