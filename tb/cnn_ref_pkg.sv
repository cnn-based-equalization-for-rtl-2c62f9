// Bit-accurate reference model of the equalizer CNN for the testbenches.
//
// Works on plain integer arrays, independently of the RTL structure: a layer is evaluated
// position by position over the whole input with an all-zero history before the first
// position, exactly the arithmetic the hardware is specified to do (causal window of K
// positions, kernel index 0 on the oldest position, sum + offset, arithmetic shift, optional
// ReLU, saturation). Coefficients are taken from a flat array laid out like the coefficient
// bank's address map.
package cnn_ref_pkg;

  function automatic int sat_q(longint acc, longint bias, int shift, int aw, bit relu);
    longint s, hi, lo;
    s  = (acc + bias) >>> shift;
    if (relu && s < 0) s = 0;
    hi = (longint'(1) <<< (aw - 1)) - 1;
    lo = -(longint'(1) <<< (aw - 1));
    if (s > hi) s = hi;
    if (s < lo) s = lo;
    return int'(s);
  endfunction

  // Sign-extend a raw field of 'bits' bits.
  function automatic int sx(longint v, int bits);
    longint m;
    m = v & ((longint'(1) <<< bits) - 1);
    if (m >= (longint'(1) <<< (bits - 1))) m = m - (longint'(1) <<< bits);
    return int'(m);
  endfunction

  // x[p*ic + i]: npos positions of ic channels. Output after every 'stride' positions.
  // Weights w[wofs + (o*ic + i)*k + kk] (raw, ww bits), offsets b[bofs + o] (raw, bw bits).
  function automatic void layer(input int x[], input int npos, input int ic, input int oc,
                                input int k, input int stride, input int coef[],
                                input int wofs, input int bofs, input int ww, input int bw,
                                input int shift, input int aw, input bit relu,
                                output int y[], output int nout);
    nout = npos / stride;
    y = new[nout * oc];
    for (int m = 0; m < nout; m++) begin
      int pend;
      pend = (m + 1) * stride - 1;
      for (int o = 0; o < oc; o++) begin
        longint acc;
        acc = 0;
        for (int i = 0; i < ic; i++)
          for (int kk = 0; kk < k; kk++) begin
            int p;
            p = pend - (k - 1) + kk;
            if (p >= 0)
              acc += longint'(x[p*ic + i]) * longint'(sx(coef[wofs + (o*ic + i)*k + kk], ww));
          end
        y[m*oc + o] = sat_q(acc, longint'(sx(coef[bofs + o], bw)), shift, aw, relu);
      end
    end
  endfunction

  // Whole network on a sample sequence x (one channel). Returns the flattened symbols:
  // y[m*vp + o] is channel o of output position m of the last layer.
  function automatic void network(input int x[], input int vp, input int nl, input int k,
                                  input int c, input int nos, input int coef[],
                                  input int ww, input int bw, input int shift,
                                  input int aw, output int y[]);
    int a[], t[];
    int n, nn, base;
    layer(x, x.size(), 1, c, k, vp, coef, 0, c*k, ww, bw, shift, aw, 1'b1, a, n);
    base = c*k + c;
    for (int l = 0; l < nl - 2; l++) begin
      layer(a, n, c, c, k, 1, coef, base, base + c*c*k, ww, bw, shift, aw, 1'b1, t, nn);
      a = t;
      n = nn;
      base += c*c*k + c;
    end
    layer(a, n, c, vp, k, nos, coef, base, base + vp*c*k, ww, bw, shift, aw, 1'b0, y, nn);
  endfunction

  // Random coefficients in the coefficient bank layout: weights uniform in [-wmax, wmax],
  // offsets uniform in [-bmax, bmax], both stored as raw two's complement words.
  function automatic void random_coef(input int vp, input int nl, input int k, input int c,
                                      input int wmax, input int bmax, input int bw,
                                      output int coef[]);
    int n, base;
    n = (c*k + c) + (nl - 2)*(c*c*k + c) + (vp*c*k + vp);
    coef = new[n];
    foreach (coef[a]) coef[a] = int'($urandom_range(0, 2*wmax)) - wmax;
    // overwrite the offsets
    for (int o = 0; o < c; o++) coef[c*k + o] = int'($urandom_range(0, 2*bmax)) - bmax;
    base = c*k + c;
    for (int l = 0; l < nl - 2; l++) begin
      for (int o = 0; o < c; o++) coef[base + c*c*k + o] = int'($urandom_range(0, 2*bmax)) - bmax;
      base += c*c*k + c;
    end
    for (int o = 0; o < vp; o++) coef[base + vp*c*k + o] = int'($urandom_range(0, 2*bmax)) - bmax;
    foreach (coef[a]) coef[a] = coef[a] & ((1 << bw) - 1);
  endfunction

endpackage
