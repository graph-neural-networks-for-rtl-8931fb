// gnn_ref_pkg: integer reference model of the interaction network used by the
// testbenches. It is written independently of the RTL: plain loops over int
// arrays, with the same number format (W-bit two's complement, F fractional
// bits, products summed exactly, floor to F bits, wrap to W bits).
package gnn_ref_pkg;

  // wrap an integer to a signed W-bit value
  function automatic longint wrapw(input longint v, input int w);
    longint m;
    m = v & ((64'sd1 <<< w) - 1);
    if (m >= (64'sd1 <<< (w - 1))) m = m - (64'sd1 <<< w);
    return m;
  endfunction

  // floor division by 2^f of a possibly negative number
  function automatic longint floor_shift(input longint v, input int f);
    longint d;
    d = 64'sd1 <<< f;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  // y = act(W x + b); wt is row-major [out][in]
  function automatic void dense(input int nin, input int nout, input bit relu,
                                input int w, input int f,
                                input longint x[], input longint wt[], input longint b[],
                                output longint y[]);
    y = new[nout];
    for (int o = 0; o < nout; o++) begin
      longint s;
      s = b[o] * (64'sd1 <<< f);
      for (int i = 0; i < nin; i++) s += x[i] * wt[o * nin + i];
      y[o] = wrapw(floor_shift(s, f), w);
      if (relu && y[o] < 0) y[o] = 0;
    end
  endfunction

  // PLAN piecewise-linear sigmoid, same breakpoints as the RTL
  function automatic longint sigmoid(input longint x, input int w, input int f);
    longint one, ax, p;
    one = 64'sd1 <<< f;
    ax = (x < 0) ? -x : x;
    if (ax >= 5 * one)              p = one;
    else if (ax * 8 >= 19 * one)    p = floor_shift(ax, 5) + floor_shift(27 * one, 5);
    else if (ax >= one)             p = floor_shift(ax, 3) + floor_shift(5 * one, 3);
    else                            p = floor_shift(ax, 2) + one / 2;
    if (x < 0) p = one - p;
    return wrapw(p, w);
  endfunction

  // 3-layer MLP nin -> h -> h -> nout; params flat: W1, b1, W2, b2, W3, b3
  function automatic void mlp(input int nin, input int nout, input int h, input bit sig,
                              input int w, input int f, input longint p[], input int base,
                              input longint x[], output longint y[]);
    longint w1[], b1[], w2[], b2[], w3[], b3[], h1[], h2[];
    int o;
    o = base;
    w1 = new[nin * h];  foreach (w1[k]) w1[k] = p[o + k]; o += nin * h;
    b1 = new[h];        foreach (b1[k]) b1[k] = p[o + k]; o += h;
    w2 = new[h * h];    foreach (w2[k]) w2[k] = p[o + k]; o += h * h;
    b2 = new[h];        foreach (b2[k]) b2[k] = p[o + k]; o += h;
    w3 = new[h * nout]; foreach (w3[k]) w3[k] = p[o + k]; o += h * nout;
    b3 = new[nout];     foreach (b3[k]) b3[k] = p[o + k];
    dense(nin, h, 1'b1, w, f, x, w1, b1, h1);
    dense(h, h, 1'b1, w, f, h1, w2, b2, h2);
    dense(h, nout, 1'b0, w, f, h2, w3, b3, y);
    if (sig) foreach (y[k]) y[k] = sigmoid(y[k], w, f);
  endfunction

  // random signed value of magnitude below 2^(bits-1)
  function automatic longint rnd(input int bits);
    longint v;
    v = longint'($urandom_range(0, (1 << bits) - 1));
    return v - (64'sd1 <<< (bits - 1));
  endfunction

  // whole interaction network on one graph. x: [nn*3], a: [ne*4], recv/send: [ne]
  // p: 528 parameters. Returns the edge weights.
  function automatic void in_forward(input int nn, input int ne, input int w, input int f,
                                     input longint p[], input longint x[], input longint a[],
                                     input int recv[], input int send[], output longint ew[]);
    longint eu[], agg[], xu[], in[], out[];
    eu = new[ne * 4];
    agg = new[nn * 4];
    xu = new[nn * 3];
    ew = new[ne];
    for (int e = 0; e < ne; e++) begin
      in = new[10];
      for (int k = 0; k < 3; k++) in[k] = x[recv[e] * 3 + k];
      for (int k = 0; k < 3; k++) in[3 + k] = x[send[e] * 3 + k];
      for (int k = 0; k < 4; k++) in[6 + k] = a[e * 4 + k];
      mlp(10, 4, 8, 1'b0, w, f, p, 0, in, out);
      for (int k = 0; k < 4; k++) eu[e * 4 + k] = out[k];
    end
    foreach (agg[k]) agg[k] = 0;
    for (int e = 0; e < ne; e++)
      for (int k = 0; k < 4; k++) agg[recv[e] * 4 + k] = wrapw(agg[recv[e] * 4 + k] + eu[e * 4 + k], w);
    for (int n = 0; n < nn; n++) begin
      in = new[7];
      for (int k = 0; k < 3; k++) in[k] = x[n * 3 + k];
      for (int k = 0; k < 4; k++) in[3 + k] = agg[n * 4 + k];
      mlp(7, 3, 8, 1'b0, w, f, p, 196, in, out);
      for (int k = 0; k < 3; k++) xu[n * 3 + k] = out[k];
    end
    for (int e = 0; e < ne; e++) begin
      in = new[10];
      for (int k = 0; k < 3; k++) in[k] = xu[recv[e] * 3 + k];
      for (int k = 0; k < 3; k++) in[3 + k] = xu[send[e] * 3 + k];
      for (int k = 0; k < 4; k++) in[6 + k] = eu[e * 4 + k];
      mlp(10, 1, 8, 1'b1, w, f, p, 359, in, out);
      ew[e] = out[0];
    end
  endfunction

endpackage
