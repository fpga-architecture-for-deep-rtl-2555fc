// Reference arithmetic for the testbenches, written independently of the RTL:
// integer division with explicit floor instead of arithmetic shifts, and the
// activation tables recomputed from exp() instead of read from the ROM files.
package ql_ref_pkg;
  function automatic int rsat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // floor(a / d) for d > 0
  function automatic longint fdiv(input longint a, input longint d);
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  function automatic int rmul(input int a, input int b);
    return rsat(fdiv(longint'(a) * longint'(b), 256));
  endfunction

  function automatic int radd(input int a, input int b);
    return rsat(longint'(a) + longint'(b));
  endfunction

  function automatic int raddr(input longint net);
    longint q;
    q = fdiv(net, 16);
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return int'(q + 128);
  endfunction

  function automatic real rsigr(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic int rsig(input int idx);
    real x;
    x = ((idx - 128) + 0.5) / 16.0;
    return $rtoi($floor(256.0 * rsigr(x) + 0.5));
  endfunction

  function automatic int rdsig(input int idx);
    real x, s;
    x = ((idx - 128) + 0.5) / 16.0;
    s = rsigr(x);
    return $rtoi($floor(256.0 * s * (1.0 - s) + 0.5));
  endfunction

  // net of a neuron as the hardware forms it: floor(sum x_i w_i / 256) + bias,
  // kept to 32 bits
  function automatic longint rnet(input int x[], input int w[], input int b);
    longint s;
    s = 0;
    foreach (x[i]) s += longint'(x[i]) * longint'(w[i]);
    return fdiv(s, 256) + b;
  endfunction

  // Input vector of (state, action a): state values followed by the action's vector.
  function automatic void rx(input int st[], input int acts[], input int av, input int a,
                             output int x[]);
    x = new[st.size() + av];
    foreach (st[i]) x[i] = st[i];
    for (int i = 0; i < av; i++) x[st.size() + i] = acts[a * av + i];
  endfunction

  // Single-neuron Q-value: returns Q and (through net) the saturated net.
  function automatic int rpq(input int w[], input int b, input int x[], output int net);
    longint n;
    n = rnet(x, w, b);
    net = rsat(n);
    return rsig(raddr(n));
  endfunction

  // Temporal-difference error of Eq. 8 as the hardware forms it.
  function automatic int rqerr(input int reward, input int alpha, input int gamma,
                               input int maxn, input int qsa);
    return rmul(alpha, rsat(longint'(radd(reward, rmul(gamma, maxn))) - qsa));
  endfunction

  // One complete single-neuron update. explore < 0 selects the greedy action.
  // w holds the N weights followed by the bias.
  function automatic void rpcpt_update(inout int w[], input int cur[], input int nxt[],
      input int acts[], input int av, input int na, input int reward, input int alpha,
      input int gamma, input int c, input int explore,
      output int a_t, output int qerr, output int maxn, output int qsa);
    int x[], wn[], qs[], ns[], q, net, d, g;
    wn = new[w.size() - 1];
    foreach (wn[i]) wn[i] = w[i];
    qs = new[na]; ns = new[na];
    a_t = 0;
    for (int a = 0; a < na; a++) begin
      rx(cur, acts, av, a, x);
      qs[a] = rpq(wn, w[w.size() - 1], x, ns[a]);
      if (a == 0 || qs[a] > qs[a_t]) a_t = a;
    end
    if (explore >= 0) a_t = explore;
    for (int a = 0; a < na; a++) begin
      rx(nxt, acts, av, a, x);
      q = rpq(wn, w[w.size() - 1], x, net);
      if (a == 0 || q > maxn) maxn = q;
    end
    qsa  = qs[a_t];
    qerr = rqerr(reward, alpha, gamma, maxn, qsa);
    d = rmul(rdsig(raddr(ns[a_t])), qerr);
    g = rmul(c, d);
    rx(cur, acts, av, a_t, x);
    foreach (x[i]) w[i] = radd(w[i], rmul(g, x[i]));
    w[w.size() - 1] = radd(w[w.size() - 1], g);
  endfunction

  // MLP feed-forward. w1 is H rows of (N weights, bias), flattened; w2 is H weights
  // then the bias. Returns Q; hy/hn are the hidden outputs and saturated nets.
  function automatic int rmlp_q(input int w1[], input int w2[], input int h, input int x[],
                                output int hy[], output int hn[], output int no);
    int n, wr[], w2r[];
    longint net;
    n = x.size();
    hy = new[h]; hn = new[h]; wr = new[n]; w2r = new[h];
    for (int k = 0; k < h; k++) begin
      for (int i = 0; i < n; i++) wr[i] = w1[k * (n + 1) + i];
      net = rnet(x, wr, w1[k * (n + 1) + n]);
      hn[k] = rsat(net);
      hy[k] = rsig(raddr(net));
    end
    for (int k = 0; k < h; k++) w2r[k] = w2[k];
    net = rnet(hy, w2r, w2[h]);
    no = rsat(net);
    return rsig(raddr(net));
  endfunction

  function automatic void rmlp_update(inout int w1[], inout int w2[], input int h,
      input int cur[], input int nxt[], input int acts[], input int av, input int na,
      input int reward, input int alpha, input int gamma, input int c, input int explore,
      output int a_t, output int qerr, output int maxn, output int qsa);
    int x[], hy[], hn[], no, q, qs[], d_o, g_o, n;
    int hys[][], hns[][], nos[];
    int e, dh, gh;
    qs = new[na]; nos = new[na]; hys = new[na]; hns = new[na];
    a_t = 0;
    for (int a = 0; a < na; a++) begin
      rx(cur, acts, av, a, x);
      qs[a] = rmlp_q(w1, w2, h, x, hys[a], hns[a], nos[a]);
      if (a == 0 || qs[a] > qs[a_t]) a_t = a;
    end
    if (explore >= 0) a_t = explore;
    for (int a = 0; a < na; a++) begin
      rx(nxt, acts, av, a, x);
      q = rmlp_q(w1, w2, h, x, hy, hn, no);
      if (a == 0 || q > maxn) maxn = q;
    end
    qsa  = qs[a_t];
    qerr = rqerr(reward, alpha, gamma, maxn, qsa);
    d_o  = rmul(rdsig(raddr(nos[a_t])), qerr);
    g_o  = rmul(c, d_o);
    rx(cur, acts, av, a_t, x);
    n = x.size();
    for (int k = 0; k < h; k++) begin
      e  = rmul(d_o, w2[k]);               // uses the weight before its update
      dh = rmul(rdsig(raddr(hns[a_t][k])), e);
      gh = rmul(c, dh);
      for (int i = 0; i < n; i++) w1[k * (n + 1) + i] = radd(w1[k * (n + 1) + i], rmul(gh, x[i]));
      w1[k * (n + 1) + n] = radd(w1[k * (n + 1) + n], gh);
    end
    for (int k = 0; k < h; k++) w2[k] = radd(w2[k], rmul(g_o, hys[a_t][k]));
    w2[h] = radd(w2[h], g_o);
  endfunction
endpackage
