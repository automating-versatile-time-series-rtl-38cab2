// tt_ref_pkg: reference arithmetic for the testbenches of the integer-only
// Tiny Transformer. Every function recomputes a layer from its definition
// with 64-bit integers on flat row-major arrays, independently of the RTL,
// so that a testbench can compare the hardware's results word for word.
// Also holds the random generators for quantisation constants.
package tt_ref_pkg;

  typedef int arr_t[];

  // how often the reference saw an output clamp and a ReLU cut off a value;
  // the end-to-end testbenches use them to show both mechanisms occurred
  int unsigned n_sat = 0;
  int unsigned n_relu = 0;

  function automatic longint rq(longint acc, longint m, int n, longint z, int bits);
    longint v, hi, lo;
    v = acc * m;
    if (n > 0) v = (v + (64'sd1 <<< (n - 1))) >>> n;
    v = v + z;
    hi = (64'sd1 <<< (bits - 1)) - 1;
    lo = -(64'sd1 <<< (bits - 1));
    if (v > hi || v < lo) n_sat++;
    if (v > hi) v = hi;
    if (v < lo) v = lo;
    return v;
  endfunction

  function automatic longint shr_rnd(longint v, longint m, int n);
    longint p;
    p = v * m;
    if (n > 0) p = (p + (64'sd1 <<< (n - 1))) >>> n;
    return p;
  endfunction

  function automatic arr_t linear(arr_t x, int rows, int in_n, int out_n, arr_t w, arr_t b,
                                  int zx, int zw, int m, int n, int zy, bit relu, int bits);
    arr_t y = new[rows * out_n];
    for (int r = 0; r < rows; r++)
      for (int o = 0; o < out_n; o++) begin
        longint acc = b[o];
        for (int i = 0; i < in_n; i++)
          acc += longint'(x[r*in_n+i] - zx) * longint'(w[o*in_n+i] - zw);
        y[r*out_n+o] = int'(rq(acc, m, n, zy, bits));
        if (relu && y[r*out_n+o] < zy) begin y[r*out_n+o] = zy; n_relu++; end
      end
    return y;
  endfunction

  // a is [rows x inner]; b is [cols x inner] when bt, else [inner x cols]
  function automatic arr_t matmul(arr_t a, arr_t b, int rows, int inner, int cols, bit bt,
                                  int za, int zb, int m, int n, int zy, int bits);
    arr_t y = new[rows * cols];
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c++) begin
        longint acc = 0;
        for (int k = 0; k < inner; k++)
          acc += longint'(a[r*inner+k] - za) * longint'((bt ? b[c*inner+k] : b[k*cols+c]) - zb);
        y[r*cols+c] = int'(rq(acc, m, n, zy, bits));
      end
    return y;
  endfunction

  function automatic arr_t softmax(arr_t x, int rows, int cols, arr_t lut, int bits, int frac);
    arr_t y = new[rows * cols];
    for (int r = 0; r < rows; r++) begin
      int mx = x[r*cols];
      longint sum = 0, recip, p;
      for (int j = 1; j < cols; j++) if (x[r*cols+j] > mx) mx = x[r*cols+j];
      for (int j = 0; j < cols; j++) sum += lut[mx - x[r*cols+j]];
      recip = (64'sd1 <<< frac) / sum;
      for (int j = 0; j < cols; j++) begin
        p = longint'(lut[mx - x[r*cols+j]]) * ((64'sd1 <<< bits) - 1) * recip;
        p = (p + (64'sd1 <<< (frac - 1))) >>> frac;
        if (p > (1 << bits) - 1) p = (1 << bits) - 1;
        y[r*cols+j] = int'(p) - (1 << (bits - 1));
      end
    end
    return y;
  endfunction

  function automatic arr_t add(arr_t a, arr_t b, int za, int zb, int ma, int na,
                               int mb, int nb, int zy, int bits);
    arr_t y = new[a.size()];
    for (int i = 0; i < a.size(); i++)
      y[i] = int'(rq(shr_rnd(a[i] - za, ma, na) + shr_rnd(b[i] - zb, mb, nb), 1, 0, zy, bits));
    return y;
  endfunction

  function automatic arr_t batchnorm(arr_t x, int rows, int d, arr_t g, arr_t b,
                                     int zx, int m, int n, int zy, int bits);
    arr_t y = new[rows * d];
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < d; c++)
        y[r*d+c] = int'(rq(longint'(x[r*d+c] - zx) * g[c] + b[c], m, n, zy, bits));
    return y;
  endfunction

  function automatic arr_t gap(arr_t x, int rows, int d, int zx, int m, int n, int zy, int bits);
    arr_t y = new[d];
    for (int c = 0; c < d; c++) begin
      longint acc = 0;
      for (int r = 0; r < rows; r++) acc += x[r*d+c] - zx;
      y[c] = int'(rq(acc, m, n, zy, bits));
    end
    return y;
  endfunction

  // ---- random stimulus -----------------------------------------------------
  function automatic int rnd_range(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  function automatic arr_t rnd_codes(int len, int bits);
    arr_t v = new[len];
    foreach (v[i]) v[i] = rnd_range(-(1 << (bits - 1)), (1 << (bits - 1)) - 1);
    return v;
  endfunction

  function automatic int clog2i(int v);
    int r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  // A layer's constants: zero points, multiplier/shift and, when present,
  // weights and biases. The shift is chosen so that an inner product over
  // `fan_in` terms lands near the b-bit range.
  class layer_p;
    int zx, zw, m, n, zy, mb, nb;
    arr_t w, b;
    function new(int bits, int fan_in, int nw, int nb_len);
      zx = rnd_range(-4, 3); zw = rnd_range(-3, 3); zy = rnd_range(-4, 3);
      m  = rnd_range(1 << 13, (1 << 15) - 1);
      n  = 15 + bits + (clog2i(fan_in) + 1) / 2 - 1;
      mb = rnd_range(1 << 13, (1 << 15) - 1);
      nb = 15;
      w  = rnd_codes(nw, bits);
      b  = new[nb_len];
      foreach (b[i]) b[i] = rnd_range(-(1 << (2*bits)), 1 << (2*bits));
    endfunction
  endclass

  // exp table for the softmax: round((2^16-1) * exp(-d * s))
  function automatic arr_t exp_lut(int bits, real s);
    arr_t l = new[1 << bits];
    foreach (l[d]) l[d] = int'($floor(65535.0 * $exp(-real'(d) * s) + 0.5));
    return l;
  endfunction

  // ---- parameter-port images -------------------------------------------------
  // A layer's constants as the (sel, addr, data) words its parameter port
  // expects; the layouts are those documented at the top of each RTL module.
  typedef struct { int sel; int addr; int data; } cfg_word_t;
  typedef cfg_word_t cfg_q_t[$];

  function automatic void cfg_linear(ref cfg_q_t q, input int sel, input layer_p p,
                                     input int in_n, input int out_n);
    int nw = in_n * out_n;
    for (int i = 0; i < nw; i++)    q.push_back('{sel, i, p.w[i]});
    for (int i = 0; i < out_n; i++) q.push_back('{sel, nw + i, p.b[i]});
    q.push_back('{sel, nw + out_n + 0, p.zx});
    q.push_back('{sel, nw + out_n + 1, p.zw});
    q.push_back('{sel, nw + out_n + 2, p.m});
    q.push_back('{sel, nw + out_n + 3, p.n});
    q.push_back('{sel, nw + out_n + 4, p.zy});
  endfunction

  // matmul, add and gap share the small layout at word 0
  function automatic void cfg_small(ref cfg_q_t q, input int sel, input layer_p p);
    q.push_back('{sel, 0, p.zx});
    q.push_back('{sel, 1, p.zw});
    q.push_back('{sel, 2, p.m});
    q.push_back('{sel, 3, p.n});
    q.push_back('{sel, 4, p.zy});
    q.push_back('{sel, 5, p.mb});
    q.push_back('{sel, 6, p.nb});
  endfunction

  function automatic void cfg_bn(ref cfg_q_t q, input int sel, input layer_p p, input int d);
    for (int i = 0; i < d; i++) q.push_back('{sel, i, p.w[i]});
    for (int i = 0; i < d; i++) q.push_back('{sel, d + i, p.b[i]});
    q.push_back('{sel, 2*d + 0, p.zx});
    q.push_back('{sel, 2*d + 2, p.m});
    q.push_back('{sel, 2*d + 3, p.n});
    q.push_back('{sel, 2*d + 4, p.zy});
  endfunction

  function automatic void cfg_table(ref cfg_q_t q, input int sel, input arr_t t);
    foreach (t[i]) q.push_back('{sel, i, t[i]});
  endfunction

  // ---- latencies (cycles from the start edge to done) -------------------------
  // One multiply-accumulate per cycle plus one cycle of pipeline tail per
  // layer; a sequencer adds two cycles per step (done seen, start issued).
  function automatic int lat_linear(int rows, int in_n, int out_n); return rows*in_n*out_n + 1; endfunction
  function automatic int lat_matmul(int rows, int inner, int cols); return rows*inner*cols + 1; endfunction
  function automatic int lat_elem(int len); return len + 1; endfunction
  function automatic int lat_softmax(int rows, int cols); return rows*(3*cols + 30 + 4); endfunction
  function automatic int lat_ohsa(int n, int d);
    return 4*(lat_linear(n, d, d) + 2) + (lat_matmul(n, d, n) + 2) + (lat_softmax(n, n) + 2)
         + (lat_matmul(n, n, d) + 2);
  endfunction
  function automatic int lat_ffn(int n, int d);
    return lat_linear(n, d, 4*d) + 2 + lat_linear(n, 4*d, d);
  endfunction
  function automatic int lat_encoder(int n, int d);
    return (lat_ohsa(n, d) + 2) + 4*(lat_elem(n*d) + 2) + (lat_ffn(n, d) + 2);
  endfunction
  function automatic int lat_model(int n, int m, int d, int k);
    return (lat_linear(n, m, d) + 2) + (lat_elem(n*d) + 2) + (lat_encoder(n, d) + 2)
         + (lat_elem(n*d) + 2) + (lat_linear(1, d, k) + 2);
  endfunction

  // ---- composite blocks ------------------------------------------------------
  // Parameter-load targets, as in tt_pkg (repeated so that the reference
  // does not depend on the design's package).
  localparam int T_IN_LIN = 0, T_PE_ADD = 1, T_PE_TAB = 2, T_ENC = 16, T_GAP = 32, T_OUT_LIN = 33;
  localparam int A_Q = 0, A_K = 1, A_V = 2, A_SC = 3, A_SM = 4, A_AV = 5, A_O = 6;
  localparam int E_ADD1 = 8, E_BN1 = 9, E_FFN = 10, E_ADD2 = 12, E_BN2 = 13;

  class ohsa_p;
    layer_p q, k, v, sc, av, o;
    arr_t lut;
    function new(int bits, int n, int d);
      q  = new(bits, d, d*d, d);
      k  = new(bits, d, d*d, d);
      v  = new(bits, d, d*d, d);
      sc = new(bits, d, 0, 0);
      av = new(bits, n, 0, 0);
      o  = new(bits, d, d*d, d);
      // attention probabilities: code range [-2^(b-1), 2^(b-1)-1] for [0,1]
      av.zx = -(1 << (bits - 1));
      lut = exp_lut(bits, 0.25);
    endfunction
    function arr_t run(arr_t x, int n, int d, int bits);
      arr_t tq, tk, tv, ts, ta, tc;
      tq = linear(x, n, d, d, q.w, q.b, q.zx, q.zw, q.m, q.n, q.zy, 0, bits);
      tk = linear(x, n, d, d, k.w, k.b, k.zx, k.zw, k.m, k.n, k.zy, 0, bits);
      tv = linear(x, n, d, d, v.w, v.b, v.zx, v.zw, v.m, v.n, v.zy, 0, bits);
      ts = matmul(tq, tk, n, d, n, 1, sc.zx, sc.zw, sc.m, sc.n, sc.zy, bits);
      ta = softmax(ts, n, n, lut, bits, 30);
      tc = matmul(ta, tv, n, n, d, 0, av.zx, av.zw, av.m, av.n, av.zy, bits);
      return linear(tc, n, d, d, o.w, o.b, o.zx, o.zw, o.m, o.n, o.zy, 0, bits);
    endfunction
    function void cfg(ref cfg_q_t cq, input int base, input int d);
      cfg_linear(cq, base + A_Q, q, d, d);
      cfg_linear(cq, base + A_K, k, d, d);
      cfg_linear(cq, base + A_V, v, d, d);
      cfg_small(cq, base + A_SC, sc);
      cfg_table(cq, base + A_SM, lut);
      cfg_small(cq, base + A_AV, av);
      cfg_linear(cq, base + A_O, o, d, d);
    endfunction
  endclass

  class ffn_p;
    layer_p f1, f2;
    function new(int bits, int d);
      f1 = new(bits, d, d*4*d, 4*d);
      f2 = new(bits, 4*d, 4*d*d, d);
    endfunction
    function arr_t run(arr_t x, int n, int d, int bits);
      arr_t h;
      h = linear(x, n, d, 4*d, f1.w, f1.b, f1.zx, f1.zw, f1.m, f1.n, f1.zy, 1, bits);
      return linear(h, n, 4*d, d, f2.w, f2.b, f2.zx, f2.zw, f2.m, f2.n, f2.zy, 0, bits);
    endfunction
    function void cfg(ref cfg_q_t cq, input int base, input int d);
      cfg_linear(cq, base + 0, f1, d, 4*d);
      cfg_linear(cq, base + 1, f2, 4*d, d);
    endfunction
  endclass

  class enc_p;
    ohsa_p att;
    layer_p add1, bn1, add2, bn2;
    ffn_p ff;
    function new(int bits, int n, int d);
      att  = new(bits, n, d);
      add1 = new(bits, 1, 0, 0); add1.n = 15; add1.nb = 15;
      bn1  = new(bits, 1, d, d);
      ff   = new(bits, d);
      add2 = new(bits, 1, 0, 0); add2.n = 15; add2.nb = 15;
      bn2  = new(bits, 1, d, d);
    endfunction
    function arr_t run(arr_t x, int n, int d, int bits);
      arr_t a, r1, h, f, r2;
      a  = att.run(x, n, d, bits);
      r1 = add(a, x, add1.zx, add1.zw, add1.m, add1.n, add1.mb, add1.nb, add1.zy, bits);
      h  = batchnorm(r1, n, d, bn1.w, bn1.b, bn1.zx, bn1.m, bn1.n, bn1.zy, bits);
      f  = ff.run(h, n, d, bits);
      r2 = add(f, h, add2.zx, add2.zw, add2.m, add2.n, add2.mb, add2.nb, add2.zy, bits);
      return batchnorm(r2, n, d, bn2.w, bn2.b, bn2.zx, bn2.m, bn2.n, bn2.zy, bits);
    endfunction
    function void cfg(ref cfg_q_t cq, input int base, input int d);
      att.cfg(cq, base, d);
      cfg_small(cq, base + E_ADD1, add1);
      cfg_bn(cq, base + E_BN1, bn1, d);
      ff.cfg(cq, base + E_FFN, d);
      cfg_small(cq, base + E_ADD2, add2);
      cfg_bn(cq, base + E_BN2, bn2, d);
    endfunction
  endclass

  class model_p;
    layer_p in_lin, pe_add, gp, out_lin;
    arr_t pe;
    arr_t last_enc;   // encoder output of the latest run, for deeper checks
    enc_p enc;
    function new(int bits, int n, int m, int d, int k);
      in_lin  = new(bits, m, m*d, d);
      pe_add  = new(bits, 1, 0, 0); pe_add.n = 15; pe_add.nb = 15;
      pe      = new[n*d];
      // a sinusoidal encoding quantised with scale 1/(2^(b-1)-1)
      for (int t = 0; t < n; t++)
        for (int i = 0; i < d; i++)
          pe[t*d+i] = int'($floor(((1 << (bits - 1)) - 1) *
                        ((i % 2 == 0) ? $sin(t / $pow(10000.0, real'(i) / d))
                                      : $cos(t / $pow(10000.0, real'(i - 1) / d))) + 0.5));
      enc     = new(bits, n, d);
      gp      = new(bits, n, 0, 0); gp.n = 14 + (clog2i(n) + 1) / 2;
      out_lin = new(bits, d, d*k, k);
    endfunction
    function arr_t run(arr_t x, int n, int m, int d, int k, int bits);
      arr_t p, e, o, g;
      p = linear(x, n, m, d, in_lin.w, in_lin.b, in_lin.zx, in_lin.zw, in_lin.m, in_lin.n, in_lin.zy, 0, bits);
      e = add(p, pe, pe_add.zx, 0, pe_add.m, pe_add.n, pe_add.mb, pe_add.nb, pe_add.zy, bits);
      o = enc.run(e, n, d, bits);
      last_enc = o;
      g = gap(o, n, d, gp.zx, gp.m, gp.n, gp.zy, bits);
      return linear(g, 1, d, k, out_lin.w, out_lin.b, out_lin.zx, out_lin.zw, out_lin.m, out_lin.n, out_lin.zy, 0, bits);
    endfunction
    function void cfg(ref cfg_q_t cq, input int d, input int m, input int k);
      pe_add.zw = 0;
      cfg_linear(cq, T_IN_LIN, in_lin, m, d);
      cfg_small(cq, T_PE_ADD, pe_add);
      cfg_table(cq, T_PE_TAB, pe);
      enc.cfg(cq, T_ENC, d);
      cfg_small(cq, T_GAP, gp);
      cfg_linear(cq, T_OUT_LIN, out_lin, d, k);
    endfunction
  endclass

endpackage
