// egnn_ref_pkg: behavioural reference of the event-graph pipeline, used by
// the testbenches to work out expected outputs without the RTL.
//
// Each function follows the written definition of a stage, with plain
// integer loops over whole arrays: the skip-step search over the context,
// the neighbour mean and its scaling, positional normalisation from real
// arithmetic, the linear layer per edge with max aggregation, ReLU and
// requantisation, and the floor of the pooled mean.
package egnn_ref_pkg;

  typedef struct {
    int n_ch, r_ch, skip, r_t;
    int fch_m, fch_s, ft_m, ft_s, feat_w;
  } gen_cfg_t;

  // Context memory state of the reference.
  typedef struct {
    int t[];
    bit v[];
  } ctx_t;

  function automatic void ctx_init(ref ctx_t c, input int n_ch);
    c.t = new[n_ch];
    c.v = new[n_ch];
    foreach (c.v[i]) begin c.v[i] = 0; c.t[i] = 0; end
  endfunction

  function automatic longint sat_scale(longint v, int m, int s, int w);
    longint p;
    p = (v * m) >>> s;
    if (p > (64'd1 << w) - 1) p = (64'd1 << w) - 1;
    return p;
  endfunction

  // Graph generation for one event; updates the context.
  function automatic void gen_ref(input gen_cfg_t g, ref ctx_t c, input int ch, input int t,
                                  output int tdiff[], output bit ev[], output int f[2],
                                  output int n_nb);
    int nb, half;
    longint sc, st;
    nb = 2 * (g.r_ch / g.skip) + 1;
    half = g.r_ch / g.skip;
    tdiff = new[nb];
    ev = new[nb];
    sc = 0; st = 0; n_nb = 0;
    for (int k = 0; k < nb; k++) begin
      int cc;
      cc = ch + (k - half) * g.skip;
      tdiff[k] = 0;
      ev[k] = 0;
      if (cc >= 0 && cc < g.n_ch && c.v[cc] && c.t[cc] <= t && t - c.t[cc] <= g.r_t) begin
        ev[k] = 1;
        tdiff[k] = t - c.t[cc];
        sc += cc;
        st += c.t[cc];
        n_nb++;
      end
    end
    if (n_nb == 0) begin
      f[0] = int'(sat_scale(ch, g.fch_m, g.fch_s, g.feat_w));
      f[1] = int'(sat_scale(t, g.ft_m, g.ft_s, g.feat_w));
    end else begin
      f[0] = int'(sat_scale(sc / n_nb, g.fch_m, g.fch_s, g.feat_w));
      f[1] = int'(sat_scale(st / n_nb, g.ft_m, g.ft_s, g.feat_w));
    end
    c.t[ch] = t;
    c.v[ch] = 1;
  endfunction

  // One graph convolution layer with its own feature memory.
  typedef struct {
    int in_dim, in_w, out_dim, out_w, zp;
    int r_ch, skip, r_t, n_ch;
    int w[][];        // [out][in_dim+2]
    longint b[];      // [out]
    int rq_m, rq_s;
    int fmem[][];     // [n_ch][in_dim]
  } conv_t;

  function automatic int pn_ch(int k, int skip, int r_ch, int q);
    real fs;
    fs = real'((64'd1 << q) - 1);
    return int'($floor(real'(k * skip) * fs / real'(2 * r_ch) + 0.5));
  endfunction

  function automatic int pn_t(int tdiff, int r_t, int q);
    longint fs, m, p;
    fs = (64'd1 << q) - 1;
    m = (fs << 24) / r_t;
    p = (longint'(tdiff) * m) >> 24;
    if (p > fs) p = fs;
    return int'(p);
  endfunction

  function automatic void conv_init(ref conv_t L);
    L.fmem = new[L.n_ch];
    foreach (L.fmem[i]) begin
      L.fmem[i] = new[L.in_dim];
      foreach (L.fmem[i][j]) L.fmem[i][j] = 0;
    end
  endfunction

  function automatic void conv_ref(ref conv_t L, input int ch, input int x[],
                                   input int tdiff[], input bit ev[], output int y[]);
    int nb, half;
    longint mx[];
    bit     any[];
    nb = 2 * (L.r_ch / L.skip) + 1;
    half = L.r_ch / L.skip;
    mx = new[L.out_dim];
    any = new[L.out_dim];
    y = new[L.out_dim];
    foreach (any[o]) any[o] = 0;
    for (int k = 0; k <= nb; k++) begin
      int vec[];
      vec = new[L.in_dim + 2];
      if (k < nb) begin
        if (!ev[k]) continue;
        for (int m = 0; m < L.in_dim; m++) vec[m] = L.fmem[ch + (k - half) * L.skip][m];
        vec[L.in_dim]     = pn_ch(k, L.skip, L.r_ch, L.in_w);
        vec[L.in_dim + 1] = pn_t(tdiff[k], L.r_t, L.in_w);
      end else begin
        for (int m = 0; m < L.in_dim; m++) vec[m] = x[m];
        vec[L.in_dim]     = pn_ch(half, L.skip, L.r_ch, L.in_w);
        vec[L.in_dim + 1] = 0;
      end
      for (int o = 0; o < L.out_dim; o++) begin
        longint acc;
        acc = L.b[o];
        for (int m = 0; m < L.in_dim + 2; m++) acc += longint'(L.w[o][m] - L.zp) * vec[m];
        if (!any[o] || acc > mx[o]) mx[o] = acc;
        any[o] = 1;
      end
    end
    for (int o = 0; o < L.out_dim; o++) begin
      longint v;
      v = (mx[o] < 0) ? 0 : mx[o];
      y[o] = int'(sat_scale(v, L.rq_m, L.rq_s, L.out_w));
    end
    for (int m = 0; m < L.in_dim; m++) L.fmem[ch][m] = x[m];
  endfunction

endpackage
