// kws_ref_pkg -- behavioural reference model of the keyword-spotting pipeline
// for the testbenches, written from the algorithm descriptions with plain
// integer loops and no use of the RTL's helper functions.
//
// It holds the model's weights (the testbenches draw them at random and also
// write them into the design over the configuration bus) and the model's
// state: LIF filter potentials, the graph generator's per-channel table, the
// per-layer per-channel vertex features, the window maximum and the GRU state.
package kws_ref_pkg;
  import kws_pkg::cfg_t, kws_pkg::layer_e, kws_pkg::cfgkind_e, kws_pkg::K_WEIGHT,
         kws_pkg::K_BIAS, kws_pkg::L_CONV1, kws_pkg::L_MLP1, kws_pkg::L_GRU, kws_pkg::L_CLS;

  localparam int NF    = 72;
  localparam int MAXE  = 20;
  localparam int MAXCH = 128;
  localparam int NCLS  = 7;

  // ---------------- weights of the model ----------------
  int conv_w [4][NF][NF+2];
  int conv_b [4][NF];
  int mlp_w  [4][NF][NF];     // 0: mlp1, 1: mlp2, 2: class, 3: confidence
  int mlp_b  [4][NF];
  int gru_wx [3*NF][NF];
  int gru_wh [3*NF][NF];
  int gru_bx [3*NF];
  int gru_bh [3*NF];

  // ---------------- arithmetic ----------------
  function automatic int s8(input int v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  function automatic int asr(input int v, input int sh);
    return v >>> sh;
  endfunction

  function automatic int relu8(input int acc, input int sh);
    int v;
    v = s8(asr(acc, sh));
    return (v < 0) ? 0 : v;
  endfunction

  function automatic int signed8(input logic [7:0] b);
    return int'($signed(b));
  endfunction

  // first-layer features: channel, timestamp bits 13..7, polarity as +-64
  function automatic void feat1(input int c, input longint t, input int p, output int f [NF]);
    for (int k = 0; k < NF; k++) f[k] = 0;
    f[0] = c;
    f[1] = int'((t / 128) % 128);
    f[2] = p ? 64 : -64;
  endfunction

  // time offset feature: -(dt / 64), no less than -128
  function automatic int dtf(input int dt);
    int q;
    q = dt / 64;
    if (q > 128) q = 128;
    return -q;
  endfunction

  // ---------------- LIF filter ----------------
  longint lif_tl [MAXCH];
  int     lif_v  [MAXCH];
  int     lif_th [MAXCH];

  function automatic void lif_reset(input int C, input int first, input int last);
    for (int c = 0; c < MAXCH; c++) begin
      lif_tl[c] = 0;
      lif_v[c]  = 0;
      if (c < C) lif_th[c] = $rtoi(real'(first) * ((real'(last) / real'(first)) **
                                   (real'(c) / real'(C - 1))) + 0.5);
    end
  endfunction

  function automatic bit lif_step(input longint t, input int c, input int div, input int w);
    longint dt, dec;
    int     v;
    dt  = t - lif_tl[c];
    dec = dt >> div;
    v   = (longint'(lif_v[c]) > dec) ? lif_v[c] - int'(dec) : 0;
    v   = v + w;
    lif_tl[c] = t;
    if (v < lif_th[c]) begin
      lif_v[c] = v;
      return 1'b0;
    end
    lif_v[c] = 0;
    return 1'b1;
  endfunction

  // ---------------- graph generation ----------------
  longint gg_t    [MAXCH];
  bit     gg_seen [MAXCH];

  function automatic void gg_reset();
    for (int c = 0; c < MAXCH; c++) begin
      gg_t[c] = 0;
      gg_seen[c] = 0;
    end
  endfunction

  // neighbours in increasing channel-offset order
  function automatic void gg_step(input longint t, input int c, input int C, input int rc,
                                  input int skip, input int rlo, input int rhi,
                                  output int ne, output int ech [MAXE], output int edt [MAXE]);
    ne = 0;
    for (int d = -rc; d <= rc; d += skip) begin
      int ch;
      ch = c + d;
      if (d == 0 || ch < 0 || ch >= C) continue;
      if (gg_seen[ch] && t - gg_t[ch] >= rlo && t - gg_t[ch] <= rhi) begin
        ech[ne] = ch;
        edt[ne] = int'(t - gg_t[ch]);
        ne++;
      end
    end
    gg_t[c]    = t;
    gg_seen[c] = 1;
  endfunction

  // ---------------- PointNetConv ----------------
  int fmem [4][MAXCH][NF];

  function automatic void conv_reset();
    for (int l = 0; l < 4; l++)
      for (int c = 0; c < MAXCH; c++)
        for (int k = 0; k < NF; k++) fmem[l][c][k] = 0;
  endfunction

  // one layer for vertex (c, x) with neighbours; in_f = input feature count
  function automatic void conv_step(input int l, input int in_f, input int sh, input int c,
                                    input int x [NF], input int ne, input int ech [MAXE],
                                    input int edt [MAXE], output int y [NF]);
    for (int o = 0; o < NF; o++) y[o] = 0;
    for (int j = 0; j <= ne; j++) begin
      int v [NF+2];
      for (int k = 0; k < NF + 2; k++) v[k] = 0;
      if (j == 0) begin
        for (int k = 0; k < in_f; k++) v[k] = x[k];
      end else begin
        for (int k = 0; k < in_f; k++) v[k] = fmem[l][ech[j-1]][k];
        v[in_f]     = ech[j-1] - c;
        v[in_f + 1] = dtf(edt[j-1]);
      end
      for (int o = 0; o < NF; o++) begin
        int acc, r;
        acc = conv_b[l][o];
        for (int k = 0; k < in_f + 2; k++) acc += conv_w[l][o][k] * v[k];
        r = relu8(acc, sh);
        if (r > y[o]) y[o] = r;
      end
    end
    for (int k = 0; k < NF; k++) fmem[l][c][k] = (k < in_f) ? x[k] : 0;
  endfunction

  // ---------------- head ----------------
  int gru_h [NF];

  function automatic void mlp_step(input int m, input int out_n, input bit relu, input int sh,
                                   input int x [NF], output int y [NF]);
    for (int o = 0; o < NF; o++) begin
      int acc;
      y[o] = 0;
      if (o >= out_n) continue;
      acc = mlp_b[m][o];
      for (int k = 0; k < NF; k++) acc += mlp_w[m][o][k] * x[k];
      y[o] = relu ? relu8(acc, sh) : s8(asr(acc, sh));
    end
  endfunction

  function automatic int hsig(input int v);
    int s;
    s = asr(v, 2) + 32;
    return (s < 0) ? 0 : (s > 64) ? 64 : s;
  endfunction

  function automatic int htanh(input int v);
    return (v < -64) ? -64 : (v > 64) ? 64 : v;
  endfunction

  function automatic void gru_step(input int sh, input int x [NF]);
    int hn [NF];
    for (int o = 0; o < NF; o++) begin
      int dx [3], dh [3], r, z, n;
      for (int g = 0; g < 3; g++) begin
        dx[g] = gru_bx[g*NF + o];
        dh[g] = gru_bh[g*NF + o];
        for (int k = 0; k < NF; k++) begin
          dx[g] += gru_wx[g*NF + o][k] * x[k];
          dh[g] += gru_wh[g*NF + o][k] * gru_h[k];
        end
      end
      r = hsig(s8(asr(dx[0] + dh[0], sh)));
      z = hsig(s8(asr(dx[1] + dh[1], sh)));
      n = htanh(s8(asr(dx[2] + asr(r * dh[2], 6), sh)));
      hn[o] = s8(asr((64 - z) * n + z * gru_h[o], 6));
    end
    gru_h = hn;
  endfunction

  function automatic void head_step(input int sh, input int pooled [NF], output int cls,
                                    output int scores [NF], output int conf);
    int a [NF], b [NF], cf [NF];
    mlp_step(0, NF, 1, sh, pooled, a);
    mlp_step(1, NF, 1, sh, a, b);
    gru_step(sh, b);
    mlp_step(2, NCLS, 0, sh, gru_h, scores);
    mlp_step(3, 1, 0, sh, gru_h, cf);
    conf = cf[0];
    cls  = 0;
    for (int i = 1; i < NCLS; i++) if (scores[i] > scores[cls]) cls = i;
  endfunction

  // ---------------- random weights ----------------
  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic void randomize_weights(input int wmax, input int bmax);
    for (int l = 0; l < 4; l++)
      for (int o = 0; o < NF; o++) begin
        conv_b[l][o] = rnd(-bmax, bmax);
        for (int k = 0; k < NF + 2; k++) conv_w[l][o][k] = rnd(-wmax, wmax);
      end
    for (int m = 0; m < 4; m++)
      for (int o = 0; o < NF; o++) begin
        mlp_b[m][o] = rnd(-bmax, bmax);
        for (int k = 0; k < NF; k++) mlp_w[m][o][k] = rnd(-wmax, wmax);
      end
    for (int r = 0; r < 3*NF; r++) begin
      gru_bx[r] = rnd(-bmax, bmax);
      gru_bh[r] = rnd(-bmax, bmax);
      for (int k = 0; k < NF; k++) begin
        gru_wx[r][k] = rnd(-wmax, wmax);
        gru_wh[r][k] = rnd(-wmax, wmax);
      end
    end
    for (int k = 0; k < NF; k++) gru_h[k] = 0;
  endfunction

  // ---------------- configuration writes for the design ----------------
  cfg_t cfg_q [$];

  function automatic void cfg_push(input int layer, input cfgkind_e kind, input int row,
                                   input int col, input int data);
    cfg_t c;
    c.we    = 1'b1;
    c.layer = layer_e'(layer);
    c.kind  = kind;
    c.row   = 8'(row);
    c.col   = 8'(col);
    c.data  = 32'(data);
    cfg_q.push_back(c);
  endfunction

  function automatic void cfg_conv(input int l, input int in_f);
    for (int o = 0; o < NF; o++) begin
      cfg_push(int'(L_CONV1) + l, K_BIAS, o, 0, conv_b[l][o]);
      for (int k = 0; k < in_f + 2; k++) cfg_push(int'(L_CONV1) + l, K_WEIGHT, o, k, conv_w[l][o][k]);
    end
  endfunction

  // m: 0 first, 1 second linear layer, 2 class output, 3 confidence output
  function automatic void cfg_mlp(input int m, input int out_n);
    int id;
    id = (m < 2) ? int'(L_MLP1) + m : int'(L_CLS) + m - 2;
    for (int o = 0; o < out_n; o++) begin
      cfg_push(id, K_BIAS, o, 0, mlp_b[m][o]);
      for (int k = 0; k < NF; k++) cfg_push(id, K_WEIGHT, o, k, mlp_w[m][o][k]);
    end
  endfunction

  function automatic void cfg_gru();
    for (int r = 0; r < 3*NF; r++) begin
      cfg_push(int'(L_GRU), K_BIAS, r, 0, gru_bx[r]);
      cfg_push(int'(L_GRU), K_BIAS, r, 1, gru_bh[r]);
      for (int k = 0; k < NF; k++) begin
        cfg_push(int'(L_GRU), K_WEIGHT, r, k, gru_wx[r][k]);
        cfg_push(int'(L_GRU), K_WEIGHT, r, 128 + k, gru_wh[r][k]);
      end
    end
  endfunction

endpackage
