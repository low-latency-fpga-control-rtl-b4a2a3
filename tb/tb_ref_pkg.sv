// tb_ref_pkg -- bit-exact reference models of the two classifiers, for the testbenches.
//
// Written as plain nested loops over the model equations, independent of the RTL's schedules:
//   mlp_ref : evaluates every PolyLUT-Add neuron's polynomial directly (the RTL reads tables that
//             were pre-computed at elaboration);
//   vit_ref : evaluates the Vision Transformer token by token in the order of its equations
//             (the RTL runs them on a shared lane array under a state machine).
// Both use the model parameters of qd_pkg (the hash-derived stand-in weights) and the same
// fixed-point rules as the hardware: products summed exactly, >>> 8, bias/shortcut added,
// one saturation to 16 bits; softmax by exp2 table, 2^32/sum reciprocal, (e*recip) >> 24.
package tb_ref_pkg;
  import qd_pkg::*;

  typedef int unsigned pixarr_t [];

  function automatic longint sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // ------------------------------------------------------------------ LUT-MLP
  // Returns the last layer's BETA-bit outputs; cls receives the argmax over the first ncls.
  function automatic void mlp_ref(input pixarr_t pix, input int layer_n [], input int f, input int a_n,
                                  input int beta, input int sub_shift, input int in_off,
                                  input int in_shift, input int ncls,
                                  output int outs [], output int cls);
    int prev [];
    int cur [];
    int maxc;
    maxc = (1 << beta) - 1;
    prev = new[pix.size()];
    foreach (pix[p]) begin
      int q;
      q = (int'(pix[p]) <= in_off) ? 0 : ((int'(pix[p]) - in_off) >> in_shift);
      prev[p] = (q > maxc) ? maxc : q;
    end
    for (int l = 0; l < layer_n.size(); l++) begin
      cur = new[layer_n[l]];
      for (int n = 0; n < layer_n[l]; n++) begin
        int tot;
        tot = mlp_bias(l, n);
        for (int a = 0; a < a_n; a++) begin
          int x [];
          int s, term, q;
          x = new[f];
          for (int i = 0; i < f; i++) x[i] = prev[mlp_conn(l, n, a*f + i, prev.size())];
          s = mlp_weight(l, n, a, 0);
          term = 1;
          for (int i = 0; i < f; i++) begin s += mlp_weight(l, n, a, term) * x[i]; term++; end
          for (int i = 0; i < f; i++)
            for (int j = i; j < f; j++) begin s += mlp_weight(l, n, a, term) * x[i] * x[j]; term++; end
          q = s >>> sub_shift;
          if (q > maxc) q = maxc;
          if (q < -(1 << beta)) q = -(1 << beta);
          tot += q;
        end
        cur[n] = (tot < 0) ? 0 : ((tot > maxc) ? maxc : tot);
      end
      prev = cur;
    end
    outs = prev;
    cls = 0;
    for (int c = 1; c < ncls; c++) if (outs[c] > outs[cls]) cls = c;
  endfunction

  // ------------------------------------------------------------------ ViT
  function automatic longint exp_ref(input longint d);  // d <= 0, Q8.8; result Q1.16
    longint tbl [16] = '{65536, 68438, 71468, 74632, 77936, 81386, 84990, 88752,
                         92682, 96785, 101070, 105545, 110218, 115098, 120194, 125515};
    longint y, ip, fr;
    y  = (d * 369) >>> 8;
    ip = y >>> 8;
    fr = y - ip * 256;
    if (-ip > 16) return 0;
    return tbl[fr / 16] >> (-ip);
  endfunction

  function automatic longint w(input int tid, input int idx);
    return longint'(vit_param(tid, idx));
  endfunction

  function automatic void vit_ref(input pixarr_t img, input int ih, input int iw, input int p,
                                  input int d, input int nh, input int nl, input int ncls,
                                  output longint logits [], output int cls);
    int npw, np, t_n, pp, hd, inv;
    longint z [][], z1 [][], bn [][], q [][], k [][], v [][], o [][];
    longint fz [];
    npw = iw / p; np = (ih / p) * npw; t_n = np + 1; pp = p * p; hd = nh * d;
    inv = inv_sqrt_q8(d);
    z = new[t_n]; z1 = new[t_n]; bn = new[t_n]; q = new[t_n]; k = new[t_n]; v = new[t_n]; o = new[t_n];
    foreach (z[t]) begin
      z[t] = new[d]; z1[t] = new[d]; bn[t] = new[d]; q[t] = new[d]; k[t] = new[d]; v[t] = new[d];
      o[t] = new[hd];
    end
    // embedding
    for (int j = 0; j < d; j++) z[0][j] = sat16(w(TID_CLS, j) + w(TID_POS, j));
    for (int n = 0; n < np; n++)
      for (int j = 0; j < d; j++) begin
        longint acc;
        acc = 0;
        for (int kk = 0; kk < pp; kk++) begin
          int pi;
          longint px;
          pi = ((n / npw) * p + kk / p) * iw + (n % npw) * p + kk % p;
          px = (img[pi] > 32767) ? 32767 : longint'(img[pi]);
          acc += px * w(TID_E, kk*d + j);
        end
        z[n+1][j] = sat16((acc >>> 8) + w(TID_POS, (n+1)*d + j));
      end
    for (int l = 0; l < nl; l++) begin
      for (int h = 0; h < nh; h++) begin
        for (int t = 0; t < t_n; t++)
          for (int j = 0; j < d; j++) begin
            longint aq, ak, av;
            aq = 0; ak = 0; av = 0;
            for (int kk = 0; kk < d; kk++) begin
              aq += z[t][kk] * w(TID_QKV, (((l*3 + 0)*nh + h)*d + kk)*d + j);
              ak += z[t][kk] * w(TID_QKV, (((l*3 + 1)*nh + h)*d + kk)*d + j);
              av += z[t][kk] * w(TID_QKV, (((l*3 + 2)*nh + h)*d + kk)*d + j);
            end
            q[t][j] = sat16(aq >>> 8); k[t][j] = sat16(ak >>> 8); v[t][j] = sat16(av >>> 8);
          end
        for (int i = 0; i < t_n; i++) begin
          longint s [], e [], pr [];
          longint mx, sum, recip;
          s = new[t_n]; e = new[t_n]; pr = new[t_n];
          for (int j = 0; j < t_n; j++) begin
            longint acc;
            acc = 0;
            for (int kk = 0; kk < d; kk++) acc += q[i][kk] * k[j][kk];
            s[j] = sat16(((acc >>> 8) * inv) >>> 8);
          end
          mx = s[0];
          for (int j = 1; j < t_n; j++) if (s[j] > mx) mx = s[j];
          sum = 0;
          for (int j = 0; j < t_n; j++) begin e[j] = exp_ref(s[j] - mx); sum += e[j]; end
          recip = (64'sd1 << 32) / sum;
          for (int j = 0; j < t_n; j++) pr[j] = (e[j] * recip) >> 24;
          for (int j = 0; j < d; j++) begin
            longint acc;
            acc = 0;
            for (int kk = 0; kk < t_n; kk++) acc += pr[kk] * v[kk][j];
            o[i][h*d + j] = sat16(acc >>> 8);
          end
        end
      end
      for (int t = 0; t < t_n; t++)
        for (int j = 0; j < d; j++) begin
          longint acc;
          acc = 0;
          for (int kk = 0; kk < hd; kk++) acc += o[t][kk] * w(TID_WO, (l*hd + kk)*d + j);
          z1[t][j] = sat16((acc >>> 8) + w(TID_BO, l*d + j) + z[t][j]);
          bn[t][j] = sat16(((z1[t][j] * w(TID_G1, l*d + j)) >>> 8) + w(TID_BE1, l*d + j));
        end
      for (int t = 0; t < t_n; t++)
        for (int j = 0; j < d; j++) begin
          longint acc, lin;
          acc = 0;
          for (int kk = 0; kk < d; kk++) acc += bn[t][kk] * w(TID_W1, (l*d + kk)*d + j);
          lin = sat16((acc >>> 8) + w(TID_BL1, l*d + j));
          if (lin < 0) lin = 0;
          z[t][j] = sat16(lin + z1[t][j]);
        end
    end
    fz = new[d];
    for (int j = 0; j < d; j++) fz[j] = sat16(((z[0][j] * w(TID_GF, j)) >>> 8) + w(TID_BEF, j));
    logits = new[ncls];
    for (int j = 0; j < ncls; j++) begin
      longint acc;
      acc = 0;
      for (int kk = 0; kk < d; kk++) acc += fz[kk] * w(TID_WOUT, kk*ncls + j);
      logits[j] = sat16((acc >>> 8) + w(TID_BOUT, j));
    end
    cls = 0;
    for (int c = 1; c < ncls; c++) if (logits[c] > logits[cls]) cls = c;
  endfunction

  // Latency of vit_core: start high in cycle t -> out_valid high in cycle t + vit_cycles (one
  // cycle to leave IDLE plus the schedule, counted here from
  // the state sequence: CLS 1, EMB N*P^2, per layer {per head {QKV 3*T*D, per row
  // {SCORE D, EXP 1, DIV 33, NORM 1, AV T}}, WO T*H*D, BN1 T, LIN1 T*D}, BNF 1, OUT D, MAX 1).
  function automatic int vit_cycles(input int ih, input int iw, input int p, input int d,
                                    input int nh, input int nl);
    int np, t_n, per_layer;
    np = (ih / p) * (iw / p);
    t_n = np + 1;
    per_layer = nh * (3*t_n*d + t_n*(d + 1 + 33 + 1 + t_n)) + t_n*nh*d + t_n + t_n*d;
    return 2 + np*p*p + nl*per_layer + 1 + d + 1;
  endfunction

  // Synthetic ion image: background 30..69 with bright 3x3 spots at the given columns.
  function automatic pixarr_t make_image(input int ih, input int iw, input int nions,
                                         input int bright_mask, input int seed);
    pixarr_t im;
    im = new[ih*iw];
    for (int i = 0; i < ih*iw; i++)
      im[i] = 30 + (hash32(u32_t'(seed) * 7919 + u32_t'(i)) % 40);
    for (int ion = 0; ion < nions; ion++)
      if (bright_mask[ion]) begin
        int cr, cc;
        cr = ih / 2;
        cc = (nions == 1) ? iw / 2 : (iw / 2 + (ion - nions/2) * 5);
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++)
            im[(cr+dr)*iw + cc + dc] += (dr == 0 && dc == 0) ? 120 : 45;
      end
    return im;
  endfunction

endpackage
