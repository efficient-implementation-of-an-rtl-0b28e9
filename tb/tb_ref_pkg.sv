// tb_ref_pkg: bit-exact reference arithmetic of the accelerator, written
// independently of the RTL for the testbenches. Q8.8 values are held in
// int, accumulators in longint; rounding follows the accelerator's rules
// (shift right by 8, then saturate to 16 bits). Loop bounds are read from
// variables so that the simulator does not unroll the models.
package tb_ref_pkg;
  import loc_pkg::*;

  typedef int mat_t  [N_TOK][D_MODEL];
  typedef int encw_t [ENC_WORDS][MAX_LANES];
  typedef int fcw_t  [FC_WORDS][D_HID];
  typedef bit mask_t [N_TOK];

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int rq(longint acc);
    return sat(acc >>> 8);
  endfunction

  // sigmoid sample nearest to a Q8.8 score, in units of 1/256
  function automatic int sigm(int s);
    int idx;
    real x;
    idx = (s + 4100) >>> 3;
    if (idx < 0) idx = 0;
    if (idx > 1024) idx = 1024;
    x = real'(idx) / 32.0 - 16.0;
    return int'($floor(256.0 / (1.0 + $exp(-x)) + 0.5));
  endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % 32'(hi - lo + 1));
  endfunction

  // random encoder segment: small weights, score scale and sigmoid bias
  function automatic void rand_enc(output encw_t w, input int scale);
    for (int j = 0; j < int'(ENC_WORDS); j++)
      for (int k = 0; k < int'(MAX_LANES); k++) begin
        int lanes = ((j >= int'(OFF_W2) && j < int'(OFF_W2 + D_MODEL)) || j == int'(OFF_B1)) ? D_FF : D_MODEL;
        w[j][k] = (k < lanes) ? ((j == int'(OFF_B1) || j == int'(OFF_B2)) ? rnd(-20, 20) : rnd(-24, 24)) : 0;
        if (j == int'(OFF_SC)) w[j][k] = (k == 0) ? scale : (k == 1) ? int'(SIG_BIAS_DEF) : 0;
      end
  endfunction

  // X1 = X + MHA(X) with row skipping
  function automatic void ref_mha(input mat_t X, input encw_t w, input bit mask_en,
                                  input mask_t mask, output mat_t X1, output int n_attn);
    int nt, nd, ndh, nh;
    mat_t Q, K, V;
    int av [D_MODEL];
    int a [N_TOK];
    longint acc;
    nt = N_TOK; nd = D_MODEL; ndh = D_HEAD; nh = N_HEADS;
    n_attn = 0;
    for (int i = 0; i < nt; i++)
      for (int j = 0; j < nd; j++) begin
        longint aq = 0, ak = 0, avv = 0;
        for (int k = 0; k < nd; k++) begin
          aq  += longint'(X[i][k]) * w[OFF_WQ + j][k];
          ak  += longint'(X[i][k]) * w[OFF_WK + j][k];
          avv += longint'(X[i][k]) * w[OFF_WV + j][k];
        end
        if (mask_en && mask[i]) begin Q[i][j] = 0; K[i][j] = 0; V[i][j] = 0; end
        else begin Q[i][j] = rq(aq); K[i][j] = rq(ak); V[i][j] = rq(avv); end
      end
    for (int i = 0; i < nt; i++) begin
      for (int k = 0; k < nd; k++) av[k] = 0;
      if (!(mask_en && mask[i])) begin
        n_attn++;
        for (int h = 0; h < nh; h++) begin
          for (int j = 0; j < nt; j++) begin
            int s, t;
            acc = 0;
            for (int k = 0; k < ndh; k++) acc += longint'(Q[i][h*ndh+k]) * K[j][h*ndh+k];
            s = rq(acc);
            t = sat(((longint'(s) * w[OFF_SC][0]) >>> 8) + longint'(w[OFF_SC][1]));
            a[j] = sigm(t);
          end
          for (int k = 0; k < ndh; k++) begin
            acc = 0;
            for (int j = 0; j < nt; j++) acc += longint'(a[j]) * V[j][h*ndh+k];
            av[h*ndh+k] = rq(acc);
          end
        end
      end
      for (int j = 0; j < nd; j++) begin
        acc = 0;
        for (int k = 0; k < nd; k++) acc += longint'(av[k]) * w[OFF_WO + j][k];
        X1[i][j] = sat((acc >>> 8) + longint'(X[i][j]));
      end
    end
  endfunction

  // Y = X1 + FFN(X1)
  function automatic void ref_ffn(input mat_t X1, input encw_t w, output mat_t Y);
    int nt, nd, nff;
    int hh [D_FF];
    longint acc;
    nt = N_TOK; nd = D_MODEL; nff = D_FF;
    for (int i = 0; i < nt; i++) begin
      for (int j = 0; j < nff; j++) begin
        int v;
        acc = 0;
        for (int k = 0; k < nd; k++) acc += longint'(X1[i][k]) * w[OFF_W1 + j][k];
        v = sat((acc >>> 8) + longint'(w[OFF_B1][j]));
        hh[j] = (v < 0) ? 0 : v;
      end
      for (int j = 0; j < nd; j++) begin
        acc = 0;
        for (int k = 0; k < nff; k++) acc += longint'(hh[k]) * w[OFF_W2 + j][k];
        Y[i][j] = sat((acc >>> 8) + longint'(w[OFF_B2][j]) + longint'(X1[i][j]));
      end
    end
  endfunction

  // max-pool + FCNN
  function automatic void ref_fcnn(input mat_t X, input fcw_t w, output int pos [D_OUT]);
    int nt, npw, nhid, nfc;
    int p [FC_IN];
    int hid [D_HID];
    longint acc;
    nt = N_TOK; npw = POOL_W; nhid = D_HID; nfc = FC_IN;
    for (int i = 0; i < nt; i++)
      for (int g = 0; g < npw; g++) begin
        int m = -32768;
        for (int k = 0; k < int'(POOL_K); k++) begin
          int f = g * int'(POOL_K) + k;
          int v = (f < int'(D_MODEL)) ? X[i][f] : 0;
          if (v > m) m = v;
        end
        p[i*npw + g] = m;
      end
    for (int k = 0; k < nhid; k++) begin
      int v;
      acc = 0;
      for (int t = 0; t < nfc; t++) acc += longint'(p[t]) * w[FOFF_W1 + t][k];
      v = sat((acc >>> 8) + longint'(w[FOFF_B1][k]));
      hid[k] = (v < 0) ? int'((longint'(v) * 77) >>> 8) : v;
    end
    for (int o = 0; o < int'(D_OUT); o++) begin
      acc = 0;
      for (int k = 0; k < nhid; k++) acc += longint'(hid[k]) * w[FOFF_W2 + k][o];
      pos[o] = sat((acc >>> 8) + longint'(w[FOFF_B2][o]));
    end
  endfunction
endpackage
