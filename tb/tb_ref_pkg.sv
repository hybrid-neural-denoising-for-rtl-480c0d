// tb_ref_pkg: reference arithmetic for the trigger testbenches.
//
// Values are carried as integer codes (longint) of fixed-point numbers; the
// arithmetic is done in double precision, which is exact for every product
// and sum that occurs here, and the conversion to a format <w, f> is
// floor(v * 2^f + 0.5) clamped to the signed w-bit range. This is written
// independently of the RTL's shift-based fx_requant.
package tb_ref_pkg;
  import ht_pkg::*;

  localparam int MAXL = 128;
  localparam int MAXC = 8;
  localparam int MAXK = 3;

  typedef longint fm_t [MAXL][MAXC];
  typedef longint wt_t [MAXC][MAXC][MAXK];
  typedef longint bs_t [MAXC];

  function automatic longint ref_q(input real v, input int w, input int f);
    real    s;
    longint c, hi, lo;
    s  = $floor(v * (2.0 ** f) + 0.5);
    hi = (longint'(1) << (w - 1)) - 1;
    lo = -(longint'(1) << (w - 1));
    if (s > real'(hi)) c = hi;
    else if (s < real'(lo)) c = lo;
    else c = longint'(s);
    return c;
  endfunction

  function automatic real val(input longint c, input int f);
    return real'(c) / (2.0 ** f);
  endfunction

  // Conv1D, 'same' padding, optional ReLU, optional MaxPool(2)
  function automatic void ref_conv(input fm_t in, input int len, input int cin,
                                   input int cout, input int k, input int pool,
                                   input bit relu, input int in_f,
                                   input wt_t w, input int w_f,
                                   input bs_t b, input int b_f,
                                   input int r_w, input int r_f,
                                   input int o_w, input int o_f,
                                   output fm_t out);
    fm_t full;
    int  padl;
    padl = (k - 1) / 2;
    for (int p = 0; p < MAXL; p++)
      for (int c = 0; c < MAXC; c++) begin
        full[p][c] = 0;
        out[p][c]  = 0;
      end
    for (int p = 0; p < len; p++) begin
      for (int o = 0; o < cout; o++) begin
        real    acc;
        longint r;
        acc = val(b[o], b_f);
        for (int t = 0; t < k; t++) begin
          int ip;
          ip = p + t - padl;
          if (ip >= 0 && ip < len)
            for (int c = 0; c < cin; c++)
              acc += val(in[ip][c], in_f) * val(w[o][c][t], w_f);
        end
        r = ref_q(acc, r_w, r_f);
        if (relu && r < 0) r = 0;
        full[p][o] = ref_q(val(r, r_f), o_w, o_f);
      end
    end
    for (int q = 0; q < len / pool; q++)
      for (int o = 0; o < cout; o++) begin
        longint m;
        m = full[q * pool][o];
        for (int j = 1; j < pool; j++)
          if (full[q * pool + j][o] > m) m = full[q * pool + j][o];
        out[q][o] = m;
      end
  endfunction

  // GlobalAveragePooling then Dense(1)
  function automatic longint ref_head(input fm_t in, input int len, input int c_n,
                                      input int in_f, input int gap_w, input int gap_f,
                                      input longint w [MAXC], input int w_f,
                                      input longint b, input int b_f,
                                      input int r_w, input int r_f);
    real acc;
    acc = val(b, b_f);
    for (int c = 0; c < c_n; c++) begin
      real    s;
      longint g;
      s = 0.0;
      for (int p = 0; p < len; p++) s += val(in[p][c], in_f);
      g = ref_q(s / real'(len), gap_w, gap_f);
      acc += val(g, gap_f) * val(w[c], w_f);
    end
    return ref_q(acc, r_w, r_f);
  endfunction

  // z-score normalisation to <w, f>: population standard deviation
  function automatic void ref_zscore(input longint x [MAXL], input int len,
                                     input int w, input int f, output fm_t out);
    real mu, var_s, sd;
    mu = 0.0;
    for (int i = 0; i < len; i++) mu += real'(x[i]);
    mu = mu / real'(len);
    var_s = 0.0;
    for (int i = 0; i < len; i++) var_s += (real'(x[i]) - mu) * (real'(x[i]) - mu);
    sd = $sqrt(var_s / real'(len));
    for (int p = 0; p < MAXL; p++)
      for (int c = 0; c < MAXC; c++) out[p][c] = 0;
    for (int i = 0; i < len; i++)
      out[i][0] = (sd == 0.0) ? 0 : ref_q((real'(x[i]) - mu) / sd, w, f);
  endfunction

  // random code of a signed w-bit field limited to +-lim
  function automatic longint rnd_code(input int w, input longint lim);
    longint hi, c;
    hi = (longint'(1) << (w - 1)) - 1;
    if (lim > hi) lim = hi;
    c = longint'($urandom_range(0, 32'(2 * lim))) - lim;
    return c;
  endfunction

  // Whole denoiser: layer table of ht_pkg, skip added before the last layer
  function automatic void ref_denoiser(input fm_t x, input int len,
                                       input wt_t dw [DEN_NL], input bs_t db [DEN_NL],
                                       output fm_t y);
    fm_t a, t;
    a = x;
    for (int l = 0; l < DEN_NL - 1; l++) begin
      ref_conv(a, len, DEN_CIN[l], DEN_COUT[l], DEN_K[l], 1, 1'b1, DEN_F, dw[l], DEN_F,
               db[l], DEN_F, DEN_W, DEN_F, DEN_W, DEN_F, t);
      a = t;
    end
    for (int p = 0; p < len; p++)
      for (int c = 0; c < 4; c++)
        a[p][c] = ref_q(val(a[p][c], DEN_F) + val(x[p][0], DEN_F), DEN_W, DEN_F);
    ref_conv(a, len, 4, 1, 1, 1, 1'b0, DEN_F, dw[DEN_NL-1], DEN_F, db[DEN_NL-1], DEN_F,
             DEN_W, DEN_F, DEN_W, DEN_F, y);
  endfunction

  // Whole classifier: six blocks with the ht_pkg format table, then the head
  function automatic longint ref_classifier(input fm_t x, input int len0,
                                            input wt_t cw [CLF_NB], input bs_t cb [CLF_NB],
                                            input longint hw [MAXC], input longint hb);
    fm_t a, t;
    int  len, in_f;
    a = x;
    len = len0;
    in_f = DEN_F;
    for (int l = 0; l < CLF_NB; l++) begin
      ref_conv(a, len, CLF_CIN[l], CLF_COUT[l], CLF_K[l], 2, 1'b1, in_f,
               cw[l], CLF_WW[l] - CLF_WI[l], cb[l], CLF_BW[l] - CLF_BI[l],
               CLF_RW[l], CLF_RW[l] - CLF_RI[l], CLF_AW[l], CLF_AW[l] - CLF_AI[l], t);
      a = t;
      len = len / 2;
      in_f = CLF_AW[l] - CLF_AI[l];
    end
    return ref_head(a, len, 4, in_f, GAP_W, GAP_W - GAP_I, hw, HD_WW - HD_WI,
                    hb, HD_BW - HD_BI, SCORE_W, SCORE_F);
  endfunction

endpackage
