// tb_ref_pkg: whole-tensor reference model of the pipeline's arithmetic.
//
// The RTL computes tile by tile with line buffers, counters and handshakes;
// this model computes each operator on a complete tensor held in a flat
// dynamic array (element (t, c) at index t*C + c) in plain loops, so the two
// share only the arithmetic definition of each operator and its tables.
// Weights are flat arrays w[co*CI + ci].  Used by the block and top-level
// testbenches.
package tb_ref_pkg;
  import hg_pkg::*;

  typedef int vec_t[];

  function automatic int clampi(input int v, input int lo, input int hi);
    return (v < lo) ? lo : ((v > hi) ? hi : v);
  endfunction

  // table lookup with the power-of-two index, written out with integers
  function automatic int tidx(input longint x, input longint alpha, input int shift);
    longint d;
    d = x - alpha;
    if (d < 0) return 0;
    d = d >>> shift;
    return (d > 63) ? 63 : int'(d);
  endfunction

  function automatic int rq(input longint x, input longint alpha, input int shift, input real scale);
    act_tab_t tab;
    tab = requant_tab(alpha, shift, scale);
    return int'(tab[tidx(x, alpha, shift)]);
  endfunction

  function automatic vec_t matmul(input vec_t x, input vec_t w, input int T, input int CI, input int CO);
    vec_t y;
    y = new[T * CO];
    for (int t = 0; t < T; t++)
      for (int co = 0; co < CO; co++) begin
        int s;
        s = 0;
        for (int ci = 0; ci < CI; ci++) s += x[t*CI + ci] * w[co*CI + ci];
        y[t*CO + co] = s;
      end
    return y;
  endfunction

  function automatic vec_t requant_all(input vec_t x, input longint alpha, input int shift, input real scale);
    vec_t y;
    act_tab_t tab;
    tab = requant_tab(alpha, shift, scale);
    y = new[x.size()];
    foreach (x[i]) y[i] = int'(tab[tidx(x[i], alpha, shift)]);
    return y;
  endfunction

  function automatic vec_t layernorm_ref(input vec_t x, input int T, input int C);
    vec_t y;
    int F, rs_shift;
    longint vmax;
    u12_tab_t rtab;
    act_tab_t qtab;
    F = $clog2(2048 * C);
    vmax = (longint'(C) * C * C * 49) / 4;
    rs_shift = pot_shift(vmax);
    rtab = rsqrt_tab(0, rs_shift, $sqrt(real'(C)) * real'(longint'(1) << F));
    qtab = requant_tab(-(longint'(4) << F), F - 3, 1.0 / real'(longint'(1) << F));
    y = new[T * C];
    for (int t = 0; t < T; t++) begin
      longint s, v, d, r;
      s = 0;
      v = 0;
      for (int c = 0; c < C; c++) s += x[t*C + c];
      for (int c = 0; c < C; c++) begin
        d = longint'(C) * x[t*C + c] - s;
        v += d * d;
      end
      r = longint'(rtab[tidx(v, 0, rs_shift)]);
      for (int c = 0; c < C; c++) begin
        d = longint'(C) * x[t*C + c] - s;
        y[t*C + c] = int'(qtab[tidx(d * r, -(longint'(4) << F), F - 3)]);
      end
    end
    return y;
  endfunction

  function automatic vec_t softmax_ref(input vec_t x, input int T, input int N);
    vec_t y;
    u8_tab_t et, r0, r1;
    longint piv;
    int s0, s1;
    et  = exp_tab(3, 0.0625);
    piv = 255 + (longint'(N) * 255 - 255) / 8;
    s0  = pot_shift(piv - 255);
    s1  = pot_shift(longint'(N) * 255 - piv);
    r0  = recip_tab(255, s0, 65025.0);
    r1  = recip_tab(piv, s1, 65025.0);
    y = new[T * N];
    for (int t = 0; t < T; t++) begin
      int m, s, r, e;
      m = x[t*N];
      for (int j = 1; j < N; j++) if (x[t*N + j] > m) m = x[t*N + j];
      s = 0;
      for (int j = 0; j < N; j++) s += int'(et[tidx(m - x[t*N + j], 0, 3)]);
      r = (s >= piv) ? int'(r1[tidx(s, piv, s1)]) : int'(r0[tidx(s, 255, s0)]);
      for (int j = 0; j < N; j++) begin
        e = int'(et[tidx(m - x[t*N + j], 0, 3)]);
        y[t*N + j] = clampi((e * r) >>> 14, 0, QMAX);
      end
    end
    return y;
  endfunction

  function automatic vec_t gelu_ref(input vec_t x);
    vec_t y;
    act_tab_t gt;
    gt = gelu_tab(-256, 3, 0.03125, 1.0);
    y = new[x.size()];
    foreach (x[i]) y[i] = int'(gt[tidx(x[i], -256, 3)]);
    return y;
  endfunction

  function automatic vec_t resadd_ref(input vec_t res, input vec_t acc);
    vec_t y;
    y = new[res.size()];
    foreach (res[i]) y[i] = rq(longint'(res[i]) * 32 + acc[i], -512, 4, 0.03125);
    return y;
  endfunction

  function automatic vec_t transpose(input vec_t x, input int R, input int C);
    vec_t y;
    y = new[R * C];
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) y[c*R + r] = x[r*C + c];
    return y;
  endfunction

  // One attention block.  wq/wk/wv[h] are DH x C, wp is C x C.
  function automatic vec_t mha_ref(input vec_t x, input vec_t wq[], input vec_t wk[], input vec_t wv[],
                                   input vec_t wp, input int T, input int C, input int H, input int DH);
    vec_t ln, cat, pj;
    ln  = layernorm_ref(x, T, C);
    cat = new[T * C];
    for (int h = 0; h < H; h++) begin
      vec_t q, k, v, s, r, a;
      q = requant_all(matmul(ln, wq[h], T, C, DH), -128, 2, 0.03125);
      k = requant_all(matmul(ln, wk[h], T, C, DH), -128, 2, 0.03125);
      v = requant_all(matmul(ln, wv[h], T, C, DH), -128, 2, 0.03125);
      s = matmul(q, k, T, DH, T);                       // Q K^T
      r = softmax_ref(s, T, T);
      a = requant_all(matmul(r, transpose(v, T, DH), T, T, DH), -128, 2, 0.03125);
      for (int t = 0; t < T; t++)
        for (int d = 0; d < DH; d++) cat[t*C + h*DH + d] = a[t*DH + d];
    end
    pj = matmul(cat, wp, T, C, C);
    return resadd_ref(x, pj);
  endfunction

  function automatic vec_t mlp_ref(input vec_t x, input vec_t w1, input vec_t w2,
                                   input int T, input int C, input int HID);
    vec_t ln, g;
    ln = layernorm_ref(x, T, C);
    g  = gelu_ref(matmul(ln, w1, T, C, HID));
    return resadd_ref(x, matmul(g, w2, T, HID, C));
  endfunction

  // stmm weight word: word cot*CIT + cit, element (co, ci) at (co*CIP + ci)*W_W
  function automatic logic [863:0] pack_word(input vec_t w, input int CI, input int CIP, input int COP,
                                             input int cot, input int cit);
    logic [863:0] word;
    word = '0;
    for (int co = 0; co < COP; co++)
      for (int ci = 0; ci < CIP; ci++)
        word[(co*CIP + ci)*W_W +: W_W] = W_W'(w[(cot*COP + co)*CI + cit*CIP + ci]);
    return word;
  endfunction

  // weights of full magnitude only (QMIN or QMAX), so that a scaled-down
  // MLP still moves its output noticeably away from the residual
  function automatic vec_t rand_ext(input int n);
    vec_t v;
    v = new[n];
    foreach (v[i]) v[i] = $urandom_range(1) ? QMAX : QMIN;
    return v;
  endfunction

  function automatic vec_t rand_vec(input int n, input int lo, input int hi);
    vec_t v;
    v = new[n];
    foreach (v[i]) v[i] = lo + int'($urandom_range(hi - lo));
    return v;
  endfunction
endpackage
