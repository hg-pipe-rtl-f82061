// hg_pkg: types, widths and table generators shared by the whole pipeline.
//
// The accelerator runs a ViT with 3-bit activations and 3-bit weights (the
// "A3W3" configuration).  Every non-linear function is a small table addressed
// by a power-of-two index: idx = clamp((x - alpha) >> s, 0, 2^n - 1), so no
// multiplier is needed to find the entry.  The functions below compute those
// tables at elaboration time from a handful of calibration constants (range
// start alpha, shift s, and real scale factors).  The table sizes (64 entries;
// 3, 8, 12 bit outputs; 2x64 for the reciprocal) follow the paper; the
// calibration constants are this design's defaults because the paper does not
// publish its calibrated ranges.  Sampling is at bin centres, except the
// exponent table, which samples bin starts so that entry 0 is exactly exp(0).
package hg_pkg;

  localparam int ACT_W = 3;                 // activation width (A3)
  localparam int W_W   = 3;                 // weight width (W3)
  localparam int ACC_W = 20;                // MAC accumulator width
  localparam int TAB_N = 6;                 // table address width
  localparam int TAB_D = 1 << TAB_N;        // 64 entries
  localparam int QMIN  = -(1 << (ACT_W - 1));
  localparam int QMAX  = (1 << (ACT_W - 1)) - 1;
  localparam int IDX_W = 48;                // width of table index arithmetic

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [W_W-1:0]   wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [TAB_N-1:0]        tidx_t;

  typedef logic signed [ACT_W-1:0] act_tab_t [TAB_D];
  typedef logic [7:0]              u8_tab_t  [TAB_D];
  typedef logic [11:0]             u12_tab_t [TAB_D];

  // Power-of-two index of Eq. (7): (x - alpha) >> s, clamped to the table.
  function automatic tidx_t pot_index(input logic signed [IDX_W-1:0] x,
                                      input logic signed [IDX_W-1:0] alpha,
                                      input int shift);
    logic signed [IDX_W-1:0] d;
    d = x - alpha;
    if (d < 0) return '0;
    d = d >>> shift;
    if (d > IDX_W'(TAB_D - 1)) return tidx_t'(TAB_D - 1);
    return tidx_t'(d);
  endfunction

  // Smallest s with (2^n - 1) * 2^s >= range: the ceiling of Eq. (7).
  function automatic int pot_shift(input longint range);
    int s;
    s = 0;
    while (((longint'(TAB_D) - 1) << s) < range) s++;
    return s;
  endfunction

  function automatic real bin_mid(input longint alpha, input int shift, input int i);
    return real'(alpha) + real'(longint'(i) << shift) +
           ((shift > 0) ? real'(longint'(1) << (shift - 1)) : 0.0);
  endfunction

  function automatic int round_clamp(input real v, input int lo, input int hi);
    int r;
    if (v > real'(hi)) return hi;
    if (v < real'(lo)) return lo;
    r = (v >= 0.0) ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
    return (r > hi) ? hi : ((r < lo) ? lo : r);
  endfunction

  // ReQuant of Eq. (3) sampled into a table: clamp(round(x * scale)).
  function automatic act_tab_t requant_tab(input longint alpha, input int shift, input real scale);
    act_tab_t t;
    for (int i = 0; i < TAB_D; i++)
      t[i] = act_t'(round_clamp(bin_mid(alpha, shift, i) * scale, QMIN, QMAX));
    return t;
  endfunction

  // GeLU followed by ReQuant, sampled as one curve.  GeLU uses the tanh form.
  function automatic act_tab_t gelu_tab(input longint alpha, input int shift,
                                        input real in_scale, input real out_scale);
    act_tab_t t;
    real x, u, g;
    for (int i = 0; i < TAB_D; i++) begin
      x = bin_mid(alpha, shift, i) * in_scale;
      u = 0.7978845608 * (x + 0.044715 * x * x * x);
      g = 0.5 * x * (2.0 - 2.0 / ($exp(2.0 * u) + 1.0));
      t[i] = act_t'(round_clamp(g * out_scale, QMIN, QMAX));
    end
    return t;
  endfunction

  // Inverted exponent table (Eq. 8): entry i = 255 * exp(-(i << s) * in_scale).
  function automatic u8_tab_t exp_tab(input int shift, input real in_scale);
    u8_tab_t t;
    for (int i = 0; i < TAB_D; i++)
      t[i] = 8'(round_clamp(255.0 * $exp(-real'(longint'(i) << shift) * in_scale), 0, 255));
    return t;
  endfunction

  // One segment of the reciprocal table: num / x at bin centres, saturated.
  function automatic u8_tab_t recip_tab(input longint alpha, input int shift, input real num);
    u8_tab_t t;
    real x;
    for (int i = 0; i < TAB_D; i++) begin
      x = bin_mid(alpha, shift, i);
      t[i] = 8'(round_clamp(num / ((x < 1.0) ? 1.0 : x), 0, 255));
    end
    return t;
  endfunction

  // Reciprocal square root table: num / sqrt(x) at bin centres, 12 bits.
  function automatic u12_tab_t rsqrt_tab(input longint alpha, input int shift, input real num);
    u12_tab_t t;
    real x;
    for (int i = 0; i < TAB_D; i++) begin
      x = bin_mid(alpha, shift, i);
      t[i] = 12'(round_clamp(num / $sqrt((x < 1.0) ? 1.0 : x), 0, 4095));
    end
    return t;
  endfunction

endpackage
