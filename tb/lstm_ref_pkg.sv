// lstm_ref_pkg: reference model of the accelerator's arithmetic for the
// testbenches. The functions are written with real-valued floor divisions instead of shifts so
// that it does not share code or form with the RTL. Fixed to 16-bit words
// with 12 fraction bits (Q4.12), the RTL's defaults; the network model below
// takes the word format as class parameters.
package lstm_ref_pkg;
  localparam int ONE  = 4096;
  localparam longint MAXV = 32767;
  localparam longint MINV = -32768;

  function automatic int sat(input longint v);
    if (v > MAXV) return MAXV;
    if (v < MINV) return MINV;
    return int'(v);
  endfunction

  function automatic longint fdiv(input longint v, input int d);
    return longint'($floor(real'(v) / real'(d)));
  endfunction

  // four-segment piecewise-linear sigmoid
  function automatic int sig_ref(input int x);
    longint ax;
    int pos;
    ax = (x < 0) ? -longint'(x) : longint'(x);
    if (ax >= 5 * ONE)            pos = ONE;
    else if (ax >= 2.375 * ONE)   pos = int'(fdiv(ax, 32)) + int'(0.84375 * ONE);
    else if (ax >= ONE)           pos = int'(fdiv(ax, 8)) + int'(0.625 * ONE);
    else                          pos = int'(fdiv(ax, 4)) + ONE / 2;
    return (x < 0) ? ONE - pos : pos;
  endfunction

  function automatic int tanh_ref(input int x);
    return 2 * sig_ref(sat(2 * longint'(x))) - ONE;
  endfunction

  // one gate of one hidden unit: w[0..30] weights, w[31] bias
  function automatic int gate_ref(input int w[32], input int x[31], input bit is_tanh);
    longint acc;
    int pre;
    acc = longint'(w[31]) * ONE;
    for (int k = 0; k < 31; k++) acc += longint'(w[k]) * longint'(x[k]);
    pre = sat(fdiv(acc, ONE));
    return is_tanh ? tanh_ref(pre) : sig_ref(pre);
  endfunction

  function automatic void evo_ref(input int f, input int i, input int g, input int o,
                                  input int c_prev, output int c_new, output int h_new);
    c_new = sat(fdiv(longint'(f) * c_prev + longint'(i) * g, ONE));
    h_new = sat(fdiv(longint'(o) * tanh_ref(c_new), ONE));
  endfunction

  // random signed value in [-lim, lim-1]
  function automatic int rnd(input int lim);
    return int'($urandom_range(2 * lim - 1, 0)) - lim;
  endfunction
  // lstm_model: behavioural reference of the whole three-layer network for
  // the end-to-end testbenches, for any word width DW <= 32 with FRAC
  // fraction bits. Holds weights and state in arrays and advances one time
  // step on each call of step(). Its arithmetic is written separately from
  // the functions above, with 128-bit integers and division, so that 32-bit
  // words are exact. Weight layout equals the weight BRAM:
  // word ((layer*4 + gate)*H + unit)*32 + k, gate order f, i, g, o.
  class lstm_model #(int DW = 16, int FRAC = 12);
    typedef logic signed [127:0] wide_t;
    localparam int N_X = 16, H = 15, L = 3;
    localparam wide_t ONE = wide_t'(1) <<< FRAC;
    int w [L][4][H][32];
    int h [L][H];
    int c [L][H];

    static function int wsat(input wide_t v);
      wide_t maxv, minv;
      maxv = (wide_t'(1) <<< (DW - 1)) - 1;
      minv = -(wide_t'(1) <<< (DW - 1));
      if (v > maxv) return int'(maxv);
      if (v < minv) return int'(minv);
      return int'(v);
    endfunction

    // floor(v / d) for d > 0
    static function wide_t wfloor(input wide_t v, input wide_t d);
      wide_t q;
      q = v / d;
      if (v < 0 && q * d != v) q = q - 1;
      return q;
    endfunction

    static function int wsig(input int x);
      wide_t ax, pos;
      ax = (x < 0) ? -wide_t'(x) : wide_t'(x);
      if (ax >= 5 * ONE)                   pos = ONE;
      else if (8 * ax >= 19 * ONE)         pos = wfloor(ax, 32) + wfloor(27 * ONE, 32);
      else if (ax >= ONE)                  pos = wfloor(ax, 8) + wfloor(5 * ONE, 8);
      else                                 pos = wfloor(ax, 4) + wfloor(ONE, 2);
      return int'((x < 0) ? ONE - pos : pos);
    endfunction

    static function int wtanh(input int x);
      return int'(2 * wide_t'(wsig(wsat(2 * wide_t'(x)))) - ONE);
    endfunction

    static function int wgate(input int wv[32], input int x[31], input bit is_tanh);
      wide_t acc;
      int pre;
      acc = wide_t'(wv[31]) * ONE;
      for (int k = 0; k < 31; k++) acc += wide_t'(wv[k]) * wide_t'(x[k]);
      pre = wsat(wfloor(acc, ONE));
      return is_tanh ? wtanh(pre) : wsig(pre);
    endfunction

    function void clear();
      foreach (h[l, u]) begin h[l][u] = 0; c[l][u] = 0; end
    endfunction

    function void set_word(int idx, int v);
      int k, u, g, l;
      k = idx % 32; u = (idx / 32) % H; g = (idx / (32 * H)) % 4; l = idx / (32 * H * 4);
      w[l][g][u][k] = v;
    endfunction

    function void step(input int feat[N_X]);
      int xin [31];
      int nh [H], nc [H];
      int gv [4];
      for (int l = 0; l < L; l++) begin
        for (int k = 0; k < N_X; k++)
          xin[k] = (l == 0) ? feat[k] : ((k < H) ? h[l-1][k] : 0);
        for (int k = 0; k < H; k++) xin[N_X + k] = h[l][k];
        for (int u = 0; u < H; u++) begin
          for (int g = 0; g < 4; g++) gv[g] = wgate(w[l][g][u], xin, g == 2);
          nc[u] = wsat(wfloor(wide_t'(gv[0]) * c[l][u] + wide_t'(gv[1]) * gv[2], ONE));
          nh[u] = wsat(wfloor(wide_t'(gv[3]) * wtanh(nc[u]), ONE));
        end
        for (int u = 0; u < H; u++) begin h[l][u] = nh[u]; c[l][u] = nc[u]; end
      end
    endfunction
  endclass
endpackage
