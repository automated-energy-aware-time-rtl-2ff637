// tb_ref_pkg: bit-exact reference arithmetic for the testbenches, written
// with plain integers and independent of the RTL package. Number format:
// signed 8-bit values, 4 fraction bits (1.0 = 16), products rounded half up
// and shifted back by 4, results saturated to -128..127.
package tb_ref_pkg;
  localparam int MAXH = 64;

  function automatic int r_sat(longint v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  // floor division by 2^s for signed values
  function automatic longint r_floor_shift(longint v, int s);
    longint d = longint'(1) << s;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic int r_rq(longint acc);
    return r_sat(r_floor_shift(acc + 8, 4));
  endfunction

  function automatic int r_mul(int a, int b);
    return r_rq(longint'(a) * longint'(b));
  endfunction

  function automatic int r_add(int a, int b);
    return r_sat(longint'(a) + longint'(b));
  endfunction

  // HardSigmoid: clamp(x/6 + 0.5, 0, 1); x/6 taken as x*10923/65536, rounded
  function automatic int r_hsig(int x);
    longint s = r_floor_shift(longint'(x) * 10923 + 32768, 16);
    longint l = s + 8;
    if (l < 0)  return 0;
    if (l > 16) return 16;
    return int'(l);
  endfunction

  function automatic int r_htanh(int x);
    if (x > 16)  return 16;
    if (x < -16) return -16;
    return x;
  endfunction

  // LSTM parameters, gate order i, f, g, o
  typedef struct {
    int wih [4][MAXH];
    int whh [4][MAXH][MAXH];
    int b   [4][MAXH];
    int lw  [MAXH];
    int lb;
  } lstm_par_t;

  // One LSTM step on all H units; h and c are updated in place.
  function automatic void r_lstm_step(input lstm_par_t p, input int H, input int x,
                                      ref int h [MAXH], ref int c [MAXH]);
    int hn [MAXH];
    for (int j = 0; j < H; j++) begin
      int a [4];
      for (int q = 0; q < 4; q++) begin
        longint acc = longint'(p.b[q][j]) * 16 + longint'(p.wih[q][j]) * x;
        for (int k = 0; k < H; k++) acc += longint'(p.whh[q][j][k]) * h[k];
        a[q] = r_rq(acc);
      end
      begin
        int gi = r_hsig(a[0]);
        int gf = r_hsig(a[1]);
        int gg = r_htanh(a[2]);
        int go = r_hsig(a[3]);
        c[j]  = r_add(r_mul(gf, c[j]), r_mul(gi, gg));
        hn[j] = r_mul(go, r_htanh(c[j]));
      end
    end
    for (int j = 0; j < H; j++) h[j] = hn[j];
  endfunction

  function automatic int r_linear(input lstm_par_t p, input int H, input int h [MAXH]);
    longint acc = longint'(p.lb) * 16;
    for (int k = 0; k < H; k++) acc += longint'(p.lw[k]) * h[k];
    return r_rq(acc);
  endfunction

  function automatic int r_lstm_model(input lstm_par_t p, input int H, input int N,
                                      input int xs [], output int hfin [MAXH]);
    int h [MAXH];
    int c [MAXH];
    for (int j = 0; j < MAXH; j++) begin h[j] = 0; c[j] = 0; end
    for (int t = 0; t < N; t++) r_lstm_step(p, H, xs[t], h, c);
    hfin = h;
    return r_linear(p, H, h);
  endfunction

  // Random signed value in [-m, m]
  function automatic int r_rand(int m);
    return int'($urandom_range(2*m)) - m;
  endfunction

  // Random LSTM parameters: gate weights up to +-wm, biases up to +-bm
  function automatic void r_rand_lstm(output lstm_par_t p, input int wm, input int bm);
    for (int q = 0; q < 4; q++)
      for (int j = 0; j < MAXH; j++) begin
        p.wih[q][j] = r_rand(wm);
        p.b[q][j]   = r_rand(bm);
        for (int k = 0; k < MAXH; k++) p.whh[q][j][k] = r_rand(wm);
      end
    for (int j = 0; j < MAXH; j++) p.lw[j] = r_rand(wm);
    p.lb = r_rand(bm);
  endfunction

  // Flat parameter index -> value, layout of the LSTM engine's memory map
  function automatic int r_lstm_flat(input lstm_par_t p, input int H, input int a);
    int cellp = 8*H + 4*H*H;
    if (a < 4*H)               return p.wih[a / H][a % H];
    if (a < 4*H + 4*H*H) begin
      int r = (a - 4*H) / H;
      return p.whh[r / H][r % H][(a - 4*H) % H];
    end
    if (a < cellp)             return p.b[(a - 4*H - 4*H*H) / H][(a - 4*H - 4*H*H) % H];
    if (a < cellp + H)         return p.lw[a - cellp];
    return p.lb;
  endfunction
endpackage
