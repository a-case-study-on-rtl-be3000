// unet_ref_pkg / unet_ref: bit-exact software reference of the streaming int8 U-Net, for
// testbenches. It holds its own copy of every layer's weights and
// requantisation constants, generates them from a seed, writes them to the
// hardware through a configuration-bus callback in the testbench, and
// computes the class scores of an image with plain nested loops (no
// streaming), so it shares no code with the RTL apart from the package
// constants.
package unet_ref_pkg;

typedef int iq_t[$];

class unet_ref;
  int C, H, W, IN_CH, NCLS, LV;
  // weights[layer] flattened in the hardware's address order; requantisation
  // constants per layer and channel.
  int wts   [int][$];
  int mult  [int][$];
  int offs  [int][$];
  int shift [int];

  function new(int c, int h, int w, int in_ch, int ncls, int lv);
    C = c; H = h; W = w; IN_CH = in_ch; NCLS = ncls; LV = lv;
  endfunction

  static function int rnd(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  // Random constants for one layer with NW weights and COUT channels; the
  // shift is chosen from the fan-in so that activations stay in range.
  function void make_layer(int id, int nw, int cout, int fanin);
    int s;
    wts[id] = {};
    for (int i = 0; i < nw; i++) wts[id].push_back(rnd(-31, 31));
    s = 11;
    for (int f = fanin; f > 1; f = f / 4) s++;
    shift[id] = s;
    mult[id] = {}; offs[id] = {};
    for (int c = 0; c < cout; c++) begin
      mult[id].push_back(rnd(64, 127));
      offs[id].push_back(rnd(-(8 << s), 24 << s));
    end
  endfunction

  function void make_all();
    for (int l = 0; l <= LV; l++) begin
      int ci, co;
      ci = (l == 0) ? IN_CH : (C << (l - 1));
      co = C << l;
      make_layer(2 * l, 9 * ci * co, co, 9 * ci);
      make_layer(2 * l + 1, 9 * co * co, co, 9 * co);
    end
    for (int l = LV - 1; l >= 0; l--) begin
      int base, co;
      base = 10 + 3 * (LV - 1 - l);
      co = C << l;
      make_layer(base, 4 * 2 * co * co, co, 2 * co);
      make_layer(base + 1, 9 * 2 * co * co, co, 18 * co);
      make_layer(base + 2, 9 * co * co, co, 9 * co);
    end
    make_layer(22, NCLS * C, NCLS, C);
  endfunction

  static function int sat(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function int rq(int id, int c, longint acc, bit relu);
    longint p;
    p = acc * longint'(mult[id][c]) + longint'(offs[id][c]);
    p = p >>> shift[id];
    if (relu && p < 0) p = 0;
    return sat(p);
  endfunction

  // 3x3 conv, pad 1, then BN/ReLU. Maps are [y][x][c] flattened.
  function iq_t conv3(int id, iq_t x, int h, int w, int ci, int co);
    iq_t y;
    for (int r = 0; r < h; r++)
      for (int q = 0; q < w; q++)
        for (int o = 0; o < co; o++) begin
          longint s;
          s = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int rr, qq;
              rr = r + ky - 1; qq = q + kx - 1;
              if (rr >= 0 && rr < h && qq >= 0 && qq < w)
                for (int i = 0; i < ci; i++)
                  s += longint'(x[(rr * w + qq) * ci + i]) * wts[id][o * 9 * ci + (ky * 3 + kx) * ci + i];
            end
          y.push_back(rq(id, o, s, 1'b1));
        end
    return y;
  endfunction

  function iq_t pool(iq_t x, int h, int w, int ch);
    iq_t y;
    for (int r = 0; r < h / 2; r++)
      for (int q = 0; q < w / 2; q++)
        for (int c = 0; c < ch; c++) begin
          int m;
          m = x[((2 * r) * w + 2 * q) * ch + c];
          if (x[((2 * r) * w + 2 * q + 1) * ch + c] > m) m = x[((2 * r) * w + 2 * q + 1) * ch + c];
          if (x[((2 * r + 1) * w + 2 * q) * ch + c] > m) m = x[((2 * r + 1) * w + 2 * q) * ch + c];
          if (x[((2 * r + 1) * w + 2 * q + 1) * ch + c] > m) m = x[((2 * r + 1) * w + 2 * q + 1) * ch + c];
          y.push_back(m);
        end
    return y;
  endfunction

  // 2x2 stride-2 transposed conv from (h, w) to (2h, 2w), then scale/bias.
  function iq_t tconv(int id, iq_t x, int h, int w, int ci, int co);
    iq_t y;
    for (int r = 0; r < 2 * h; r++)
      for (int q = 0; q < 2 * w; q++)
        for (int o = 0; o < co; o++) begin
          longint s;
          s = 0;
          for (int i = 0; i < ci; i++)
            s += longint'(x[((r / 2) * w + q / 2) * ci + i]) * wts[id][(((r % 2) * 2 + q % 2) * co + o) * ci + i];
          y.push_back(rq(id, o, s, 1'b0));
        end
    return y;
  endfunction

  // Whole network: image [y][x][IN_CH] -> scores [y][x][NCLS].
  function iq_t run(iq_t img);
    iq_t x, t, e, cat, scores;
    iq_t skip [int];
    x = img;
    for (int l = 0; l <= LV; l++) begin
      int h, w, ci, co;
      h = H >> l; w = W >> l;
      ci = (l == 0) ? IN_CH : (C << (l - 1));
      co = C << l;
      t = conv3(2 * l, x, h, w, ci, co);
      e = conv3(2 * l + 1, t, h, w, co, co);
      if (l < LV) begin
        skip[l] = e;
        x = pool(e, h, w, co);
      end else begin
        x = e;
      end
    end
    for (int l = LV - 1; l >= 0; l--) begin
      int h, w, co, base;
      h = H >> l; w = W >> l; co = C << l;
      base = 10 + 3 * (LV - 1 - l);
      t = tconv(base, x, h / 2, w / 2, 2 * co, co);
      cat = {};
      for (int p = 0; p < h * w; p++) begin
        for (int c = 0; c < co; c++) cat.push_back(skip[l][p * co + c]);
        for (int c = 0; c < co; c++) cat.push_back(t[p * co + c]);
      end
      t = conv3(base + 1, cat, h, w, 2 * co, co);
      x = conv3(base + 2, t, h, w, co, co);
    end
    scores = {};
    for (int p = 0; p < H * W; p++)
      for (int k = 0; k < NCLS; k++) begin
        longint s;
        s = 0;
        for (int i = 0; i < C; i++) s += longint'(x[p * C + i]) * wts[22][k * C + i];
        scores.push_back(rq(22, k, s, 1'b0));
      end
    return scores;
  endfunction
endclass

endpackage
