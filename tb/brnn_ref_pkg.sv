// Reference models for the testbenches of the Bayesian LSTM accelerator.
//
// Written from the arithmetic definitions, not from the RTL: integer fixed
// point with 10 fractional bits for data, 20 for the cell state and products,
// activation tables recomputed here from exp(), the 128-bit LFSR with taps
// 102/121/126/127, the NAND-of-three mask bit and the word order of one mask
// set (four I-bit input words, then four H-bit hidden words).
package brnn_ref_pkg;

  function automatic longint sat16(longint v);   // v has 20 fractional bits
    longint s = v >>> 10;
    if (s > 32767)  return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647)  return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic int lut_idx(longint v);     // v has 20 fractional bits
    longint k = (v >>> 14) + 512;
    if (k < 0) return 0;
    if (k > 1023) return 1023;
    return int'(k);
  endfunction

  function automatic longint sigm(longint v);
    real x = real'(lut_idx(v) - 512) / 64.0;
    real y = 1.0 / (1.0 + $exp(-x));
    return longint'($rtoi(y * 1024.0 + 0.5));
  endfunction

  function automatic longint tanh_f(longint v);
    real x = real'(lut_idx(v) - 512) / 64.0;
    real y = ($exp(2.0 * x) - 1.0) / ($exp(2.0 * x) + 1.0);
    return longint'($rtoi(y * 1024.0 + (y >= 0.0 ? 0.5 : -0.5)));
  endfunction

  class lfsr_model;
    bit [127:0] r;
    function new(bit [127:0] seed); r = seed; endfunction
    function bit step();               // returns R127, then shifts
      bit o = r[127];
      bit fb = r[102] ^ r[121] ^ r[126] ^ r[127];
      r = {r[126:0], fb};
      return o;
    endfunction
  endclass

  class sampler_model;
    lfsr_model l[3];
    int I, H;
    function new(int i, int h, bit [127:0] seed);
      I = i; H = h;
      for (int k = 0; k < 3; k++) l[k] = new(seed ^ {32{4'(k + 1)}});
    endfunction
    function bit next_bit();
      bit a = l[0].step(), b = l[1].step(), c = l[2].step();
      return !(a && b && c);
    endfunction
    // One mask set: mx[q][n], mh[q][n]
    function void next_set(ref bit mx[4][], ref bit mh[4][]);
      for (int q = 0; q < 4; q++) begin
        mx[q] = new[I];
        for (int n = 0; n < I; n++) mx[q][n] = next_bit();
      end
      for (int q = 0; q < 4; q++) begin
        mh[q] = new[H];
        for (int n = 0; n < H; n++) mh[q][n] = next_bit();
      end
    endfunction
  endclass

  // LSTM layer model. Weights as in the RTL configuration map.
  class layer_model;
    int I, H;
    bit bayes;
    longint wx[4][][], wh[4][][], b[4][];
    longint h[], c[];
    bit mx[4][], mh[4][];
    sampler_model smp;

    function new(int i, int hh, bit by, bit [127:0] seed);
      I = i; H = hh; bayes = by;
      smp = new(i, hh, seed);
      for (int q = 0; q < 4; q++) begin
        wx[q] = new[H]; wh[q] = new[H]; b[q] = new[H];
        for (int r = 0; r < H; r++) begin
          wx[q][r] = new[I]; wh[q][r] = new[H];
        end
        mx[q] = new[I]; mh[q] = new[H];
        foreach (mx[q][n]) mx[q][n] = 1;
        foreach (mh[q][n]) mh[q][n] = 1;
      end
      h = new[H]; c = new[H];
    endfunction

    // Configuration word at address a (same map as lstm_layer).
    function longint cfg_word(int a);
      if (a < 4*I*H) return wx[a/(I*H)][(a%(I*H))/I][a%I];
      a -= 4*I*H;
      if (a < 4*H*H) return wh[a/(H*H)][(a%(H*H))/H][a%H];
      a -= 4*H*H;
      return b[a/H][a%H];
    endfunction
    function int ncfg(); return 4*I*H + 4*H*H + 4*H; endfunction

    function void randomize_weights(int amp);
      for (int q = 0; q < 4; q++)
        for (int r = 0; r < H; r++) begin
          for (int n = 0; n < I; n++) wx[q][r][n] = longint'($urandom_range(2*amp)) - amp;
          for (int n = 0; n < H; n++) wh[q][r][n] = longint'($urandom_range(2*amp)) - amp;
          b[q][r] = longint'($urandom_range(2*amp)) - amp;
        end
    endfunction

    function void step(longint x[], bit first, ref longint hout[]);
      longint pre[4][];
      longint gi, gf, gg, go;
      if (first) begin
        foreach (h[r]) begin h[r] = 0; c[r] = 0; end
        if (bayes) smp.next_set(mx, mh);
      end
      for (int q = 0; q < 4; q++) begin
        pre[q] = new[H];
        for (int r = 0; r < H; r++) begin
          longint s = b[q][r] <<< 10;
          for (int n = 0; n < I; n++) if (!bayes || mx[q][n]) s += wx[q][r][n] * x[n];
          for (int n = 0; n < H; n++) if (!bayes || mh[q][n]) s += wh[q][r][n] * h[n];
          pre[q][r] = s;
        end
      end
      hout = new[H];
      for (int r = 0; r < H; r++) begin
        gi = sigm(pre[0][r]); gf = sigm(pre[1][r]); gg = tanh_f(pre[2][r]); go = sigm(pre[3][r]);
        c[r] = sat32(((gf * c[r]) >>> 10) + gi * gg);
        hout[r] = sat16(go * tanh_f(c[r]));
      end
      h = hout;
    endfunction
  endclass

  // Dense layer model: y = W v + b, weights [row*N+col], biases [O*N+row].
  function automatic void dense_ref(longint w[], longint v[], int O, ref longint y[]);
    int N = v.size();
    y = new[O];
    for (int o = 0; o < O; o++) begin
      longint s = w[O*N + o] <<< 10;
      for (int n = 0; n < N; n++) s += w[o*N + n] * v[n];
      y[o] = sat16(s);
    end
  endfunction

  // Softmax model: exp table over [-16, 0] in 1/64 steps, scaled by 2^16.
  function automatic void softmax_ref(longint z[], ref longint p[]);
    longint zmax = z[0];
    longint e[];
    longint sum = 0;
    int O = z.size();
    e = new[O];
    p = new[O];
    foreach (z[k]) if (z[k] > zmax) zmax = z[k];
    foreach (z[k]) begin
      longint d = (z[k] - zmax) >>> 4;
      int idx = (d < -1023) ? 0 : int'(d + 1023);
      e[k] = longint'($rtoi($exp(real'(idx - 1023) / 64.0) * 65536.0 + 0.5));
      sum += e[k];
    end
    foreach (z[k]) p[k] = (e[k] <<< 10) / sum;
  endfunction

endpackage
