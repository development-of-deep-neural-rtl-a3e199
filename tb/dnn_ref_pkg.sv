// dnn_ref_pkg -- golden model of the network arithmetic for the testbenches.
//
// Written from the number formats rather than from the RTL: each function
// states the arithmetic of one stage in plain integer/real code.  Weights of
// all six layers and five experts live in package arrays filled by
// gen_weights(); the testbenches write the same values into the design
// through its configuration port (see cfg_word()).
package dnn_ref_pkg;
  import dnn_pkg::*;

  localparam int L = 6;            // layers
  localparam int E = N_EXPERTS;
  localparam int MAXN = 71;

  // layer shapes: in, out, has_bias
  localparam int L_IN  [L] = '{71, 27, 27, 27, 27, 27};
  localparam int L_OUT [L] = '{27, 27, 27, 27, 27, 3};
  localparam bit L_BIAS[L] = '{1, 1, 0, 1, 1, 1};

  int wq [L][E][27][MAXN];
  int wz [L][E][27];
  int ws [L][E][27];
  int wb [L][E][27];

  function automatic int srand(int lo, int hi);
    return lo + int'($urandom % 32'(hi - lo + 1));
  endfunction

  function automatic void gen_weights();
    for (int l = 0; l < L; l++)
      for (int e = 0; e < E; e++)
        for (int o = 0; o < L_OUT[l]; o++) begin
          for (int i = 0; i < L_IN[l]; i++)
            wq[l][e][o][i] = ((($urandom % 8) == 0) ? 0 : srand(-127, 127)); // some pruned
          wz[l][e][o] = srand(-512, 512);                         // +-2 in Q8.8
          ws[l][e][o] = (L_IN[l] > 27) ? srand(150, 450) : srand(300, 900);
          wb[l][e][o] = L_BIAS[l] ? srand(-300, 300) : 0;
        end
  endfunction

  // Configuration words for all parameters, in a fixed order.
  function automatic int n_cfg_words();
    int n = 0;
    for (int l = 0; l < L; l++) n += E * L_OUT[l] * (L_IN[l] + 3);
    return n;
  endfunction

  function automatic wcfg_t cfg_word(int idx);
    wcfg_t c;
    c = '0;
    c.en = 1'b1;
    for (int l = 0; l < L; l++)
      for (int e = 0; e < E; e++)
        for (int o = 0; o < L_OUT[l]; o++) begin
          if (idx < L_IN[l] + 3) begin
            c.layer = 3'(l); c.expert = 3'(e); c.row = 5'(o);
            if (idx < L_IN[l]) begin
              c.kind = WK_WEIGHT; c.col = 7'(idx); c.data = 16'(wq[l][e][o][idx]);
            end else if (idx == L_IN[l]) begin
              c.kind = WK_ZERO;  c.data = 16'(wz[l][e][o]);
            end else if (idx == L_IN[l] + 1) begin
              c.kind = WK_SCALE; c.data = 16'(ws[l][e][o]);
            end else begin
              c.kind = WK_BIAS;  c.data = 16'(wb[l][e][o]);
            end
            return c;
          end
          idx -= L_IN[l] + 3;
        end
    return '0;
  endfunction

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // y[o] = s*(sum q*x - z*sum x) / 2^24 (floor) + b, saturated to 16 bits.
  function automatic void ref_linear(int l, int e, input int x[MAXN], output int y[MAXN]);
    y = '{default: 0};
    for (int o = 0; o < L_OUT[l]; o++) begin
      longint acc = 0, xs = 0, c;
      for (int i = 0; i < L_IN[l]; i++) begin
        acc += longint'(wq[l][e][o][i]) * x[i];
        xs  += x[i];
      end
      c = acc * 256 - longint'(wz[l][e][o]) * xs;
      c = c * ws[l][e][o];
      c = (c >= 0) ? c / (longint'(1) << 24) : -((-c + (longint'(1) << 24) - 1) / (longint'(1) << 24));
      y[o] = sat16(c + wb[l][e][o]);
    end
  endfunction

  function automatic int floor_div(longint a, longint b);
    return (a >= 0) ? int'(a / b) : -int'((-a + b - 1) / b);
  endfunction

  function automatic int ref_lrelu(int x, int alpha_q10);
    return (x >= 0) ? x : floor_div(longint'(x) * alpha_q10, 1024);
  endfunction

  // Table softmax as specified: exp table in 1/64 steps of (max - x),
  // reciprocal table of the sum in 1/64 steps, product floor to Q.10.
  function automatic void ref_softmax(input int x[MAXN], int n, output int w[MAXN]);
    int m; longint e[MAXN]; longint s; int k; longint r;
    w = '{default: 0};
    m = x[0];
    for (int i = 1; i < n; i++) if (x[i] > m) m = x[i];
    s = 0;
    for (int i = 0; i < n; i++) begin
      k = (m - x[i]) >> 4;
      if (k > 511) k = 511;
      e[i] = longint'($floor($exp(-real'(k) / 64.0) * 65536.0 + 0.5));
      s += e[i];
    end
    k = int'(s >> 10);
    if (k > 2047) k = 2047;
    r = ((real'(k) + 0.5) / 64.0 < 1.0) ? 65535 :
        longint'($floor(65536.0 / ((real'(k) + 0.5) / 64.0) + 0.5));
    for (int i = 0; i < n; i++) w[i] = int'((e[i] * r) >> 22);
  endfunction

  function automatic int ref_tanh(int x);
    int k; int v; real xc;
    k = (x + 4096) >>> 3;
    if (k < 0) k = 0;
    if (k > 1023) k = 1023;
    xc = -4.0 + (real'(k) + 0.5) / 128.0;
    v = int'($floor($tanh(xc) * 4096.0 + 0.5));
    if (v > 4095) v = 4095;
    if (v < -4095) v = -4095;
    return v;
  endfunction

  // Whole network.
  function automatic void ref_dnn(input int x[MAXN], int e, output int y[3]);
    int h[MAXN], a[MAXN], emb[MAXN], ww[MAXN], vv[MAXN], sm[MAXN], xa[MAXN], o[MAXN];
    ref_linear(0, e, x, h);
    for (int i = 0; i < 27; i++) a[i] = ref_lrelu(h[i], 10);
    ref_linear(1, e, a, emb);
    ref_linear(2, e, emb, ww);
    ref_linear(3, e, emb, vv);
    ref_softmax(ww, 27, sm);
    xa = '{default: 0};
    for (int i = 0; i < 27; i++) xa[i] = sat16(longint'(floor_div(longint'(sm[i]) * vv[i], 1024)));
    ref_linear(4, e, xa, h);
    for (int i = 0; i < 27; i++) a[i] = ref_lrelu(h[i], 10);
    ref_linear(5, e, a, o);
    for (int i = 0; i < 3; i++) y[i] = ref_tanh(o[i]);
  endfunction

endpackage
