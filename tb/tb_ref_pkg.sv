// tb_ref_pkg: reference models for the testbenches, written independently of
// the RTL: Q(16,15) multiply, activation functions, max pooling and a full
// convolution layer on flat integer arrays.
package tb_ref_pkg;

  localparam int FRAC = 15;
  localparam int ONE  = 1 << FRAC;

  function automatic int qmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> FRAC);
  endfunction

  // PLAN sigmoid evaluated on the real line, then floored to Q(16,15)
  function automatic int plan_sig(int x);
    real a, s;
    longint ax;
    ax = (x < 0) ? -longint'(x) : longint'(x);
    if (ax > 64'h7fffffff) ax = 64'h7fffffff;
    a = real'(ax) / real'(ONE);
    if (a >= 5.0)        s = 1.0;
    else if (a >= 2.375) s = a / 32.0 + 0.84375;
    else if (a >= 1.0)   s = a / 8.0 + 0.625;
    else                 s = a / 4.0 + 0.5;
    begin
      int q;
      q = int'($floor(s * real'(ONE)));
      return (x < 0) ? ONE - q : q;
    end
  endfunction

  function automatic int af_ref(int sel, int x);
    longint x2;
    case (sel)
      1: return (x < 0) ? 0 : x;
      2: return plan_sig(x);
      3: begin
        x2 = 2 * longint'(x);
        if (x2 > 64'sh7fffffff) x2 = 64'sh7fffffff;
        if (x2 < -64'sh80000000) x2 = -64'sh80000000;
        return 2 * plan_sig(int'(x2)) - ONE;
      end
      default: return x;
    endcase
  endfunction

  // One convolution layer. img[(r*W + c)*D + d], wt[((n*D + d)*K + i)*K + j],
  // result out[(n*PH + py)*PWD + px]; returns PH and PWD through ref args.
  function automatic void conv_layer(
      input int img[], input int wt[], input int bias[],
      input int N, input int W, input int D, input int K, input int S,
      input bit zpad, input int sel, input int P,
      output int out[], output int OH, output int OW, output int PH, output int PWD);
    int pad, acc, r, c, v, o[];
    pad = zpad ? (K - 1) / 2 : 0;
    OW = (W + 2 * pad - K) / S + 1;
    OH = OW;
    if (P < 1) P = 1;
    PWD = OW / P;
    PH  = OH / P;
    o = new[N * OH * OW];
    for (int n = 0; n < N; n++)
      for (int oy = 0; oy < OH; oy++)
        for (int ox = 0; ox < OW; ox++) begin
          acc = 0;
          for (int d = 0; d < D; d++)
            for (int i = 0; i < K; i++)
              for (int j = 0; j < K; j++) begin
                r = oy * S - pad + i;
                c = ox * S - pad + j;
                if (r >= 0 && r < W && c >= 0 && c < W)
                  acc += qmul(wt[((n * D + d) * K + i) * K + j], img[(r * W + c) * D + d]);
              end
          acc += bias[n];
          o[(n * OH + oy) * OW + ox] = af_ref(sel, acc);
        end
    out = new[N * PH * PWD];
    for (int n = 0; n < N; n++)
      for (int py = 0; py < PH; py++)
        for (int px = 0; px < PWD; px++) begin
          int m;
          m = o[(n * OH + py * P) * OW + px * P];
          for (int i = 0; i < P; i++)
            for (int j = 0; j < P; j++) begin
              v = o[(n * OH + py * P + i) * OW + px * P + j];
              if (v > m) m = v;
            end
          out[(n * PH + py) * PWD + px] = m;
        end
  endfunction

  // small random Q value in [-range, range)
  function automatic int rnd_q(int range);
    return int'($urandom_range(2 * range - 1)) - range;
  endfunction

endpackage
