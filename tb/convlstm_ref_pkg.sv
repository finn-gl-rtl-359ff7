// convlstm_ref_pkg: integer reference model of the quantised ConvLSTM,
// written independently of the RTL for the testbenches. Flat arrays:
//   feature map  m[(y*W + x)*C + c]
//   conv weights w[o*9*CIN + (ky*3 + kx)*CIN + c]
//   dense/gate weights w[r*MW + col]
//   thresholds   t[ch*NT + k]
// A threshold activation is the count of thresholds <= value (+ bias).
package convlstm_ref_pkg;

  function automatic int mt(int x, const ref int t[], input int base, int nt, int bias);
    int n = 0;
    for (int k = 0; k < nt; k++) if (x >= t[base + k]) n++;
    return n + bias;
  endfunction

  // 3x3 convolution, zero padding 1, then per-channel thresholds (63, bias 0)
  function automatic void conv3x3(const ref int in[], input int H, W, CIN, COUT, STRIDE,
                                  const ref int wt[], const ref int thr[], ref int out[],
                                  ref int pad_taps);
    int OH = (H - 1) / STRIDE + 1, OW = (W - 1) / STRIDE + 1;
    out = new[OH * OW * COUT];
    for (int oy = 0; oy < OH; oy++) for (int ox = 0; ox < OW; ox++)
      for (int o = 0; o < COUT; o++) begin
        int a = 0;
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
          int iy = oy * STRIDE + ky - 1, ix = ox * STRIDE + kx - 1;
          if (iy < 0 || iy >= H || ix < 0 || ix >= W) begin
            if (o == 0) pad_taps++;
            continue;
          end
          for (int c = 0; c < CIN; c++)
            a += wt[o * 9 * CIN + (ky * 3 + kx) * CIN + c] * in[(iy * W + ix) * CIN + c];
        end
        out[(oy * OW + ox) * COUT + o] = mt(a, thr, o * 63, 63, 0);
      end
  endfunction

  // dense layer; nt = 0 returns raw accumulators
  function automatic void dense(const ref int in[], input int MW, MH, const ref int wt[],
                                const ref int thr[], input int nt, ref int out[]);
    out = new[MH];
    for (int r = 0; r < MH; r++) begin
      int a = 0;
      for (int c = 0; c < MW; c++) a += wt[r * MW + c] * in[c];
      out[r] = (nt == 0) ? a : mt(a, thr, r * nt, nt, 0);
    end
  endfunction

  // LSTM over SEQ steps from zero state; hs receives every h_t (SEQ*HID).
  // Gate rows: 4*j + q, q = 0 f, 1 i, 2 g, 3 o; columns: x then h.
  function automatic void lstm(const ref int x[], input int IN_DIM, HID, SEQ,
                               const ref int wt[], const ref int tf[], const ref int ti[],
                               const ref int tg[], const ref int to[], const ref int tc[],
                               const ref int tt[], const ref int th[], ref int hs[]);
    int MW = IN_DIM + HID;
    int h[] = new[HID];
    int c[] = new[HID];
    int hn[] = new[HID];
    hs = new[SEQ * HID];
    foreach (h[k]) begin h[k] = 0; c[k] = 0; end
    for (int t = 0; t < SEQ; t++) begin
      for (int j = 0; j < HID; j++) begin
        int a[4];
        int f, i, g, o, cn, tcn;
        for (int q = 0; q < 4; q++) begin
          a[q] = 0;
          for (int col = 0; col < MW; col++)
            a[q] += wt[(4 * j + q) * MW + col] * ((col < IN_DIM) ? x[t * IN_DIM + col] : h[col - IN_DIM]);
        end
        f  = mt(a[0], tf, j * 63, 63, 0);
        i  = mt(a[1], ti, j * 63, 63, 0);
        g  = mt(a[2], tg, j * 62, 62, -31);
        o  = mt(a[3], to, j * 63, 63, 0);
        cn = mt(f * c[j] + i * g, tc, 0, 62, -31);
        tcn = mt(cn, tt, 0, 62, -31);
        hn[j] = mt(o * tcn, th, 0, 62, -31);
        c[j] = cn;
      end
      for (int j = 0; j < HID; j++) begin
        h[j] = hn[j];
        hs[t * HID + j] = hn[j];
      end
    end
  endfunction

endpackage
