// bcvnn_ref_pkg: bit-exact software reference of the Bayesian complex LeNet-5
// accelerator, used by the end-to-end testbenches.
//
// The model is written from the arithmetic the design promises, not from its
// RTL: complex dot products in 64-bit integers, an arithmetic shift by FRAC
// and saturation to 16 bits, channel-wise Bernoulli dropout (one xorshift32
// stream per dropout engine, stepped only while that engine draws a mask,
// mask = top byte < keep_rate, output = (mask ? x : 0) * keep_rate >> 8),
// ReLU per part, 2x2 max pooling per part, and per class and part
// mean = sum/S and std = floor(sqrt((S*sumsq - sum^2)/S^2)).
// It also counts events the testbenches require to have happened.
// The layer order, the dropout algorithm and the mean/std outputs follow the
// published accelerator; the number format, generator, seeds and layer sizes
// are this design's choices, mirrored here. Interface: class bcvnn_model with
// new(sizes), arrays X and W1..W5 to fill, and run(cfg[3], drop_rate[3])
// which sets mean[][2] and stdv[][2]; it has no timing.
package bcvnn_ref_pkg;
  import cvnn_pkg::*;

  class bcvnn_model;
    int IMG, K, C1, C2, F1, F2, NCLS, S;
    int H1, P1, H2, P2, FIN;
    cplx_t X[], W1[], W2[], W3[], W4[], W5[];
    logic [31:0] seed [3][2];
    logic [31:0] st   [3][2];
    int n_chan [3];
    // Results of the last run
    longint mean [][2];
    longint stdv [][2];
    // Event counters
    int dropped_channels, kept_channels, saturations, mac_count;

    function new(int img, int k, int c1, int c2, int f1, int f2, int ncls, int s);
      IMG = img; K = k; C1 = c1; C2 = c2; F1 = f1; F2 = f2; NCLS = ncls; S = s;
      H1 = IMG - K + 1; P1 = H1 / 2; H2 = P1 - K + 1; P2 = H2 / 2; FIN = C2 * P2 * P2;
      X  = new[IMG*IMG];
      W1 = new[C1*K*K];  W2 = new[C2*C1*K*K];
      W3 = new[F1*FIN];  W4 = new[F2*F1];  W5 = new[NCLS*F2];
      mean = new[NCLS]; stdv = new[NCLS];
      seed[0][0] = 32'h9E37_79B9; seed[0][1] = 32'h7F4A_7C15;
      seed[1][0] = 32'h85EB_CA6B; seed[1][1] = 32'hC2B2_AE35;
      seed[2][0] = 32'h27D4_EB2F; seed[2][1] = 32'h1656_67B1;
      n_chan[0] = C1; n_chan[1] = C2; n_chan[2] = F1;
      for (int l = 0; l < 3; l++) for (int p = 0; p < 2; p++) st[l][p] = seed[l][p];
    endfunction

    static function logic [31:0] xs(logic [31:0] x);
      x ^= x << 13; x ^= x >> 17; x ^= x << 5;
      return x;
    endfunction

    function longint sat(longint s);
      longint q;
      q = s >>> FRAC;
      if (q > 32767)  begin saturations++; return 32767; end
      if (q < -32768) begin saturations++; return -32768; end
      return q;
    endfunction

    static function longint relu(longint x);
      return (x < 0) ? 0 : x;
    endfunction

    static function bit part_on(bayes_cfg_t c, int p);
      return (p == 0) ? (c == BAYES_R || c == BAYES_B) : (c == BAYES_I || c == BAYES_B);
    endfunction

    // Complex convolution, valid padding; in: ic*h*w, out: oc*oh*oh
    function void conv(const ref longint in[][2], input int ic_n, input int h,
                       const ref cplx_t w[], input int oc_n, ref longint out[][2]);
      int oh;
      oh = h - K + 1;
      out = new[oc_n*oh*oh];
      for (int oc = 0; oc < oc_n; oc++)
        for (int y = 0; y < oh; y++)
          for (int x = 0; x < oh; x++) begin
            longint sr, si;
            sr = 0; si = 0;
            for (int ic = 0; ic < ic_n; ic++)
              for (int ky = 0; ky < K; ky++)
                for (int kx = 0; kx < K; kx++) begin
                  cplx_t ww;
                  longint ar, ai;
                  ww = w[((oc*ic_n + ic)*K + ky)*K + kx];
                  ar = in[ic*h*h + (y+ky)*h + x+kx][0];
                  ai = in[ic*h*h + (y+ky)*h + x+kx][1];
                  sr += longint'(ww.re) * ar - longint'(ww.im) * ai;
                  si += longint'(ww.re) * ai + longint'(ww.im) * ar;
                  mac_count++;
                end
            out[(oc*oh + y)*oh + x][0] = sat(sr);
            out[(oc*oh + y)*oh + x][1] = sat(si);
          end
    endfunction

    function void fc(const ref longint in[][2], input int n_in, const ref cplx_t w[],
                     input int n_out, ref longint out[][2]);
      out = new[n_out];
      for (int o = 0; o < n_out; o++) begin
        longint sr, si;
        sr = 0; si = 0;
        for (int i = 0; i < n_in; i++) begin
          sr += longint'(w[o*n_in + i].re) * in[i][0] - longint'(w[o*n_in + i].im) * in[i][1];
          si += longint'(w[o*n_in + i].re) * in[i][1] + longint'(w[o*n_in + i].im) * in[i][0];
          mac_count++;
        end
        out[o][0] = sat(sr);
        out[o][1] = sat(si);
      end
    endfunction

    static function void pool(const ref longint in[][2], input int c_n, input int h,
                              ref longint out[][2]);
      int oh;
      oh = h / 2;
      out = new[c_n*oh*oh];
      for (int c = 0; c < c_n; c++)
        for (int y = 0; y < oh; y++)
          for (int x = 0; x < oh; x++)
            for (int p = 0; p < 2; p++) begin
              longint m;
              m = -32768;
              for (int dy = 0; dy < 2; dy++)
                for (int dx = 0; dx < 2; dx++)
                  if (in[c*h*h + (2*y+dy)*h + 2*x+dx][p] > m) m = in[c*h*h + (2*y+dy)*h + 2*x+dx][p];
              out[(c*oh + y)*oh + x][p] = m;
            end
    endfunction

    // Dropout (per the configuration) followed by ReLU, in place.
    function void drop_relu(ref longint v[][2], input int plane, input bayes_cfg_t cfg,
                            const ref bit mask[][2], input int keep, input bit do_drop);
      for (int i = 0; i < v.size(); i++)
        for (int p = 0; p < 2; p++) begin
          longint x;
          x = v[i][p];
          if (do_drop && part_on(cfg, p)) x = mask[i / plane][p] ? ((x * keep) >>> RATE_W) : 0;
          v[i][p] = relu(x);
        end
    endfunction

    // One complete run of S passes.
    function void run(bayes_cfg_t cfg[3], int drop_rate[3]);
      longint sum [][2], sq [][2];
      int keep[3];
      for (int l = 0; l < 3; l++) keep[l] = (1 << RATE_W) - drop_rate[l];
      sum = new[NCLS]; sq = new[NCLS];
      for (int o = 0; o < NCLS; o++) for (int p = 0; p < 2; p++) begin sum[o][p] = 0; sq[o][p] = 0; end
      for (int s = 0; s < S; s++) begin
        bit m0[][2], m1[][2], m2[][2];
        longint a[][2], b[][2];
        m0 = new[C1]; m1 = new[C2]; m2 = new[F1];
        for (int l = 0; l < 3; l++)
          for (int p = 0; p < 2; p++)
            if (part_on(cfg[l], p))
              for (int c = 0; c < n_chan[l]; c++) begin
                bit m;
                m = (int'(st[l][p][31:24]) < keep[l]);
                st[l][p] = xs(st[l][p]);
                if (l == 0) m0[c][p] = m; else if (l == 1) m1[c][p] = m; else m2[c][p] = m;
                if (m) kept_channels++; else dropped_channels++;
              end
        b = new[IMG*IMG];
        for (int i = 0; i < IMG*IMG; i++) begin b[i][0] = X[i].re; b[i][1] = X[i].im; end
        conv(b, 1, IMG, W1, C1, a);       drop_relu(a, H1*H1, cfg[0], m0, keep[0], 1);
        pool(a, C1, H1, b);
        conv(b, C1, P1, W2, C2, a);       drop_relu(a, H2*H2, cfg[1], m1, keep[1], 1);
        pool(a, C2, H2, b);
        fc(b, FIN, W3, F1, a);            drop_relu(a, 1, cfg[2], m2, keep[2], 1);
        fc(a, F1, W4, F2, b);             drop_relu(b, 1, BAYES_NONE, m2, keep[2], 0);
        fc(b, F2, W5, NCLS, a);
        for (int o = 0; o < NCLS; o++)
          for (int p = 0; p < 2; p++) begin
            sum[o][p] += a[o][p];
            sq[o][p]  += a[o][p] * a[o][p];
          end
      end
      for (int o = 0; o < NCLS; o++)
        for (int p = 0; p < 2; p++) begin
          longint v, r;
          mean[o][p] = sum[o][p] / S;
          v = (S * sq[o][p] - sum[o][p] * sum[o][p]) / (S * S);
          if (v < 0) v = 0;
          r = 0;
          for (int b = 31; b >= 0; b--) if ((r + (longint'(1) << b)) * (r + (longint'(1) << b)) <= v) r += longint'(1) << b;
          stdv[o][p] = (r > 32767) ? 32767 : r;
        end
    endfunction
  endclass

endpackage
