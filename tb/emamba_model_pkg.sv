// emamba_model_pkg -- bit-accurate behavioural model of the whole accelerator,
// used as the reference of the mamba_block, ssm_block, conv1d and end-to-end
// testbenches.
//
// The model keeps its own copy of the parameter image (img[address] = INT8
// value, the same values the testbench writes over the parameter bus) and its
// own address map, conv history and SSM state. It processes one token at a
// time in sequence order, which is what the pipelined hardware must be
// equivalent to.
package emamba_model_pkg;
  import emamba_ref_pkg::*;

class emamba_model;

  int D, ED, N, R, K, SEQ, NOUT, H, W, C, P, M;
  int img [];
  // per block state
  int hist  [][][];    // [blk][K-1][ED]
  int conv_t[];        // tokens seen in the frame, per block
  int h     [][][];    // [blk][ED][N]
  int ssm_t [];
  int head_acc [];
  int head_t;

  function new(int d = 20, int ed = 40, int n = 8, int r = 2, int k = 4,
               int seq = 16, int nout = 57, int hh = 8, int ww = 8, int cc = 5,
               int p = 2, int m = 2);
    D = d; ED = ed; N = n; R = r; K = k; SEQ = seq; NOUT = nout;
    H = hh; W = ww; C = cc; P = p; M = m;
    img = new[65536];
    hist = new[M]; h = new[M];
    conv_t = new[M]; ssm_t = new[M];
    foreach (hist[b]) begin
      hist[b] = new[K-1];
      foreach (hist[b][i]) hist[b][i] = new[ED];
      h[b] = new[ED];
      foreach (h[b][e]) h[b][e] = new[N];
    end
    head_acc = new[D];
    reset_state();
  endfunction

  function void reset_state();
    foreach (hist[b]) begin
      foreach (hist[b][i]) foreach (hist[b][i][e]) hist[b][i][e] = 0;
      foreach (h[b][e]) foreach (h[b][e][n]) h[b][e][n] = 0;
      conv_t[b] = 0; ssm_t[b] = 0;
    end
    foreach (head_acc[i]) head_acc[i] = 0;
    head_t = 0;
  endfunction

  // ---- address map ----
  function int lsz(int i, int o); return o*(i+1); endfunction
  function int ssm_sz(); return lsz(ED,R) + 2*lsz(ED,N) + lsz(R,ED) + ED*N + ED; endfunction
  function int blk_sz(); return 2*D + 2*lsz(D,ED) + ED*(K+1) + ssm_sz() + lsz(ED,D); endfunction
  function int pe_base();   return 0; endfunction
  function int blk_base(int b); return lsz(P*P*C, D) + b*blk_sz(); endfunction
  function int head_base(); return blk_base(M); endfunction
  function int total_words(); return head_base() + lsz(D, NOUT); endfunction

  // ---- layers ----
  function void linear(int base, int nin, int nout, int shift, bit relu,
                       int x[], ref int y[]);
    longint acc;
    y = new[nout];
    for (int j = 0; j < nout; j++) begin
      acc = 0;
      for (int i = 0; i < nin; i++) acc += longint'(img[base + j*nin + i]) * x[i];
      y[j] = s8(fdiv2(acc, shift) + img[base + nout*nin + j]);
      if (relu && y[j] < 0) y[j] = 0;
    end
  endfunction

  function void rnorm(int base, int d, int x[], ref int y[]);
    int sum, mx, mn, mu;
    sum = 0; mx = x[0]; mn = x[0];
    for (int i = 0; i < d; i++) begin
      sum += x[i];
      if (x[i] > mx) mx = x[i];
      if (x[i] < mn) mn = x[i];
    end
    mu = rn_mean(sum, d);
    y = new[d];
    for (int i = 0; i < d; i++)
      y[i] = rn_elem(x[i] - mu, mx - mn, img[base + i], img[base + d + i], 12, 13);
  endfunction

  function void conv(int b, int base, int x[], ref int y[]);
    longint acc;
    y = new[ED];
    for (int c = 0; c < ED; c++) begin
      acc = longint'(img[base + c*K + K-1]) * x[c];
      for (int k = 0; k < K-1; k++) acc += longint'(img[base + c*K + k]) * hist[b][k][c];
      y[c] = s8(fdiv2(acc, 4) + img[base + ED*K + c]);
    end
    if (conv_t[b] == SEQ-1) begin
      conv_t[b] = 0;
      foreach (hist[b][k]) foreach (hist[b][k][c]) hist[b][k][c] = 0;
    end else begin
      conv_t[b]++;
      for (int k = 0; k < K-2; k++) hist[b][k] = hist[b][k+1];
      for (int c = 0; c < ED; c++) hist[b][K-2][c] = x[c];
    end
  endfunction

  // statistics gathered while the model runs
  int n_exp_low, n_exp_high, n_h_sat;

  function void ssm(int b, int base, int x[], ref int y[]);
    int dt[], bv[], cv[], delta[];
    int b_b, b_c, b_del, b_a, b_d;
    longint ysum, hn;
    int da, abar, bbar;
    b_b   = base + lsz(ED, R);
    b_c   = b_b + lsz(ED, N);
    b_del = b_c + lsz(ED, N);
    b_a   = b_del + lsz(R, ED);
    b_d   = b_a + ED*N;
    linear(base, ED, R, 6, 1'b1, x, dt);
    linear(b_b, ED, N, 6, 1'b0, x, bv);
    linear(b_c, ED, N, 6, 1'b0, x, cv);
    linear(b_del, R, ED, 4, 1'b0, dt, delta);
    y = new[ED];
    for (int e = 0; e < ED; e++) begin
      ysum = 0;
      for (int n = 0; n < N; n++) begin
        da   = s8(fdiv2(longint'(delta[e]) * img[b_a + e*N + n], 4));
        if (da < -64) n_exp_low++;
        if (da >= 16) n_exp_high++;
        abar = exp_ref(da);
        bbar = s8(fdiv2(longint'(delta[e]) * bv[n], 4));
        hn   = longint'(abar) * h[b][e][n] + longint'(bbar) * x[e] * 128;
        if (hn != s24(hn)) n_h_sat++;
        hn   = s24(hn);
        ysum += longint'(cv[n]) * hn;
        h[b][e][n] = int'(fdiv2(hn, 7));
      end
      y[e] = s8(fdiv2(ysum, 15) + fdiv2(longint'(img[b_d + e]) * x[e], 4));
    end
    if (ssm_t[b] == SEQ-1) begin
      ssm_t[b] = 0;
      foreach (h[b][e]) foreach (h[b][e][n]) h[b][e][n] = 0;
    end else ssm_t[b]++;
  endfunction

  int n_silu_low, n_silu_high;

  function void block(int b, int x[], ref int y[]);
    int base, nx[], xi[], z[], cv[], s[], g[], o[];
    base = blk_base(b);
    rnorm(base, D, x, nx);
    linear(base + 2*D, D, ED, 6, 1'b0, nx, xi);
    linear(base + 2*D + lsz(D,ED), D, ED, 6, 1'b0, nx, z);
    conv(b, base + 2*D + 2*lsz(D,ED), xi, cv);
    ssm(b, base + 2*D + 2*lsz(D,ED) + ED*(K+1), cv, s);
    g = new[ED];
    for (int e = 0; e < ED; e++) begin
      if (z[e] < -112) n_silu_low++;
      if (z[e] >= 112) n_silu_high++;
      g[e] = s8(fdiv2(longint'(s[e]) * silu_ref(z[e]), 4));
    end
    linear(base + 2*D + 2*lsz(D,ED) + ED*(K+1) + ssm_sz(), ED, D, 6, 1'b0, g, o);
    y = new[D];
    for (int i = 0; i < D; i++) y[i] = s8(o[i] + x[i]);
  endfunction

  // patch p of a frame, element order (dr*P+dc)*C+ch
  function void patch(int frame[], int p, ref int v[]);
    int pr, pc;
    pr = p / (W/P); pc = p % (W/P);
    v = new[P*P*C];
    for (int dr = 0; dr < P; dr++)
      for (int dc = 0; dc < P; dc++)
        for (int ch = 0; ch < C; ch++)
          v[(dr*P+dc)*C+ch] = frame[((pr*P+dr)*W + pc*P+dc)*C + ch];
  endfunction

  // whole frame -> NOUT results
  function void run_frame(int frame[], ref int res[]);
    int v[], t[], u[], mean[];
    mean = new[D];
    foreach (mean[i]) mean[i] = 0;
    for (int p = 0; p < SEQ; p++) begin
      patch(frame, p, v);
      linear(pe_base(), P*P*C, D, 6, 1'b0, v, t);
      for (int b = 0; b < M; b++) begin
        block(b, t, u);
        t = u;
      end
      foreach (mean[i]) mean[i] += t[i];
    end
    foreach (mean[i]) mean[i] = s8(fdiv2(mean[i], $clog2(SEQ)));
    linear(head_base(), D, NOUT, 6, 1'b0, mean, res);
  endfunction
endclass

endpackage
