// tb_tma_detector -- end-to-end test of the detector at its full size
// (N = 128 antennas, K = 8 users, default parameters).
//
// Each frame draws a correlated channel Gamma = R^(1/2) H Sigma^(1/2) / sqrt(N)
// with exponential receive correlation zeta^|l-m| (generated as an AR(1)
// process over the antennas, which has exactly that correlation), random
// path losses, 64-QAM symbols and Gaussian noise of variance eta^2.  The
// quantised Gamma and y are streamed into the detector.  The result is
// compared with a real-number model of the same algorithm fed with the
// same quantised inputs (Gram matrix, tridiagonal/diagonal approximate
// inverse, Theta = -X^-1 E, L Neumann terms, matched filter), and its
// distance to the exact MMSE estimate W^-1 Gamma^H y is reported.  The
// latency is checked against N + 4K + 6 clocks for L = 1 and
// N + 6K + 5 + (L-1)K clocks for L >= 2.
//
// Mechanisms that must each occur at least once: TMA mode, DNS mode, the
// L = 1 bypass of the Neumann loop, the Neumann loop itself (L >= 2),
// input stalls (idle clocks between rows), and convergence (the error to
// exact MMSE shrinks from L = 1 to a larger L on the same channel).
module tb_tma_detector;
  import tma_pkg::*;
  import tb_util_pkg::*;

  localparam int N = 128;
  localparam int K = 8;
  localparam real TOL = 0.03;

  logic clk = 0, rst_n = 0;
  tma_mode_e  cfg_mode = MODE_TMA;
  logic [3:0] cfg_iter = 4'd3;
  fx_t        eta2 = '0;
  logic       in_valid = 0, in_ready;
  cplx_t      gamma_row [K];
  cplx_t      y_in;
  logic       out_valid, busy;
  cplx_t      s_hat [K];

  int checks = 0, failures = 0;
  int cnt_tma = 0, cnt_dns = 0, cnt_bypass = 0, cnt_loop = 0, cnt_stall = 0, cnt_conv = 0;
  longint cyc = 0;

  tma_detector dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- channel, symbols, reference model ----------------
  cr_t G [N][K];          // quantised Gamma
  cr_t Y [N];             // quantised y
  cr_t S [K];             // transmitted symbols
  cr_t W [K][K];
  cr_t yh [K];
  cr_t s_mod [K], s_mmse [K], s_got [K];
  real eta2_r;

  task automatic make_frame(input real zeta, input real eta2v);
    cr_t g_prev [K];
    cr_t acc;
    real sig [K];
    real lv [4] = '{1.0, 3.0, 5.0, 7.0};
    for (int k = 0; k < K; k++) begin
      sig[k] = urange(0.6, 1.4);
      S[k] = cr((($urandom % 2) == 1 ? 1.0 : -1.0) * lv[$urandom % 4] / $sqrt(42.0),
                (($urandom % 2) == 1 ? 1.0 : -1.0) * lv[$urandom % 4] / $sqrt(42.0));
    end
    for (int n = 0; n < N; n++)
      for (int k = 0; k < K; k++) begin
        cr_t h;
        h = cr(gauss() / $sqrt(2.0), gauss() / $sqrt(2.0));
        if (n == 0) g_prev[k] = h;
        else g_prev[k] = cradd(crscale(g_prev[k], zeta), crscale(h, $sqrt(1.0 - zeta * zeta)));
        G[n][k] = c2r(r2c(crscale(g_prev[k], $sqrt(sig[k] / real'(N)))));
      end
    eta2 = r2fx(eta2v);
    eta2_r = fx2r(eta2);
    for (int n = 0; n < N; n++) begin
      acc = cr(gauss() * $sqrt(eta2v / 2.0), gauss() * $sqrt(eta2v / 2.0));
      for (int k = 0; k < K; k++) acc = cradd(acc, crmul(G[n][k], S[k]));
      Y[n] = c2r(r2c(acc));
    end
  endtask

  task automatic reference(input tma_mode_e mode, input int L);
    real pd [K];
    cr_t ps [K];
    real p [K], dd;
    cr_t nr [K];
    cr_t E [K][K], T [K][K], V [K][K], Vn [K][K], A [K][K+1];
    cr_t acc, f;
    // Gram matrix, matched filter
    for (int i = 0; i < K; i++) begin
      yh[i] = cr(0, 0);
      for (int n = 0; n < N; n++) yh[i] = cradd(yh[i], crmul(crconj(G[n][i]), Y[n]));
      for (int j = 0; j < K; j++) begin
        W[i][j] = cr(0, 0);
        for (int n = 0; n < N; n++) W[i][j] = cradd(W[i][j], crmul(crconj(G[n][i]), G[n][j]));
      end
      W[i][i] = cradd(W[i][i], cr(eta2_r, 0));
    end
    // approximate inverse of the band
    for (int i = 0; i < K; i++) begin
      cr_t s_i;
      s_i = (i == 0 || mode == MODE_DNS) ? cr(0, 0) : W[i][i-1];
      if (i == 0) begin
        p[i] = W[0][0].re;
        nr[i] = cr(0, 0);
      end else begin
        p[i] = W[i][i].re - (s_i.re * s_i.re + s_i.im * s_i.im) / p[i-1];
        nr[i] = crscale(s_i, -1.0 / p[i-1]);
      end
    end
    for (int i = 0; i < K; i++) begin
      dd = p[i];
      if (i < K - 1 && mode == MODE_TMA)
        dd -= (W[i+1][i].re * W[i+1][i].re + W[i+1][i].im * W[i+1][i].im) / W[i+1][i+1].re;
      pd[i] = 1.0 / dd;
      ps[i] = crscale(nr[i], pd[i]);
    end
    // E, Theta
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        int dij;
        dij = (i > j) ? i - j : j - i;
        E[i][j] = (dij == 0 || (mode == MODE_TMA && dij == 1)) ? cr(0, 0) : W[i][j];
      end
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        acc = crscale(E[i][j], pd[i]);
        if (i > 0) acc = cradd(acc, crmul(ps[i], E[i-1][j]));
        if (i < K - 1) acc = cradd(acc, crmul(crconj(ps[i+1]), E[i+1][j]));
        T[i][j] = crscale(acc, -1.0);
      end
    // Neumann series
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        if (i == j) V[i][j] = cr(pd[i], 0);
        else if (j == i - 1) V[i][j] = ps[i];
        else if (j == i + 1) V[i][j] = crconj(ps[j]);
        else V[i][j] = cr(0, 0);
      end
    for (int l = 2; l <= L; l++) begin
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++) begin
          acc = cr(0, 0);
          for (int k = 0; k < K; k++) acc = cradd(acc, crmul(T[i][k], V[k][j]));
          if (i == j) acc = cradd(acc, cr(pd[i], 0));
          else if (j == i - 1) acc = cradd(acc, ps[i]);
          else if (j == i + 1) acc = cradd(acc, crconj(ps[j]));
          Vn[i][j] = acc;
        end
      V = Vn;
    end
    for (int i = 0; i < K; i++) begin
      s_mod[i] = cr(0, 0);
      for (int j = 0; j < K; j++) s_mod[i] = cradd(s_mod[i], crmul(V[i][j], yh[j]));
    end
    // exact MMSE by Gauss-Jordan elimination on [W | y_hat]
    for (int i = 0; i < K; i++) begin
      for (int j = 0; j < K; j++) A[i][j] = W[i][j];
      A[i][K] = yh[i];
    end
    for (int c = 0; c < K; c++) begin
      for (int r = 0; r < K; r++) begin
        if (r == c) continue;
        f = crdiv(A[r][c], A[c][c]);
        for (int j = c; j <= K; j++) A[r][j] = crsub(A[r][j], crmul(f, A[c][j]));
      end
    end
    for (int i = 0; i < K; i++) s_mmse[i] = crdiv(A[i][K], A[i][i]);
  endtask

  // ---------------- drive one frame through the detector ----------------
  real last_err_mmse;

  task automatic run_frame(input tma_mode_e mode, input int L, input bit stall, input string tag);
    longint t_first, t_out;
    int exp_lat;
    real emax, emmse;
    reference(mode, L);
    @(negedge clk);
    cfg_mode = mode;
    cfg_iter = 4'(L);
    for (int n = 0; n < N; n++) begin
      in_valid = 1;
      for (int k = 0; k < K; k++) gamma_row[k] = r2c(G[n][k]);
      y_in = r2c(Y[n]);
      @(posedge clk);
      if (!in_ready) begin
        failures++;
        $display("FAIL %s: in_ready low while streaming row %0d", tag, n);
      end
      if (n == 0) t_first = cyc;
      @(negedge clk);
      if (stall && ($urandom % 5 == 0)) begin
        in_valid = 0;
        gamma_row[0] = cplx_t'($urandom);
        cnt_stall++;
        repeat (1 + $urandom % 2) @(negedge clk);
      end
    end
    in_valid = 0;
    while (!out_valid) @(posedge clk);
    t_out = cyc;
    #1;
    for (int k = 0; k < K; k++) s_got[k] = c2r(s_hat[k]);
    emax = 0;
    emmse = 0;
    for (int k = 0; k < K; k++) begin
      real e;
      e = crabs(crsub(s_got[k], s_mod[k]));
      if (e > emax) emax = e;
      e = crabs(crsub(s_got[k], s_mmse[k]));
      if (e > emmse) emmse = e;
    end
    last_err_mmse = emmse;
    checks++;
    if (emax > TOL) begin
      failures++;
      $display("FAIL %s: max |s_hat - model| = %f", tag, emax);
      for (int k = 0; k < K; k++)
        $display("   k=%0d rtl (%f,%f) model (%f,%f) mmse (%f,%f)", k, s_got[k].re, s_got[k].im,
                 s_mod[k].re, s_mod[k].im, s_mmse[k].re, s_mmse[k].im);
    end
    if (!stall) begin
      exp_lat = (L > 1) ? N + 6 * K + 5 + (L - 1) * K : N + 4 * K + 6;
      checks++;
      if (int'(t_out - t_first) != exp_lat) begin
        failures++;
        $display("FAIL %s: latency %0d, expected %0d", tag, t_out - t_first, exp_lat);
      end
    end
    $display("%s: mode=%s L=%0d latency=%0d max|rtl-model|=%f max|rtl-mmse|=%f", tag,
             mode.name(), L, t_out - t_first, emax, emmse);
    if (mode == MODE_TMA) cnt_tma++; else cnt_dns++;
    if (L == 1) cnt_bypass++; else cnt_loop++;
  endtask

  initial begin
    real e1, eL;
    y_in = C_ZERO;
    for (int k = 0; k < K; k++) gamma_row[k] = C_ZERO;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    make_frame(0.0, 0.05);  run_frame(MODE_TMA, 3, 0, "tma_z0.0_L3");
    make_frame(0.3, 0.05);  run_frame(MODE_TMA, 3, 0, "tma_z0.3_L3");
    make_frame(0.5, 0.05);  run_frame(MODE_TMA, 5, 1, "tma_z0.5_L5_stall");
    make_frame(0.3, 0.05);  run_frame(MODE_DNS, 5, 0, "dns_z0.3_L5");
    make_frame(0.5, 0.05);  run_frame(MODE_DNS, 8, 1, "dns_z0.5_L8_stall");
    make_frame(0.3, 0.02);  run_frame(MODE_DNS, 1, 0, "dns_z0.3_L1");
    // convergence on one channel: L = 1 against L = 6
    make_frame(0.5, 0.05);
    run_frame(MODE_TMA, 1, 0, "tma_z0.5_L1");
    e1 = last_err_mmse;
    run_frame(MODE_TMA, 6, 0, "tma_z0.5_L6");
    eL = last_err_mmse;
    checks++;
    if (eL < e1) cnt_conv++;
    else begin
      failures++;
      $display("FAIL no convergence: L=1 error %f, L=6 error %f", e1, eL);
    end
    checks++;
    if (eL > 0.05) begin
      failures++;
      $display("FAIL L=6 estimate not near MMSE (%f)", eL);
    end

    $display("mechanisms: tma=%0d dns=%0d bypass(L=1)=%0d neumann_loop=%0d stall=%0d converge=%0d",
             cnt_tma, cnt_dns, cnt_bypass, cnt_loop, cnt_stall, cnt_conv);
    checks++;
    if (cnt_tma == 0 || cnt_dns == 0 || cnt_bypass == 0 || cnt_loop == 0 || cnt_stall == 0 ||
        cnt_conv == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
