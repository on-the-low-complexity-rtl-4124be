// tb_tri_inv -- checks the folded tridiagonal inverter against a
// real-number model of the same recursion (forward pivots p_i, one-term
// backward correction, phi_ii = 1/d_i, phi_i(i-1) = -w_i(i-1)/p_(i-1)
// * phi_ii).  Random diagonally dominant Hermitian bands are used, in
// tridiagonal mode and with a zero sub-diagonal (diagonal mode, where
// phi_ii must be 1/w_ii).  Also checks the timing: a result every two
// clocks, the first two clocks after start, done 2K clocks after start.
module tb_tri_inv;
  import tma_pkg::*;
  import tb_util_pkg::*;

  localparam int K = 8;
  localparam real TOL = 0.01;

  logic clk = 0, rst_n = 0, start = 0;
  fx_t   w_diag [K];
  cplx_t w_sub  [K];
  logic  busy, phi_valid, done;
  logic [$clog2(K)-1:0] phi_idx;
  fx_t   phi_diag;
  cplx_t phi_sub;
  int    checks = 0, failures = 0;
  int    cyc = 0;

  tri_inv #(.K(K)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real  d [K];
  cr_t  s [K];
  real  e_pd [K];
  cr_t  e_ps [K];

  task automatic model();
    real p [K];
    cr_t nr [K];
    real dd;
    for (int i = 0; i < K; i++) begin
      if (i == 0) begin
        p[i]  = d[i];
        nr[i] = cr(0.0, 0.0);
      end else begin
        p[i]  = d[i] - (s[i].re * s[i].re + s[i].im * s[i].im) / p[i-1];
        nr[i] = crscale(s[i], -1.0 / p[i-1]);
      end
    end
    for (int i = 0; i < K; i++) begin
      dd = p[i];
      if (i < K - 1) dd -= (s[i+1].re * s[i+1].re + s[i+1].im * s[i+1].im) / d[i+1];
      e_pd[i] = 1.0 / dd;
      e_ps[i] = crscale(nr[i], e_pd[i]);
    end
  endtask

  task automatic run(input bit diag_only);
    int t0, got_n;
    for (int i = 0; i < K; i++) begin
      d[i] = urange(0.7, 1.6);
      s[i] = (i == 0 || diag_only) ? cr(0.0, 0.0) : cr(urange(-0.3, 0.3), urange(-0.3, 0.3));
      w_diag[i] = r2fx(d[i]);
      w_sub[i]  = r2c(s[i]);
      d[i] = fx2r(w_diag[i]);
      s[i] = c2r(w_sub[i]);
    end
    model();
    @(negedge clk);
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    got_n = 0;
    while (got_n < K) begin
      @(posedge clk);
      #1;
      if (phi_valid) begin
        checks++;
        if (int'(phi_idx) != got_n || (cyc - t0) != 2 * (got_n + 1)) begin
          failures++;
          $display("FAIL timing idx=%0d expected %0d at %0d clocks (got %0d)", phi_idx, got_n,
                   2 * (got_n + 1), cyc - t0);
        end
        checks++;
        if (rabs(fx2r(phi_diag) - e_pd[got_n]) > TOL ||
            crabs(crsub(c2r(phi_sub), e_ps[got_n])) > TOL) begin
          failures++;
          $display("FAIL i=%0d phi_ii=%f exp %f  phi_sub=(%f,%f) exp (%f,%f)", got_n,
                   fx2r(phi_diag), e_pd[got_n], fx2r(phi_sub.re), fx2r(phi_sub.im),
                   e_ps[got_n].re, e_ps[got_n].im);
        end
        if (diag_only) begin
          checks++;
          if (rabs(fx2r(phi_diag) - 1.0 / d[got_n]) > TOL) begin
            failures++;
            $display("FAIL diagonal mode i=%0d", got_n);
          end
        end
        checks++;
        if (done != (got_n == K - 1)) begin
          failures++;
          $display("FAIL done flag at i=%0d", got_n);
        end
        got_n++;
      end
      if (cyc - t0 > 4 * K) begin
        failures++;
        $display("FAIL timeout");
        break;
      end
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) run(r % 4 == 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
