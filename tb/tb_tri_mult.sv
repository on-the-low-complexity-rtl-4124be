// tb_tri_mult -- checks Theta = -(Phi E) for random Hermitian tridiagonal
// Phi and full E against a real-number product, row by row.  Steps are
// applied with random idle clocks in between, once with a full band and
// once with a zero sub-diagonal (diagonal multiplier).  Each row must
// arrive one clock after the step that completes it, with its index.
module tb_tri_mult;
  import tma_pkg::*;
  import tb_util_pkg::*;

  localparam int K = 8;
  localparam real TOL = 0.003;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0;
  fx_t   phi_d;
  cplx_t phi_s;
  cplx_t e_row [K];
  logic  out_valid;
  logic [$clog2(K)-1:0] out_idx;
  cplx_t out_row [K];
  int checks = 0, failures = 0;

  tri_mult #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real pd [K];
  cr_t ps [K];          // ps[i] = phi_i(i-1)
  cr_t E  [K][K];
  cr_t T  [K][K];       // expected Theta

  task automatic run(input bit diag_only, input bit gaps);
    cr_t acc;
    int rows_seen;
    for (int i = 0; i < K; i++) begin
      pd[i] = fx2r(r2fx(urange(0.5, 1.5)));
      ps[i] = (i == 0 || diag_only) ? cr(0, 0) : c2r(r2c(cr(urange(-0.3, 0.3), urange(-0.3, 0.3))));
      for (int j = 0; j < K; j++) E[i][j] = c2r(r2c(cr(urange(-0.4, 0.4), urange(-0.4, 0.4))));
    end
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        acc = crscale(E[i][j], pd[i]);
        if (i > 0)     acc = cradd(acc, crmul(ps[i], E[i-1][j]));
        if (i < K - 1) acc = cradd(acc, crmul(crconj(ps[i+1]), E[i+1][j]));
        T[i][j] = crscale(acc, -1.0);
      end
    rows_seen = 0;
    for (int t = 0; t <= K; t++) begin
      @(negedge clk);
      in_valid = 1;
      in_first = (t == 0);
      phi_d = (t < K) ? r2fx(pd[t]) : '0;
      phi_s = (t < K - 1) ? r2c(ps[t+1]) : C_ZERO;
      for (int j = 0; j < K; j++) e_row[j] = (t < K) ? r2c(E[t][j]) : C_ZERO;
      @(posedge clk);
      #1;
      in_valid = 0;
      if (t > 0) begin
        checks++;
        if (!out_valid || int'(out_idx) != t - 1) begin
          failures++;
          $display("FAIL row %0d not delivered after step %0d (valid=%0d idx=%0d)", t - 1, t,
                   out_valid, out_idx);
        end else begin
          rows_seen++;
          for (int j = 0; j < K; j++) begin
            checks++;
            if (crabs(crsub(c2r(out_row[j]), T[t-1][j])) > TOL) begin
              failures++;
              $display("FAIL Theta[%0d][%0d] = (%f,%f) expected (%f,%f)", t - 1, j,
                       fx2r(out_row[j].re), fx2r(out_row[j].im), T[t-1][j].re, T[t-1][j].im);
            end
          end
        end
      end else begin
        checks++;
        if (out_valid) begin
          failures++;
          $display("FAIL output after the first step");
        end
      end
      if (gaps) repeat ($urandom % 3) @(negedge clk);
    end
    checks++;
    if (rows_seen != K) begin
      failures++;
      $display("FAIL only %0d rows", rows_seen);
    end
  endtask

  initial begin
    for (int j = 0; j < K; j++) e_row[j] = C_ZERO;
    phi_d = '0;
    phi_s = C_ZERO;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) run(r % 5 == 4, r % 2 == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
