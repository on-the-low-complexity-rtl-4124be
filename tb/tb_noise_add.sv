// tb_noise_add -- checks W = G + eta^2 I with Hermitian completion:
// diagonal = Re(g_ii) + eta^2 (saturated) with zero imaginary part,
// lower triangle passed through, upper triangle = conjugate of the lower.
module tb_noise_add;
  import tma_pkg::*;
  import tb_util_pkg::*;

  localparam int K = 8;
  cplx_t g_lo [K][K];
  fx_t   eta2;
  cplx_t w [K][K];
  int checks = 0, failures = 0;

  noise_add #(.K(K)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ex;
    for (int r = 0; r < 50; r++) begin
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++) g_lo[i][j] = cplx_t'($urandom);
      eta2 = (r % 10 == 9) ? FX_MAX : fx_t'($urandom % 4096);
      #1;
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++) begin
          checks++;
          if (i == j) begin
            ex = int'(g_lo[i][i].re) + int'(eta2);
            if (ex > 16383) ex = 16383;
            if (int'(w[i][i].re) != ex || w[i][i].im != '0) begin
              failures++;
              $display("FAIL diag %0d: %0d expected %0d", i, w[i][i].re, ex);
            end
          end else if (j < i) begin
            if (w[i][j] != g_lo[i][j]) begin
              failures++;
              $display("FAIL lower %0d,%0d", i, j);
            end
          end else begin
            ex = -int'(g_lo[j][i].im);
            if (ex > 16383) ex = 16383;
            if (w[i][j].re != g_lo[j][i].re || int'(w[i][j].im) != ex) begin
              failures++;
              $display("FAIL upper %0d,%0d", i, j);
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
