// tb_matrix_adder -- checks V = P + X^-1 with X^-1 tridiagonal Hermitian:
// the diagonal gets phi_ii (real result), the sub-diagonal phi_i(i-1),
// other lower entries pass, the upper triangle is the conjugate of the
// lower one.  Values are kept away from saturation; exact comparison.
module tb_matrix_adder;
  import tma_pkg::*;
  import tb_util_pkg::*;

  localparam int K = 8;
  cplx_t p_lo [K][K];
  fx_t   phi_diag [K];
  cplx_t phi_sub [K];
  cplx_t v [K][K];
  int checks = 0, failures = 0;

  matrix_adder #(.K(K)) dut (.*);

  function automatic fx_t rs();
    return fx_t'(int'($urandom % 8192) - 4096);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int er, ei;
    for (int r = 0; r < 50; r++) begin
      for (int i = 0; i < K; i++) begin
        phi_diag[i] = rs();
        phi_sub[i].re = rs();
        phi_sub[i].im = rs();
        for (int j = 0; j < K; j++) begin
          p_lo[i][j].re = rs();
          p_lo[i][j].im = rs();
        end
      end
      #1;
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++) begin
          int a, b;
          a = (j <= i) ? i : j;          // the lower-triangle element this entry mirrors
          b = (j <= i) ? j : i;
          er = int'(p_lo[a][b].re);
          ei = int'(p_lo[a][b].im);
          if (a == b) begin
            er += int'(phi_diag[a]);
            ei = 0;
          end else if (b == a - 1) begin
            er += int'(phi_sub[a].re);
            ei += int'(phi_sub[a].im);
          end
          if (j > i) ei = -ei;
          checks++;
          if (int'(v[i][j].re) != er || int'(v[i][j].im) != ei) begin
            failures++;
            $display("FAIL v[%0d][%0d] = (%0d,%0d) expected (%0d,%0d)", i, j, v[i][j].re,
                     v[i][j].im, er, ei);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
