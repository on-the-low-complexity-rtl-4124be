// matrix_adder -- the adder of the Neumann-series loop.
//
// Forms W^-1(L) = Theta W^-1(L-1) + X^-1.  The product arrives as the
// lower triangle p_lo from the systolic array; X^-1 is tridiagonal and
// Hermitian and arrives as its real diagonal phi_diag[i] and complex
// sub-diagonal phi_sub[i] = phi_i(i-1) (phi_sub[0] unused).  Only the
// band is added; the result is completed into a full Hermitian matrix
// (upper triangle = conjugate of the lower, real diagonal) because the
// next Neumann step and the estimation module read whole rows of it.
// The paper counts one real adder and two complex adders for this stage,
// i.e. it adds the band serially; this design adds the whole band at once
// (K real and K-1 complex adders), which costs more adders but no clocks.
// Purely combinational.
module matrix_adder
  import tma_pkg::*;
#(
  parameter int K = 8
) (
  input  cplx_t p_lo     [K][K],
  input  fx_t   phi_diag [K],
  input  cplx_t phi_sub  [K],
  output cplx_t v        [K][K]
);

  cplx_t lo [K][K];

  always_comb begin
    for (int i = 0; i < K; i++) begin
      for (int j = 0; j < K; j++) begin
        if (j == i)          lo[i][j] = to_cplx(fadd(p_lo[i][i].re, phi_diag[i]));
        else if (j == i - 1) lo[i][j] = cadd(p_lo[i][j], phi_sub[i]);
        else                 lo[i][j] = p_lo[i][j];
      end
    end
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++)
        v[i][j] = (j <= i) ? lo[i][j] : cconj(lo[j][i]);
  end

endmodule
