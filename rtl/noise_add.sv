// noise_add -- forms the MMSE filtering matrix W = Gamma^H Gamma + eta^2 I.
//
// Takes the lower triangle of Gamma^H Gamma as delivered by the systolic
// array, adds the noise variance eta^2 to the (real) diagonal and fills
// the upper triangle with the conjugates, so that W leaves as a full
// Hermitian matrix.  The imaginary part of the diagonal, zero in exact
// arithmetic, is cleared.  Adding eta^2 follows the paper's "noise" stage
// of the pre-processing module; completing the upper triangle here is this
// design's choice.  Purely combinational.
module noise_add
  import tma_pkg::*;
#(
  parameter int K = 8
) (
  input  cplx_t g_lo [K][K],
  input  fx_t   eta2,
  output cplx_t w    [K][K]
);

  always_comb begin
    for (int i = 0; i < K; i++) begin
      for (int j = 0; j < K; j++) begin
        if (i == j)     w[i][j] = to_cplx(fadd(g_lo[i][i].re, eta2));
        else if (j < i) w[i][j] = g_lo[i][j];
        else            w[i][j] = cconj(g_lo[j][i]);
      end
    end
  end

endmodule
