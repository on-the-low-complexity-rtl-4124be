// estimation_module -- matched filter and final matrix-vector product.
//
// Produces the MMSE estimate s_hat = W^-1(L) * y_hat with a bank of K
// complex multiply-accumulate units (K complex multipliers and K complex
// adders, the cost the paper gives for this module).  The same bank also
// forms the matched-filter output y_hat = Gamma^H y beforehand, while the
// rows of Gamma stream into the pre-processing array and the bank would
// otherwise be idle; computing y_hat here rather than taking it as an
// input is this design's choice.
//
// Matched filter: for each antenna n present row n of Gamma on gamma_row
// and y_n on y_in with mf_valid (mf_first on n = 1, mf_last on n = N);
// unit i accumulates conj(gamma_ni) * y_n.  y_hat is rounded into the
// yhat register one clock after mf_last.
// Product: pulse mv_start with W^-1(L) on v (full matrix, held stable for
// K clocks).  In clock j unit i adds v[i][j] * y_hat[j]; s_hat is rounded
// and s_valid pulses K+1 clocks after mv_start.  The column-serial order is
// this design's choice.
module estimation_module
  import tma_pkg::*;
#(
  parameter int K = 8,
  parameter int N = 128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   mf_valid,
  input  logic   mf_first,
  input  logic   mf_last,
  input  cplx_t  gamma_row [K],
  input  cplx_t  y_in,
  input  logic   mv_start,
  input  cplx_t  v         [K][K],
  output cplx_t  yhat      [K],
  output logic   mv_busy,
  output cplx_t  s_hat     [K],
  output logic   s_valid
);

  localparam int ACC_W = 2 * WL + $clog2(N > K ? N : K) + 2;
  localparam int JW    = $clog2(K);
  typedef logic signed [ACC_W-1:0] acc_t;

  acc_t          acc_re [K], acc_im [K];
  acc_t          nxt_re [K], nxt_im [K];
  cwide_t        prod   [K];
  logic [JW-1:0] j_q;
  logic          clr;

  always_comb begin
    for (int i = 0; i < K; i++) begin
      if (mv_busy) prod[i] = cmul_w(v[i][j_q], yhat[j_q]);
      else         prod[i] = cmulc_w(gamma_row[i], y_in);
    end
    clr = mv_busy ? (j_q == '0) : mf_first;
    for (int i = 0; i < K; i++) begin
      nxt_re[i] = (clr ? acc_t'(0) : acc_re[i]) + acc_t'(prod[i].re);
      nxt_im[i] = (clr ? acc_t'(0) : acc_im[i]) + acc_t'(prod[i].im);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < K; i++) begin
        acc_re[i] <= '0;
        acc_im[i] <= '0;
        yhat[i]   <= C_ZERO;
        s_hat[i]  <= C_ZERO;
      end
      j_q     <= '0;
      mv_busy <= 1'b0;
      s_valid <= 1'b0;
    end else begin
      s_valid <= 1'b0;
      if (mv_busy) begin
        for (int i = 0; i < K; i++) begin
          acc_re[i] <= nxt_re[i];
          acc_im[i] <= nxt_im[i];
        end
        if (j_q == JW'(K - 1)) begin
          for (int i = 0; i < K; i++) begin
            s_hat[i].re <= rnd(wide_t'(nxt_re[i]));
            s_hat[i].im <= rnd(wide_t'(nxt_im[i]));
          end
          s_valid <= 1'b1;
          mv_busy <= 1'b0;
        end else begin
          j_q <= j_q + 1'b1;
        end
      end else if (mv_start) begin
        mv_busy <= 1'b1;
        j_q     <= '0;
      end else if (mf_valid) begin
        for (int i = 0; i < K; i++) begin
          acc_re[i] <= nxt_re[i];
          acc_im[i] <= nxt_im[i];
          if (mf_last) begin
            yhat[i].re <= rnd(wide_t'(nxt_re[i]));
            yhat[i].im <= rnd(wide_t'(nxt_im[i]));
          end
        end
      end
    end
  end

endmodule
