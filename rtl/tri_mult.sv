// tri_mult -- tridiagonal (or diagonal) matrix times full matrix, row-serial.
//
// Computes Theta = -(X^-1 E) where X^-1 is Hermitian tridiagonal with real
// diagonal phi_ii and sub-diagonal phi_(i+1)i, and E is a full K x K
// matrix delivered one row E_t per step.  Row i of the product is
//   phi_i(i-1) E_(i-1) + phi_ii E_i + phi_i(i+1) E_(i+1),  phi_i(i+1) = conj(phi_(i+1)i),
// which the unit forms with three banks of K complex multipliers that all
// see the same row E_t:
//   left bank   : phi_(t+1)t * E_t        -> register (first term of row t+1)
//   middle bank : phi_tt * E_t  + left register -> register (row t so far)
//   right bank  : phi_(t-1)t * E_t + middle register = row t-1
// where phi_(t-1)t = conj(phi_t(t-1)) is taken from the sub-diagonal word
// of the previous step.  That is 3K multipliers, 2K registers and 2K
// adders, as in the paper's multiplier; the one-step register on the
// conjugated coefficient and the final negation are this design's reading
// of the figure.  With phi_s = 0 it is the diagonal multiplier.
//
// Interface: give steps t = 1..K+1 with in_valid (in_first on step 1):
// phi_d = phi_tt, phi_s = phi_(t+1)t (0 for t = K), e_row = E_t, and on the
// flush step K+1 all zeros.  Row t-1 of Theta leaves on out_row, with
// out_valid and its zero-based index out_idx, one clock after step t.
// Steps may be separated by idle clocks.
module tri_mult
  import tma_pkg::*;
#(
  parameter int K = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_first,
  input  fx_t                  phi_d,
  input  cplx_t                phi_s,
  input  cplx_t                e_row   [K],
  output logic                 out_valid,
  output logic [$clog2(K)-1:0] out_idx,
  output cplx_t                out_row [K]
);

  cplx_t left_q  [K];     // phi_(t+1)t * E_t, waiting for row t+1
  cplx_t mid_q   [K];     // row t so far
  cplx_t conj_q;          // conj(phi_(t+1)t) for the right bank of step t+1
  logic  have_row;        // mid_q holds a real row (not before step 1)
  logic [$clog2(K)-1:0] row_cnt;

  cplx_t left_p [K], mid_s [K], right_s [K];

  always_comb begin
    for (int j = 0; j < K; j++) begin
      left_p[j]  = cmul(phi_s, e_row[j]);
      mid_s[j]   = cadd(in_first ? C_ZERO : left_q[j], rmul(phi_d, e_row[j]));
      right_s[j] = cadd(mid_q[j], cmul(conj_q, e_row[j]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < K; j++) begin
        left_q[j]  <= C_ZERO;
        mid_q[j]   <= C_ZERO;
        out_row[j] <= C_ZERO;
      end
      conj_q    <= C_ZERO;
      have_row  <= 1'b0;
      row_cnt   <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int j = 0; j < K; j++) begin
          left_q[j] <= left_p[j];
          mid_q[j]  <= mid_s[j];
        end
        conj_q <= cconj(phi_s);
        if (in_first) begin
          have_row <= 1'b1;
          row_cnt  <= '0;
        end else if (have_row) begin
          for (int j = 0; j < K; j++) out_row[j] <= cneg(right_s[j]);
          out_valid <= 1'b1;
          out_idx   <= row_cnt;
          row_cnt   <= row_cnt + 1'b1;
        end
      end
    end
  end

endmodule
