// tri_inv -- folded tridiagonal matrix inversion approximation.
//
// Given the tridiagonal band of a Hermitian matrix W (real diagonal w_ii,
// complex sub-diagonal w_i(i-1); the super-diagonal is its conjugate) it
// produces the tridiagonal band of the approximate inverse:
//   p_1     = w_11,            p_i = w_ii - |w_i(i-1)|^2 / p_(i-1)
//   d_i     = p_i - |w_(i+1)i|^2 / w_(i+1)(i+1)       (last term 0 for i=K)
//   phi_ii  = 1 / d_i,         phi_i(i-1) = -(w_i(i-1) / p_(i-1)) * phi_ii
// p_i is the forward-elimination pivot; d_i replaces the backward pivot by
// its first-order approximation.  This is the folded datapath: one shared
// reciprocal, two complex multipliers and one real adder do both halves of
// each step, alternating every clock:
//   odd clock  (phase A): ratio  = w_i(i-1) * (1/p_(i-1)),
//                          p_i   = w_ii - ratio * conj(w_i(i-1))
//                          (the subtraction is switched off for i=1)
//   even clock (phase B): d_i    = p_i - |w_(i+1)i|^2 * (1/w_(i+1)(i+1)),
//                          phi_ii = 1/d_i (second reciprocal),
//                          phi_i(i-1) = phi_ii * (-ratio) (third multiplier)
// The operand multiplexers, the pivot and ratio registers, the sharing of
// one reciprocal/adder and the second reciprocal for phi_ii follow the
// paper's folded architecture; the multiplexer control and registered
// outputs are this design's reading of it.
//
// Interface: pulse start with the band on w_diag/w_sub (index 0 is w_11;
// w_sub[0] is ignored); the band must stay stable until done.  One result
// (phi_idx, phi_diag, phi_sub) appears with phi_valid every two clocks, the
// first one two clocks after start, the last (with done) 2K clocks after
// start.  Feeding a zero sub-diagonal turns it into the diagonal inverse.
module tri_inv
  import tma_pkg::*;
#(
  parameter int K        = 8,
  parameter int LUT_BITS = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  fx_t                  w_diag [K],
  input  cplx_t                w_sub  [K],
  output logic                 busy,
  output logic                 phi_valid,
  output logic [$clog2(K)-1:0] phi_idx,
  output fx_t                  phi_diag,
  output cplx_t                phi_sub,
  output logic                 done
);

  localparam int IW = $clog2(K);

  logic          phase_b;       // 0: odd clock (phase A), 1: even clock (phase B)
  logic [IW-1:0] i_q;
  fx_t           pivot_q;       // p_i (after phase A) / p_(i-1) (during phase A)
  cplx_t         nratio_q;      // -w_i(i-1)/p_(i-1), held for phase B

  // shared datapath
  fx_t    r_in, r_out, add_a, sum, d_rec;
  cplx_t  sub_sel, neg_sub, nratio, m2, phi_s;
  logic   first_i, last_i;

  assign first_i = (i_q == '0);
  assign last_i  = (i_q == IW'(K - 1));

  recip_lut #(.LUT_BITS(LUT_BITS)) u_recip1 (.x(r_in), .y(r_out));
  recip_lut #(.LUT_BITS(LUT_BITS)) u_recip2 (.x(sum),  .y(d_rec));

  always_comb begin
    if (!phase_b) begin
      r_in    = pivot_q;
      sub_sel = first_i ? C_ZERO : w_sub[i_q];
      add_a   = w_diag[i_q];
    end else begin
      r_in    = last_i ? FX_MAX : w_diag[i_q + 1'b1];
      sub_sel = last_i ? C_ZERO : w_sub[i_q + 1'b1];
      add_a   = pivot_q;
    end
    neg_sub = cneg(sub_sel);
    nratio  = rmul(r_out, neg_sub);               // multiplier 1
    m2      = cmul(nratio, cconj(sub_sel));       // multiplier 2 (real result)
    sum     = fadd(add_a, m2.re);                 // the one real adder
    phi_s   = rmul(d_rec, nratio_q);              // multiplier 3
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      phase_b   <= 1'b0;
      i_q       <= '0;
      pivot_q   <= '0;
      nratio_q  <= C_ZERO;
      phi_valid <= 1'b0;
      phi_idx   <= '0;
      phi_diag  <= '0;
      phi_sub   <= C_ZERO;
      done      <= 1'b0;
    end else begin
      phi_valid <= 1'b0;
      done      <= 1'b0;
      // the clock that sees start already performs phase A of i = 1
      if (start || busy) begin
        busy <= 1'b1;
        if (!phase_b) begin
          pivot_q  <= sum;
          nratio_q <= first_i ? C_ZERO : nratio;
          phase_b  <= 1'b1;
        end else begin
          phi_valid <= 1'b1;
          phi_idx   <= i_q;
          phi_diag  <= d_rec;
          phi_sub   <= phi_s;
          phase_b   <= 1'b0;
          if (last_i) begin
            busy <= 1'b0;
            done <= 1'b1;
            i_q  <= '0;
          end else begin
            i_q <= i_q + 1'b1;
          end
        end
      end
    end
  end

endmodule
