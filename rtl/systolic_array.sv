// systolic_array -- lower-triangular systolic matrix multiplier.
//
// K(K+1)/2 complex multiply-accumulate cells, cell (i,j) for j <= i, form
//   res[i][j] = sum_k conj(a_k[i]) * b_k[j]
// over a stream of K-element vectors a_k, b_k.  Only the lower triangle
// is computed because both products the detector needs are Hermitian:
//   pre-processing : a_k = b_k = row k of Gamma   ->  Gamma^H Gamma
//   Neumann step   : a_k = conj(column k of Theta), b_k = row k of
//                    W^-1(L-1)                     ->  Theta W^-1(L-1)
// The paper shares one such array between the two uses; so does this
// design.  Skew: element i of a enters row i after i clocks and moves one
// cell right per clock; element j of b enters at the diagonal cell (j,j)
// after 2j clocks and moves one cell down per clock, so cell (i,j) works
// on vector k at clock k + i + j and result (i,j) is ready i + j clocks
// after result (0,0), as in the paper's timing analysis.
//
// Column injection: when b_inj_en[j] is high, b_inj[j] replaces the
// skewed b_vec[j] at the top of column j (cell (j,j)) in that clock.  The
// Neumann loop uses this to feed an entry of W^-1(L-1) straight from the
// previous product's results at the moment the wavefront needs it, so that
// successive products follow each other every K clocks.
//
// Interface: present vectors with in_valid; in_first marks the first
// vector of a product and in_last the last one.  Gaps (in_valid low) are
// allowed.  res_valid pulses when the last cell, (K-1,K-1), has latched
// its result, 2K-1 clocks after the last vector; res then holds the whole
// lower triangle (entries above the diagonal read as zero) until the next
// product finishes in the same cell.  The accumulators are wide enough for
// NACC products without overflow.
module systolic_array
  import tma_pkg::*;
#(
  parameter int K    = 8,
  parameter int NACC = 128
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    in_first,
  input  logic    in_last,
  input  cplx_t   a_vec [K],
  input  cplx_t   b_vec [K],
  input  logic    b_inj_en [K],
  input  cplx_t   b_inj    [K],
  output cplx_t   res   [K][K],
  output logic    res_valid
);

  localparam int ACC_W = 2 * WL + $clog2(NACC) + 2;

  sa_ctl_t ctl_i;
  assign ctl_i = '{valid: in_valid, first: in_first, last: in_last};

  // a/ctl entering cell (i,j) from the left; b entering cell (i,j) from above
  cplx_t   a_h   [K][K+1];
  sa_ctl_t c_h   [K][K+1];
  cplx_t   b_v   [K+1][K];
  cplx_t   r_lo  [K][K];
  logic    rv    [K][K];

  for (genvar i = 0; i < K; i++) begin : g_row
    // input skew for row i (depth i) and column i (depth 2i)
    if (i == 0) begin : g_noskew
      assign a_h[0][0] = a_vec[0];
      assign c_h[0][0] = ctl_i;
      assign b_v[0][0] = b_inj_en[0] ? b_inj[0] : b_vec[0];
    end else begin : g_skew
      cplx_t   a_d [i];
      sa_ctl_t c_d [i];
      cplx_t   b_d [2*i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < i; s++) begin
            a_d[s] <= C_ZERO;
            c_d[s] <= '0;
          end
          for (int s = 0; s < 2 * i; s++) b_d[s] <= C_ZERO;
        end else begin
          a_d[0] <= a_vec[i];
          c_d[0] <= ctl_i;
          b_d[0] <= b_vec[i];
          for (int s = 1; s < i; s++) begin
            a_d[s] <= a_d[s-1];
            c_d[s] <= c_d[s-1];
          end
          for (int s = 1; s < 2 * i; s++) b_d[s] <= b_d[s-1];
        end
      end
      assign a_h[i][0] = a_d[i-1];
      assign c_h[i][0] = c_d[i-1];
      assign b_v[i][i] = b_inj_en[i] ? b_inj[i] : b_d[2*i-1];
    end

    for (genvar j = 0; j < K; j++) begin : g_col
      if (j <= i) begin : g_cell
        systolic_pe #(.ACC_W(ACC_W)) u_pe (
          .clk      (clk),
          .rst_n    (rst_n),
          .a_in     (a_h[i][j]),
          .b_in     (b_v[i][j]),
          .ctl_in   (c_h[i][j]),
          .a_out    (a_h[i][j+1]),
          .b_out    (b_v[i+1][j]),
          .ctl_out  (c_h[i][j+1]),
          .res      (r_lo[i][j]),
          .res_valid(rv[i][j])
        );
        assign res[i][j] = r_lo[i][j];
      end else begin : g_upper
        assign res[i][j] = C_ZERO;
      end
    end
  end

  assign res_valid = rv[K-1][K-1];

endmodule
