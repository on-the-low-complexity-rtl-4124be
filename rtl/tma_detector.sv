// tma_detector -- linear MMSE massive-MIMO uplink detector with a
// Neumann-series inverse seeded by a tridiagonal approximation (TMA).
//
// For one channel use it takes the N x K effective channel Gamma (one row
// per antenna), the received vector y and the noise variance eta^2 and
// returns s_hat ~= W^-1 Gamma^H y with W = Gamma^H Gamma + eta^2 I.  W is
// split into X + E with X its tridiagonal band (TMA mode) or its diagonal
// (DNS mode).  X^-1 is approximated by the folded tridiagonal inverter,
// Theta = -X^-1 E is formed by the tridiagonal multiplier, and the Neumann
// recursion  W^-1(1) = X^-1,  W^-1(l+1) = Theta W^-1(l) + X^-1  runs for
// cfg_iter (= L) terms.  The blocks are the paper's: a pre-processing
// module (systolic Gram matrix + noise), a main-computing module
// (inversion, multiplier, Neumann loop with its register), and an
// estimation module; one lower-triangular systolic array is shared by the
// Gram matrix and the Neumann products, as in the paper.
//
// Scheduling: two overlaps follow the paper's timing idea.  The folded
// inverter consumes one diagonal entry of W every two clocks, the rate at
// which the array's diagonal cells finish, so it starts two clocks after
// the last row, reading W straight from the array while it drains.  The
// Neumann products follow the wavefront idea: row k of W^-1(l) is fed
// into column j of the array as soon as the previous product's entry
// (k, j) is final, so a new product starts every K clocks and only the
// last one drains.  Theta is formed after the inversion and the products
// after Theta (this design's simplification).  With no input stalls the
// latency from the first accepted row to out_valid is
//   N + 2K + 3     rows, then the inverse (it overlaps the array drain)
// + K + 2          Theta and the capture of W^-1(1) = X^-1
// + (L-1)K + 2K-1  L-1 back-to-back products, one drain, capture (L >= 2)
// + K + 2          estimation
// = N + 4K + 6 (L = 1) or N + 6K + 5 + (L-1)K (L >= 2) clocks, i.e. 197
// for N=128, K=8, L=3.  The paper's fully overlapped schedule reaches
// L(K+1) + N + 2K - 2 = 169.
//
// Interface: rows are accepted with in_valid && in_ready (gaps allowed);
// cfg_mode, cfg_iter and eta2 are sampled with the first row.  s_hat is
// valid for one clock with out_valid; in_ready is low from the last row
// until then.  All numbers are tma_pkg fixed point (15-bit, 11 fraction
// bits); Gamma must be scaled so that W has entries of order one.
module tma_detector
  import tma_pkg::*;
#(
  parameter int N        = 128,
  parameter int K        = 8,
  parameter int LUT_BITS = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  tma_mode_e   cfg_mode,
  input  logic [3:0]  cfg_iter,
  input  fx_t         eta2,
  input  logic        in_valid,
  output logic        in_ready,
  input  cplx_t       gamma_row [K],
  input  cplx_t       y_in,
  output logic        out_valid,
  output cplx_t       s_hat     [K],
  output logic        busy
);

  localparam int NW = $clog2(N);
  localparam int KW = $clog2(K);

  typedef enum logic [3:0] {
    S_IN, S_PM_WAIT, S_INV, S_TM, S_TM_WAIT, S_MM, S_MM_WAIT, S_EM, S_EM_WAIT
  } state_e;

  state_e        state;
  tma_mode_e     mode_q;
  logic [3:0]    iter_q, it_q, dn_q;
  fx_t           eta2_q;
  logic [NW-1:0] n_q;
  logic [KW:0]   k_q;

  cplx_t w_q     [K][K];      // W
  fx_t   phi_d_q [K];         // X^-1 diagonal
  cplx_t phi_s_q [K];         // X^-1 sub-diagonal
  cplx_t theta_q [K][K];      // Theta
  cplx_t v_q     [K][K];      // W^-1(l), the Neumann loop register

  // ---------------- shared systolic array ----------------
  logic  sa_valid, sa_first, sa_last, sa_res_valid;
  cplx_t sa_a [K], sa_b [K], sa_res [K][K];
  logic  acc_row;

  assign in_ready = (state == S_IN);
  assign busy     = (state != S_IN) || (n_q != '0);
  assign acc_row  = in_valid && in_ready;

  always_comb begin
    sa_valid = 1'b0;
    sa_first = 1'b0;
    sa_last  = 1'b0;
    for (int i = 0; i < K; i++) begin
      sa_a[i] = gamma_row[i];
      sa_b[i] = gamma_row[i];
    end
    if (state == S_IN) begin
      sa_valid = acc_row;
      sa_first = (n_q == '0);
      sa_last  = (n_q == NW'(N - 1));
    end else if (state == S_MM) begin
      sa_valid = 1'b1;
      sa_first = (k_q == '0);
      sa_last  = (k_q == (KW+1)'(K - 1));
      for (int i = 0; i < K; i++) begin
        sa_a[i] = cconj(theta_q[i][k_q[KW-1:0]]);
        sa_b[i] = C_ZERO;                     // columns are fed by injection
      end
    end
  end

  // Neumann wavefront: vector k of a product (k = row of W^-1(l)) reaches
  // the top of column j 2j clocks after it is issued.  A delay line per
  // column carries (valid, first product, k) along that skew; at its end
  // entry (k, j) of W^-1(l) is injected.  For the first product that is
  // X^-1 from v_q; later it is the previous product plus X^-1, read from
  // the array's result registers at the moment they have become final.
  typedef struct packed {
    logic          valid;
    logic          first;
    logic [KW-1:0] k;
  } inj_t;

  inj_t  inj_src;
  inj_t  inj_at  [K];
  logic  inj_en  [K];
  cplx_t inj_val [K];
  cplx_t v_new   [K][K];

  assign inj_src = '{valid: (state == S_MM), first: (it_q == 4'd1), k: k_q[KW-1:0]};
  assign inj_at[0] = inj_src;

  for (genvar j = 1; j < K; j++) begin : g_inj
    inj_t line [2*j];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int d = 0; d < 2 * j; d++) line[d] <= '0;
      end else begin
        line[0] <= inj_src;
        for (int d = 1; d < 2 * j; d++) line[d] <= line[d-1];
      end
    end
    assign inj_at[j] = line[2*j-1];
  end

  always_comb begin
    for (int j = 0; j < K; j++) begin
      inj_en[j]  = inj_at[j].valid;
      inj_val[j] = inj_at[j].first ? v_q[inj_at[j].k][j] : v_new[inj_at[j].k][j];
    end
  end

  systolic_array #(.K(K), .NACC(N)) u_sa (
    .clk(clk), .rst_n(rst_n),
    .in_valid(sa_valid), .in_first(sa_first), .in_last(sa_last),
    .a_vec(sa_a), .b_vec(sa_b), .b_inj_en(inj_en), .b_inj(inj_val),
    .res(sa_res), .res_valid(sa_res_valid)
  );

  // ---------------- pre-processing: noise ----------------
  cplx_t w_new [K][K];
  noise_add #(.K(K)) u_noise (.g_lo(sa_res), .eta2(eta2_q), .w(w_new));

  // ---------------- tridiagonal / diagonal inversion ----------------
  fx_t   inv_diag [K];
  cplx_t inv_sub  [K];
  logic  inv_start, inv_busy, inv_valid, inv_done;
  logic [KW-1:0] inv_idx;
  fx_t   inv_phi_d;
  cplx_t inv_phi_s;

  always_comb begin
    for (int i = 0; i < K; i++) begin
      // read straight from the array results: entry (i, i) is final by
      // the clock the inverter needs it, before the whole of W is
      inv_diag[i] = w_new[i][i].re;
      inv_sub[i]  = (i == 0 || mode_q == MODE_DNS) ? C_ZERO : w_new[i][(i == 0) ? 0 : i - 1];
    end
  end

  tri_inv #(.K(K), .LUT_BITS(LUT_BITS)) u_inv (
    .clk(clk), .rst_n(rst_n), .start(inv_start),
    .w_diag(inv_diag), .w_sub(inv_sub), .busy(inv_busy),
    .phi_valid(inv_valid), .phi_idx(inv_idx), .phi_diag(inv_phi_d),
    .phi_sub(inv_phi_s), .done(inv_done)
  );

  // ---------------- tridiagonal / diagonal multiplier ----------------
  logic  tm_valid, tm_first, tm_out_valid;
  fx_t   tm_phi_d;
  cplx_t tm_phi_s;
  cplx_t tm_e [K], tm_row [K];
  logic [KW-1:0] tm_idx;
  logic [KW-1:0] t_lo;

  assign t_lo = k_q[KW-1:0];

  always_comb begin
    tm_valid = (state == S_TM);
    tm_first = (k_q == '0);
    tm_phi_d = '0;
    tm_phi_s = C_ZERO;
    for (int j = 0; j < K; j++) tm_e[j] = C_ZERO;
    if (k_q < (KW+1)'(K)) begin
      tm_phi_d = phi_d_q[t_lo];
      if (k_q < (KW+1)'(K - 1)) tm_phi_s = phi_s_q[t_lo + 1'b1];
      // row t of E = W - X
      for (int j = 0; j < K; j++) begin
        if (j == int'(t_lo))
          tm_e[j] = C_ZERO;
        else if (mode_q == MODE_TMA && (j == int'(t_lo) - 1 || j == int'(t_lo) + 1))
          tm_e[j] = C_ZERO;
        else
          tm_e[j] = w_q[t_lo][j];
      end
    end
  end

  tri_mult #(.K(K)) u_tm (
    .clk(clk), .rst_n(rst_n), .in_valid(tm_valid), .in_first(tm_first),
    .phi_d(tm_phi_d), .phi_s(tm_phi_s), .e_row(tm_e),
    .out_valid(tm_out_valid), .out_idx(tm_idx), .out_row(tm_row)
  );

  // ---------------- Neumann loop adder ----------------
  cplx_t ma_p [K][K];
  always_comb begin
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++)
        ma_p[i][j] = (state == S_MM || state == S_MM_WAIT) ? sa_res[i][j] : C_ZERO;
  end
  matrix_adder #(.K(K)) u_add (.p_lo(ma_p), .phi_diag(phi_d_q), .phi_sub(phi_s_q), .v(v_new));

  // ---------------- estimation ----------------
  logic  em_start, em_busy, em_valid;
  cplx_t em_yhat [K], em_s [K];

  estimation_module #(.K(K), .N(N)) u_em (
    .clk(clk), .rst_n(rst_n),
    .mf_valid(acc_row), .mf_first(n_q == '0), .mf_last(n_q == NW'(N - 1)),
    .gamma_row(gamma_row), .y_in(y_in),
    .mv_start(em_start), .v(v_q), .yhat(em_yhat), .mv_busy(em_busy),
    .s_hat(em_s), .s_valid(em_valid)
  );

  assign em_start  = (state == S_EM);
  // The inverter starts two clocks after the last row: cell (i, i) of the
  // array finishes 2i clocks after cell (0, 0), which is the rate at which
  // the folded inverter consumes diagonal entries.
  assign inv_start = (state == S_PM_WAIT) && (k_q == (KW+1)'(1));

  // ---------------- controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IN;
      mode_q    <= MODE_TMA;
      iter_q    <= 4'd1;
      it_q      <= 4'd1;
      dn_q      <= '0;
      eta2_q    <= '0;
      n_q       <= '0;
      k_q       <= '0;
      out_valid <= 1'b0;
      for (int i = 0; i < K; i++) begin
        phi_d_q[i] <= '0;
        phi_s_q[i] <= C_ZERO;
        s_hat[i]   <= C_ZERO;
        for (int j = 0; j < K; j++) begin
          w_q[i][j]     <= C_ZERO;
          theta_q[i][j] <= C_ZERO;
          v_q[i][j]     <= C_ZERO;
        end
      end
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_IN: if (acc_row) begin
          if (n_q == '0) begin
            mode_q <= cfg_mode;
            iter_q <= (cfg_iter == '0) ? 4'd1 : cfg_iter;
            eta2_q <= eta2;
          end
          if (n_q == NW'(N - 1)) begin
            n_q   <= '0;
            k_q   <= '0;
            state <= S_PM_WAIT;
          end else begin
            n_q <= n_q + 1'b1;
          end
        end
        S_PM_WAIT: begin
          if (k_q < (KW+1)'(2)) k_q <= k_q + 1'b1;
          if (sa_res_valid) begin
            w_q   <= w_new;
            state <= S_INV;
          end
        end
        S_INV: begin
          if (inv_done) begin
            k_q   <= '0;
            state <= S_TM;
          end
        end
        S_TM: begin
          if (k_q == (KW+1)'(K)) state <= S_TM_WAIT;
          else                   k_q   <= k_q + 1'b1;
        end
        S_TM_WAIT: ;
        S_MM: begin
          // products are issued back to back, K vectors each
          if (k_q == (KW+1)'(K - 1)) begin
            k_q  <= '0;
            it_q <= it_q + 1'b1;
            if (it_q + 1'b1 >= iter_q) state <= S_MM_WAIT;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        S_MM_WAIT: ;
        S_EM: state <= S_EM_WAIT;
        S_EM_WAIT: if (em_valid) begin
          s_hat     <= em_s;
          out_valid <= 1'b1;
          state     <= S_IN;
        end
        default: state <= S_IN;
      endcase

      // the inverter's results arrive while W drains and after
      if (inv_valid) begin
        phi_d_q[inv_idx] <= inv_phi_d;
        phi_s_q[inv_idx] <= inv_phi_s;
      end

      // each finished product is counted; the last one gives W^-1(L)
      if (sa_res_valid && (state == S_MM || state == S_MM_WAIT)) begin
        if (dn_q + 1'b1 >= iter_q - 1'b1) begin
          v_q   <= v_new;
          state <= S_EM;
        end else begin
          dn_q <= dn_q + 1'b1;
        end
      end

      // Theta rows arrive from the multiplier one clock after each step
      if (tm_out_valid) begin
        theta_q[tm_idx] <= tm_row;
        if (tm_idx == KW'(K - 1)) begin
          v_q   <= v_new;                    // W^-1(1) = X^-1
          it_q  <= 4'd1;
          dn_q  <= '0;
          k_q   <= '0;
          state <= (iter_q <= 4'd1) ? S_EM : S_MM;
        end
      end
    end
  end

  // the shared array must only finish a product while one is awaited
  a_sa_owner: assert property (@(posedge clk) disable iff (!rst_n)
    sa_res_valid |-> (state == S_PM_WAIT || state == S_MM || state == S_MM_WAIT));
  // the inverter, multiplier and estimation unit run only in their phases
  a_inv_phase: assert property (@(posedge clk) disable iff (!rst_n)
    inv_valid |-> (state == S_PM_WAIT || state == S_INV));
  a_em_phase: assert property (@(posedge clk) disable iff (!rst_n)
    em_valid |-> state == S_EM_WAIT);

endmodule
