// tb_systolic_array -- checks the lower-triangular array bit-exactly.
// Random vector streams (length 1..NACC, with random idle clocks) are fed
// and every lower-triangle result is compared with an integer reference:
// the exact sum of conj(a_i)*b_j products, rounded half-up to 11 fraction
// bits and saturated.  Above-diagonal outputs must read zero.  res_valid
// must rise 2K-1 clocks after the last vector (no gaps after it).
// In injection runs b_vec carries garbage and the true b values are
// supplied through b_inj at the top of each column, 2j clocks after their
// vector was issued, as the Neumann loop does; results must be identical.
module tb_systolic_array;
  import tma_pkg::*;
  import tb_util_pkg::*;

  localparam int K = 8;
  localparam int NACC = 128;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  cplx_t a_vec [K], b_vec [K], b_true [K];
  logic  b_inj_en [K];
  cplx_t b_inj [K];
  bit    inj = 0;
  logic  hist_v [2*K];
  cplx_t hist_b [2*K][K];
  cplx_t res [K][K];
  logic  res_valid;
  int checks = 0, failures = 0;

  systolic_array #(.K(K), .NACC(NACC)) dut (.*);

  always #5 clk = ~clk;

  // what the array has sampled on previous clocks, for injection runs
  always @(posedge clk) begin
    hist_v[0] <= in_valid;
    hist_b[0] <= b_true;
    for (int d = 1; d < 2 * K; d++) begin
      hist_v[d] <= hist_v[d-1];
      hist_b[d] <= hist_b[d-1];
    end
  end

  always_comb begin
    b_inj_en[0] = inj && in_valid;
    b_inj[0]    = b_true[0];
    for (int j = 1; j < K; j++) begin
      b_inj_en[j] = inj && hist_v[2*j-1];
      b_inj[j]    = hist_b[2*j-1][j];
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint sre [K][K], sim [K][K];

  function automatic longint round_sat(input longint v);
    longint r;
    r = (v + (64'sd1 <<< 10)) >>> 11;
    if (r > 16383) r = 16383;
    if (r < -16384) r = -16384;
    return r;
  endfunction

  task automatic run(input int len, input bit gaps, input bit big, input bit use_inj = 0);
    int n;
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        sre[i][j] = 0;
        sim[i][j] = 0;
      end
    @(negedge clk);
    inj = use_inj;
    for (int k = 0; k < len; k++) begin
      if (k != 0) @(negedge clk);
      in_valid = 1;
      in_first = (k == 0);
      in_last  = (k == len - 1);
      for (int i = 0; i < K; i++) begin
        if (big) begin
          a_vec[i].re = fx_t'($urandom); a_vec[i].im = fx_t'($urandom);
          b_true[i].re = fx_t'($urandom); b_true[i].im = fx_t'($urandom);
        end else begin
          a_vec[i] = r2c(cr(0.3 * gauss(), 0.3 * gauss()));
          b_true[i] = r2c(cr(0.3 * gauss(), 0.3 * gauss()));
        end
        b_vec[i] = use_inj ? cplx_t'($urandom) : b_true[i];
      end
      for (int i = 0; i < K; i++)
        for (int j = 0; j <= i; j++) begin
          // conj(a_i) * b_j
          sre[i][j] += longint'(a_vec[i].re) * longint'(b_true[j].re)
                     + longint'(a_vec[i].im) * longint'(b_true[j].im);
          sim[i][j] += longint'(a_vec[i].re) * longint'(b_true[j].im)
                     - longint'(a_vec[i].im) * longint'(b_true[j].re);
        end
      if (gaps && k != len - 1 && ($urandom % 3 == 0)) begin
        @(negedge clk);
        in_valid = 0;
        in_first = 0;
        in_last  = 0;
        for (int i = 0; i < K; i++) begin
          a_vec[i] = cplx_t'($urandom);     // garbage while idle
          b_vec[i] = cplx_t'($urandom);
          b_true[i] = cplx_t'($urandom);
        end
      end
    end
    n = 0;
    do begin
      @(posedge clk);
      #1;
      n++;
      if (n == 1) begin
        @(negedge clk);
        in_valid = 0;
        in_first = 0;
        in_last  = 0;
        @(posedge clk);
        #1;
        n++;
      end
    end while (!res_valid && n < 10 * K);
    checks++;
    if (n != 2 * K - 1) begin
      failures++;
      $display("FAIL res_valid after %0d clocks, expected %0d", n, 2 * K - 1);
    end
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        checks++;
        if (j <= i) begin
          if (longint'(res[i][j].re) != round_sat(sre[i][j]) ||
              longint'(res[i][j].im) != round_sat(sim[i][j])) begin
            failures++;
            $display("FAIL res[%0d][%0d] = (%0d,%0d) expected (%0d,%0d)", i, j, res[i][j].re,
                     res[i][j].im, round_sat(sre[i][j]), round_sat(sim[i][j]));
          end
        end else if (res[i][j] != C_ZERO) begin
          failures++;
          $display("FAIL upper res[%0d][%0d] not zero", i, j);
        end
      end
  endtask

  initial begin
    for (int i = 0; i < K; i++) begin
      a_vec[i] = C_ZERO;
      b_vec[i] = C_ZERO;
      b_true[i] = C_ZERO;
    end
    for (int d = 0; d < 2 * K; d++) hist_v[d] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(NACC, 0, 0);
    run(K, 0, 0);
    run(1, 0, 0);
    run(NACC, 1, 0);
    run(37, 1, 0);
    run(20, 0, 1);
    run(K, 1, 0);
    run(K, 0, 0, 1);
    run(NACC, 1, 0, 1);
    run(20, 0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
