// tb_estimation_module -- bit-exact check of the matched filter
// y_hat = Gamma^H y over N antennas (with random idle clocks) and of the
// product s_hat = V y_hat, against integer sums of full-precision products
// rounded half-up to 11 fraction bits.  s_valid must pulse exactly K+1
// clocks after mv_start.
module tb_estimation_module;
  import tma_pkg::*;
  import tb_util_pkg::*;

  localparam int K = 8;
  localparam int N = 128;

  logic clk = 0, rst_n = 0;
  logic mf_valid = 0, mf_first = 0, mf_last = 0, mv_start = 0;
  cplx_t gamma_row [K], y_in, v [K][K], yhat [K], s_hat [K];
  logic mv_busy, s_valid;
  int checks = 0, failures = 0;

  estimation_module #(.K(K), .N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint round_sat(input longint x);
    longint r;
    r = (x + (64'sd1 <<< 10)) >>> 11;
    if (r > 16383) r = 16383;
    if (r < -16384) r = -16384;
    return r;
  endfunction

  longint yr [K], yi [K];
  longint er [K], ei [K];

  task automatic run();
    int n;
    for (int i = 0; i < K; i++) begin
      yr[i] = 0;
      yi[i] = 0;
    end
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      mf_valid = 1;
      mf_first = (k == 0);
      mf_last  = (k == N - 1);
      y_in = r2c(cr(gauss(), gauss()));
      for (int i = 0; i < K; i++) begin
        gamma_row[i] = r2c(cr(0.09 * gauss(), 0.09 * gauss()));
        yr[i] += longint'(gamma_row[i].re) * y_in.re + longint'(gamma_row[i].im) * y_in.im;
        yi[i] += longint'(gamma_row[i].re) * y_in.im - longint'(gamma_row[i].im) * y_in.re;
      end
      if ($urandom % 4 == 0 && k != N - 1) begin
        @(negedge clk);
        mf_valid = 0;
        gamma_row[0] = cplx_t'($urandom);
      end
    end
    @(negedge clk);
    mf_valid = 0;
    mf_first = 0;
    mf_last  = 0;
    for (int i = 0; i < K; i++) begin
      yr[i] = round_sat(yr[i]);
      yi[i] = round_sat(yi[i]);
      checks++;
      if (longint'(yhat[i].re) != yr[i] || longint'(yhat[i].im) != yi[i]) begin
        failures++;
        $display("FAIL yhat[%0d] = (%0d,%0d) expected (%0d,%0d)", i, yhat[i].re, yhat[i].im,
                 yr[i], yi[i]);
      end
    end
    for (int i = 0; i < K; i++) begin
      er[i] = 0;
      ei[i] = 0;
      for (int j = 0; j < K; j++) begin
        v[i][j] = r2c(cr(0.5 * gauss(), 0.5 * gauss()));
        er[i] += longint'(v[i][j].re) * yr[j] - longint'(v[i][j].im) * yi[j];
        ei[i] += longint'(v[i][j].re) * yi[j] + longint'(v[i][j].im) * yr[j];
      end
      er[i] = round_sat(er[i]);
      ei[i] = round_sat(ei[i]);
    end
    mv_start = 1;
    @(negedge clk);
    mv_start = 0;
    n = 1;
    while (!s_valid && n < 5 * K) begin
      @(negedge clk);
      n++;
    end
    checks++;
    if (n != K + 1) begin
      failures++;
      $display("FAIL s_valid after %0d clocks, expected %0d", n, K + 1);
    end
    for (int i = 0; i < K; i++) begin
      checks++;
      if (longint'(s_hat[i].re) != er[i] || longint'(s_hat[i].im) != ei[i]) begin
        failures++;
        $display("FAIL s_hat[%0d] = (%0d,%0d) expected (%0d,%0d)", i, s_hat[i].re, s_hat[i].im,
                 er[i], ei[i]);
      end
    end
  endtask

  initial begin
    y_in = C_ZERO;
    for (int i = 0; i < K; i++) gamma_row[i] = C_ZERO;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 10; r++) run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
