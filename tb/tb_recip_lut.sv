// tb_recip_lut -- exhaustive check of the LUT reciprocal against 1/x.
// Every positive 14-bit operand is applied; the result must be within the
// table's relative error (2^-(LUT_BITS+1), with margin) plus one LSB, or
// saturated where 1/x exceeds the word range.  Zero and negative operands
// must give the largest word.
module tb_recip_lut;
  import tma_pkg::*;
  import tb_util_pkg::*;

  localparam int LB = 10;
  fx_t x, y;
  int  checks = 0, failures = 0;

  recip_lut #(.LUT_BITS(LB)) dut (.x(x), .y(y));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ex, got, tol;
    for (int v = -64; v < (1 << (WL - 1)); v++) begin
      x = fx_t'(v);
      #1;
      checks++;
      if (v <= 0) begin
        if (y != FX_MAX) begin
          failures++;
          $display("FAIL x=%0d y=%0d expected saturation", v, y);
        end
      end else begin
        ex  = SCALE * SCALE / real'(v);          // 1/x in LSB units
        got = real'(y);
        if (ex >= real'(FX_MAX)) begin
          if (got < real'(FX_MAX) - 1.0 && got < ex * (1.0 - 2.0 ** (-LB))) begin
            failures++;
            $display("FAIL x=%0d y=%0d expected ~saturation (%f)", v, y, ex);
          end
        end else begin
          tol = ex * (2.0 ** (-LB - 1)) * 1.05 + 1.0;
          if (got - ex > tol || ex - got > tol) begin
            failures++;
            if (failures < 10) $display("FAIL x=%0d y=%0d expected %f", v, y, ex);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
