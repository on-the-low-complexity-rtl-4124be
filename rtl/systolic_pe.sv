// systolic_pe -- one cell of the lower-triangular systolic array.
//
// Multiply-accumulates conj(a) * b at full precision whenever the control
// token that travels with a is valid: the token's first bit restarts the
// sum, its last bit rounds the sum into res (tma_pkg format) and pulses
// res_valid one clock later.  The operands and the token are passed on
// through registers, a to the right neighbour and b to the cell below, so
// a cell sees each operand one clock after its upstream neighbour.
module systolic_pe
  import tma_pkg::*;
#(
  parameter int ACC_W = 40
) (
  input  logic     clk,
  input  logic     rst_n,
  input  cplx_t    a_in,
  input  cplx_t    b_in,
  input  sa_ctl_t  ctl_in,
  output cplx_t    a_out,
  output cplx_t    b_out,
  output sa_ctl_t  ctl_out,
  output cplx_t    res,
  output logic     res_valid
);

  typedef logic signed [ACC_W-1:0] acc_t;

  acc_t   acc_re, acc_im, nxt_re, nxt_im;
  cwide_t p;

  always_comb begin
    p      = cmulc_w(a_in, b_in);
    nxt_re = (ctl_in.first ? acc_t'(0) : acc_re) + acc_t'(p.re);
    nxt_im = (ctl_in.first ? acc_t'(0) : acc_im) + acc_t'(p.im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_re    <= '0;
      acc_im    <= '0;
      a_out     <= C_ZERO;
      b_out     <= C_ZERO;
      ctl_out   <= '0;
      res       <= C_ZERO;
      res_valid <= 1'b0;
    end else begin
      a_out     <= a_in;
      b_out     <= b_in;
      ctl_out   <= ctl_in;
      res_valid <= 1'b0;
      if (ctl_in.valid) begin
        acc_re <= nxt_re;
        acc_im <= nxt_im;
        if (ctl_in.last) begin
          res.re    <= rnd(wide_t'(nxt_re));
          res.im    <= rnd(wide_t'(nxt_im));
          res_valid <= 1'b1;
        end
      end
    end
  end

endmodule
