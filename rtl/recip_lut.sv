// recip_lut -- reciprocal unit built around a look-up table.
//
// Computes y = 1/x for a positive real fixed-point x (tma_pkg format,
// FRAC fraction bits).  The operand is normalised by a leading-one
// detector to x = m * 2^e with m in [1,2); the LUT_BITS bits that follow
// the leading one address a table holding 1/m at the centre of each
// interval, stored with RB = WL-1 bits (value 2^RB means 1.0).  The table
// entry is then shifted back by e and rounded.  The relative error is
// below about 2^-(LUT_BITS+1) plus one output LSB.
//
// The table is a constant computed at elaboration from the formula
//   entry(idx) = round( 2^(RB+LUT_BITS+1) / (2^(LUT_BITS+1) + 2*idx + 1) )
// so no data file is needed.  A zero or negative operand, and results
// beyond the word range, give the largest positive word.
//
// That the divider is a LUT-based reciprocal unit follows the paper; the
// normalise/table/shift organisation and the table size are this design's
// own choice.  Purely combinational: the result is valid in the same cycle.
module recip_lut
  import tma_pkg::*;
#(
  parameter int LUT_BITS = 10
) (
  input  fx_t x,
  output fx_t y
);

  localparam int RB   = WL - 1;           // table entry fraction bits
  localparam int MSB  = WL - 2;           // highest magnitude bit of x
  localparam int NENT = 1 << LUT_BITS;

  typedef logic [RB:0] entry_t;
  typedef entry_t lut_t [NENT];

  function automatic lut_t make_lut();
    lut_t t;
    longint num, den;
    for (int i = 0; i < NENT; i++) begin
      num  = longint'(1) << (RB + LUT_BITS + 1);
      den  = (longint'(1) << (LUT_BITS + 1)) + 2 * i + 1;
      t[i] = entry_t'((num + den / 2) / den);
    end
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  logic [MSB:0]          mag;
  logic [MSB:0]          norm;
  logic [LUT_BITS-1:0]   idx;
  int unsigned           lead;
  entry_t                ent;
  wide_t                 t, r;

  always_comb begin
    mag  = x[MSB:0];
    lead = 0;
    for (int b = 0; b <= MSB; b++)
      if (mag[b]) lead = b;
    norm = mag << (MSB - lead);
    idx  = norm[MSB-1 -: LUT_BITS];
    ent  = LUT[idx];
    // 1/x = (ent / 2^RB) * 2^(FRAC - lead); in FRAC-bit units:
    t    = wide_t'(ent) <<< (2 * FRAC - RB);
    if (lead > 0) r = (t + (wide_t'(1) <<< (lead - 1))) >>> lead;
    else          r = t;
    if (x <= 0) y = FX_MAX;
    else        y = sat(r);
  end

endmodule
