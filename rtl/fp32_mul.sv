// fp32_mul: IEEE-754 single-precision multiplier, combinational.
//
// The 24-bit significands are multiplied to a 48-bit product, normalised by at
// most one position and rounded to nearest-even using the guard bit and a
// sticky OR of the rest. Simplifications (this design's choice): operands and
// results below the normal range are flushed to signed zero, an exponent
// overflow or an infinite/NaN operand gives a signed infinity.
module fp32_mul
  import rns_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t p
);
  logic        sgn;
  logic [47:0] prod;
  logic [24:0] mant;
  logic        guard, sticky;
  logic signed [10:0] ex;

  always_comb begin
    sgn    = a[31] ^ b[31];
    prod   = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    ex     = 11'(a[30:23]) + 11'(b[30:23]) - 11'sd127;
    if (prod[47]) begin
      mant   = {1'b0, prod[47:24]};
      guard  = prod[23];
      sticky = |prod[22:0];
      ex     = ex + 11'sd1;
    end else begin
      mant   = {1'b0, prod[46:23]};
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    if (guard && (sticky || mant[0])) mant = mant + 25'd1;
    if (mant[24]) begin
      mant = mant >> 1;
      ex   = ex + 11'sd1;
    end
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) p = {sgn, 31'd0};
    else if (a[30:23] == 8'hff || b[30:23] == 8'hff || ex >= 11'sd255) p = {sgn, 8'hff, 23'd0};
    else if (ex <= 11'sd0) p = {sgn, 31'd0};
    else p = {sgn, ex[7:0], mant[22:0]};
  end
endmodule
