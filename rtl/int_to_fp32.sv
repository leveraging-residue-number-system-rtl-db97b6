// int_to_fp32: signed 32-bit integer to IEEE-754 single precision,
// combinational, rounded to nearest-even.
//
// The magnitude is shifted left until its leading one sits at bit 31; bits
// 31..8 form the significand, bit 7 is the guard bit and bits 6..0 the sticky
// bit. Integers of up to 24 significant bits (every output of the 6-bit
// core) convert exactly.
module int_to_fp32
  import rns_pkg::*;
(
  input  logic signed [31:0] i,
  output fp32_t              f
);
  logic [31:0] mag, norm;
  logic [4:0]  msb;
  logic [24:0] mant;
  logic [7:0]  ex;

  always_comb begin
    mag = i[31] ? 32'(-i) : 32'(i);
    msb = '0;
    for (int b = 0; b < 32; b++) if (mag[b]) msb = 5'(b);
    norm = mag << (5'd31 - msb);
    mant = {1'b0, norm[31:8]};
    ex   = 8'd127 + 8'(msb);
    if (norm[7] && ((|norm[6:0]) || norm[8])) mant = mant + 25'd1;
    if (mant[24]) begin
      mant = mant >> 1;
      ex   = ex + 8'd1;
    end
    if (mag == '0) f = '0;
    else           f = {i[31], ex, mant[22:0]};
  end
endmodule
