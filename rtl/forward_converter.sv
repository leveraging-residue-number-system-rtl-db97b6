// forward_converter: binary-to-residue conversion for one modulus.
//
// Takes a signed B-bit integer produced by the quantizer and returns its
// residue |x|_m in [0, m). The magnitude is reduced with barrett_reduce; for a
// negative x a non-zero residue r becomes m - r, which is the mathematical
// (always non-negative) modulo the RNS arithmetic needs.
//
// Interface: x (signed, B bits) in, r (ceil(log2 m) bits) out; combinational.
// The core instantiates one converter per modulus, all fed the same element,
// matching the "mod m_1 ... mod m_n" column of the dataflow. The mapping of
// negative numbers is this design's choice; the paper only defines a_i = A mod m_i.
module forward_converter #(
  parameter int  B       = 6,
  parameter int  MODULUS = 63,
  localparam int RES_W   = rns_pkg::bits_for(longint'(MODULUS))
) (
  input  logic signed [B-1:0] x,
  output logic [RES_W-1:0]    r
);
  logic [B-1:0]     mag;
  logic [RES_W-1:0] rm;

  // -x of the most negative value wraps to 2^(B-1), which is its magnitude.
  assign mag = x[B-1] ? B'(-x) : B'(x);

  barrett_reduce #(.X_W(B), .MODULUS(longint'(MODULUS))) u_red (
    .x(mag),
    .r(rm)
  );

  assign r = (x[B-1] && rm != '0) ? RES_W'(MODULUS) - rm : rm;
endmodule
