// barrett_reduce: x mod m for a constant modulus m, by Barrett reduction.
//
// Instead of dividing, the quotient is estimated as q = (x * mu) >> X_W with
// the elaboration-time reciprocal mu = floor(2^X_W / m). Because the shift is
// at least as wide as x, the estimate is never above floor(x/m) and at most one
// below it, so r = x - q*m lies in [0, 2m) and one conditional subtraction
// finishes the reduction.
//
// Interface: x (X_W-bit unsigned) in, r = x mod MODULUS out, combinational,
// no clock. X_W may be at most 62 so that mu fits a 64-bit constant.
//
// The paper says only that the converters' modulo operations use Barrett
// reduction; this textbook single-correction form is this design's choice.
module barrett_reduce #(
  parameter int              X_W     = 48,
  parameter longint unsigned MODULUS = 63,
  localparam int             R_W     = rns_pkg::bits_for(MODULUS)
) (
  input  logic [X_W-1:0] x,
  output logic [R_W-1:0] r
);
  localparam longint unsigned MU = (64'd1 << X_W) / MODULUS;
  localparam int P_W = 2 * X_W + 1;

  logic [P_W-1:0] prod;
  logic [X_W-1:0] q;
  logic [X_W:0]   rem;

  always_comb begin
    prod = P_W'(x) * P_W'(MU);
    q    = X_W'(prod >> X_W);
    rem  = (X_W+1)'(x) - (X_W+1)'(q * MODULUS);
    if (rem >= (X_W+1)'(MODULUS)) rem = rem - (X_W+1)'(MODULUS);
    r = R_W'(rem);
  end

  initial assert (X_W <= 62 && MODULUS >= 2)
    else $error("barrett_reduce: X_W must be <= 62 and MODULUS >= 2");
endmodule
