// crt_converter: residue-to-binary (reverse) conversion by the Chinese
// Remainder Theorem for one group of moduli.
//
// For the moduli selected by GROUP, with M their product, M_i = M/m_i and
// T_i = |M_i^-1|_(m_i), the standard representation is
//     A = | sum_i a_i * |M_i T_i|_M |_M .
// The coefficients |M_i T_i|_M are computed at elaboration (rns_pkg), so the
// datapath is k constant multiplications, an adder tree and one Barrett
// reduction modulo M. The result in [0, M) is then read as a signed number:
// values at or above ceil(M/2) stand for A - M.
//
// Interface: res carries the residues of all N moduli (only those in GROUP
// are used), y is the signed result; combinational. The CRT formula and the
// use of Barrett reduction follow the paper; the signed reading of the upper
// half of [0, M) is this design's choice.
module crt_converter
  import rns_pkg::*;
#(
  parameter moduli_t         MODULI = MODULI_6B,
  parameter int              N      = 6,
  parameter logic [MAXN-1:0] GROUP  = 8'b0000_1111,
  parameter int              RES_W  = 6
) (
  input  logic [N-1:0][RES_W-1:0] res,
  output logic signed [31:0]      y
);
  localparam longint unsigned BIGM = group_product(MODULI, GROUP);
  localparam longint unsigned HALF = (BIGM + 1) / 2;
  localparam int M_W = bits_for(BIGM);
  localparam int S_W = M_W + RES_W + 4;

  logic [N-1:0][S_W-1:0] term;
  logic [S_W-1:0]        acc;
  logic [M_W-1:0]        r;

  for (genvar i = 0; i < N; i++) begin : g_term
    localparam longint unsigned COEF = GROUP[i] ? crt_coeff(MODULI, GROUP, i) : 0;
    assign term[i] = S_W'(res[i]) * S_W'(COEF);
  end

  always_comb begin
    acc = '0;
    for (int i = 0; i < N; i++) acc = acc + term[i];
  end

  barrett_reduce #(.X_W(S_W), .MODULUS(BIGM)) u_red (
    .x(acc),
    .r(r)
  );

  always_comb begin
    if (64'(r) >= HALF) y = 32'(64'(r) - BIGM);
    else                y = 32'(r);
  end

  initial assert (S_W <= 62 && M_W <= 32)
    else $error("crt_converter: moduli product too large");
endmodule
