// rns_pkg: types and elaboration-time arithmetic shared by the RNS analog core.
//
// The core represents each low-precision integer by its residues modulo a set
// of pairwise co-prime moduli. This package holds the moduli-set type, the
// default 6-bit moduli set, and constant functions that the RTL uses to derive
// everything else at elaboration: the product of a group of moduli, the CRT
// coefficients |M_i * T_i|_M, modular inverses, the Barrett reciprocal, the
// enumeration of the C(n,k) voting groups and the default vote threshold.
//
// The four non-redundant moduli {63, 62, 61, 59} and h = 128 follow the
// paper's 6-bit configuration. The two redundant moduli {55, 53} are this
// design's choice: the paper evaluates 1, 2 and 4 redundant moduli but does
// not list their values.
package rns_pkg;

  // Up to MAXN moduli of at most 16 bits each, packed so that parameters of
  // this type are plain bit vectors for every tool.
  localparam int MAXN = 8;
  typedef logic [MAXN-1:0][15:0] moduli_t;

  // Entry i is modulus m_(i+1). 6-bit set of the paper plus two redundant.
  localparam moduli_t MODULI_6B = {16'd0, 16'd0, 16'd53, 16'd55,
                                   16'd59, 16'd61, 16'd62, 16'd63};

  // IEEE-754 single-precision word.
  typedef logic [31:0] fp32_t;

  // Error injected into the ADC output residue of one output row, in every
  // analog unit selected by unit_mask (bit i: the unit of modulus i).
  typedef struct packed {
    logic        en;        // apply the error on the next MVM
    logic [MAXN-1:0] unit_mask;
    logic [7:0]  row;      // which output element
    logic [15:0] offset;   // added to the residue, modulo m
  } analog_fault_t;

  // Bits needed to hold values 0 .. v-1 (at least 1).
  function automatic int bits_for(input longint unsigned v);
    int b = 1;
    while ((longint'(1) << b) < v) b++;
    return b;
  endfunction

  function automatic int popcount8(input logic [MAXN-1:0] m);
    int c = 0;
    for (int i = 0; i < MAXN; i++) c += int'(m[i]);
    return c;
  endfunction

  // Binomial coefficient C(n, k).
  function automatic int binom(input int n, input int k);
    longint r = 1;
    if (k < 0 || k > n) return 0;
    for (int i = 1; i <= k; i++) r = r * (longint'(n) - longint'(k) + longint'(i)) / longint'(i);
    return int'(r);
  endfunction

  // g-th k-subset of {0..n-1} in increasing bit-mask order.
  function automatic logic [MAXN-1:0] group_mask(input int n, input int k, input int g);
    int cnt = 0;
    for (int m = 0; m < (1 << n); m++) begin
      if (popcount8(MAXN'(m)) == k) begin
        if (cnt == g) return MAXN'(m);
        cnt++;
      end
    end
    return '0;
  endfunction

  // Product of the moduli selected by mask.
  function automatic longint unsigned group_product(input moduli_t mods, input logic [MAXN-1:0] mask);
    longint unsigned p = 1;
    for (int i = 0; i < MAXN; i++)
      if (mask[i]) p = p * longint'(mods[i]);
    return p;
  endfunction

  // Multiplicative inverse of a modulo m (a and m co-prime, m small).
  function automatic longint unsigned mod_inverse(input longint unsigned a, input longint unsigned m);
    longint unsigned ar = a % m;
    if (m == 1) return 0;
    for (longint unsigned t = 1; t < m; t++)
      if ((ar * t) % m == 1) return t;
    return 0;
  endfunction

  // CRT coefficient |M_i T_i|_M of modulus i within the group given by mask,
  // with M the group's product, M_i = M / m_i and T_i = |M_i^-1|_(m_i).
  function automatic longint unsigned crt_coeff(input moduli_t mods, input logic [MAXN-1:0] mask, input int i);
    longint unsigned bigm = group_product(mods, mask);
    longint unsigned mi   = longint'(mods[i]);
    longint unsigned big_mi = bigm / mi;
    longint unsigned ti   = mod_inverse(big_mi % mi, mi);
    return (big_mi * ti) % bigm;
  endfunction

  // Default vote threshold: a value is accepted when at least C(n-t, k)
  // groups agree, t = floor((n-k)/2) being the number of correctable errors.
  function automatic int default_vote_min(input int n, input int k);
    return binom(n - (n - k) / 2, k);
  endfunction

  // FP32 bit pattern of 1/n for an integer n >= 1, rounded to nearest.
  // With 2^p <= n < 2^(p+1), 1/n = (2^(p+1)/n) * 2^-(p+1) and the 24-bit
  // significand is round(2^(p+24)/n).
  function automatic fp32_t recip_fp32(input longint unsigned n);
    int              p = 0;
    longint unsigned sig;
    int              ex;
    while ((longint'(2) << p) <= n) p++;
    sig = ((longint'(1) << (p + 24)) + n / 2) / n;
    ex  = 127 - p - 1;
    if (sig >= (longint'(1) << 24)) begin
      sig = sig >> 1;
      ex  = ex + 1;
    end
    return {1'b0, 8'(ex), 23'(sig)};
  endfunction

endpackage
