// tb_fp_pkg: reference helpers for the testbenches.
//
// Conversions between real numbers and IEEE-754 single-precision bit
// patterns, done on the double-precision pattern from $realtobits so that
// they are independent of the RTL's FP32 datapath, plus the residue and
// quantization references used by several testbenches.
package tb_fp_pkg;

  // Nearest FP32 pattern of a real (normal range; tiny values become 0).
  function automatic logic [31:0] fp32_of(input real r);
    logic [63:0] d;
    logic [52:0] m;
    int          e;
    logic [24:0] s;
    if (r == 0.0) return 32'd0;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    s = {1'b0, m[52:29]};
    if (m[28] && ((|m[27:0]) || m[29])) s = s + 25'd1;
    if (s[24]) begin
      s = s >> 1;
      e = e + 1;
    end
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), s[22:0]};
  endfunction

  // Real value of an FP32 pattern (normal numbers and zero).
  function automatic real real_of(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic real fabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // Mathematical modulo (always in [0, m)).
  function automatic longint pmod(input longint x, input longint m);
    longint r = x % m;
    return (r < 0) ? r + m : r;
  endfunction

  // Symmetric quantization q = sign(v) * round(|v|/s * (2^(b-1)-1)).
  function automatic int quant(input real v, input real s, input int b);
    real a, t;
    if (s == 0.0) return 0;
    a = (v < 0.0) ? -v : v;
    t = $floor(a / s * real'((1 << (b - 1)) - 1) + 0.5);
    return (v < 0.0) ? -int'(t) : int'(t);
  endfunction

  // Random real in (-mag, mag).
  function automatic real rnd(input real mag);
    return mag * (real'($urandom % 2000001) / 1000000.0 - 1.0);
  endfunction

endpackage
