// tb_rns_config_env: reusable end-to-end environment for one moduli
// configuration of the core (used by tb_rns_configs).
//
// It instantiates rns_accel_top with the given B, K, N, moduli and attempt
// limit MAXA (0: unlimited), loads a random weight matrix and sends NVEC input
// vectors: a clean one, one with a single residue error, one with two residue
// errors, then random single errors. The errors are present on the first
// FAULT_ATT attempts of each vector. A reference model written
// independently (quantization in double precision, integer dot products,
// residues with the injected offsets, brute-force CRT of every K-subset,
// vote with threshold C(N - floor((N-K)/2), K), repeated attempts) gives
// the expected value and flags of every output. The number of checks and
// failures is reported on the ports when done goes high.
module tb_rns_config_env
  import tb_fp_pkg::*;
  import rns_pkg::*;
#(
  parameter int      H      = 16,
  parameter int      B      = 6,
  parameter int      K      = 4,
  parameter int      N      = 6,
  parameter moduli_t MODULI = MODULI_6B,
  parameter int      NVEC   = 6,
  parameter int      MAXA   = 2,
  parameter int      FAULT_ATT = 1
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   corrected,
  output int   retries
);
  localparam int IW = $clog2(H), AW = (MAXA == 0) ? 8 : $clog2(MAXA + 1);
  localparam int ALIM = (MAXA == 0) ? 1000 : MAXA;
  localparam int QMAX = (1 << (B - 1)) - 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_valid = 0, w_ready, x_valid = 0, x_ready, relu_en = 0, sigmoid_en = 0;
  logic [31:0] w_data = '0, x_data = '0, y_data;
  analog_fault_t fault;
  logic y_valid, y_err, y_corrected, y_clamped, busy, retry;
  logic [IW-1:0] y_idx;
  logic [AW-1:0] attempt;

  rns_accel_top #(.H(H), .B(B), .K(K), .N(N), .MODULI(MODULI), .MAX_ATTEMPTS(MAXA)) dut (.*);

  logic        f_on = 0;
  logic [7:0]  f_mask = '0, f_row = '0;
  logic [15:0] f_off = '0;
  always_comb begin
    fault.en        = f_on && (int'(attempt) < FAULT_ATT);
    fault.unit_mask = f_mask;
    fault.row       = f_row;
    fault.offset    = f_off;
  end

  initial begin
    done = 0; checks = 0; failures = 0; corrected = 0; retries = 0;
  end
  always @(posedge clk) if (rst_n && retry) retries++;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL [B=%0d N=%0d] %s", B, N, what);
    end
  endtask

  function automatic longint md(input int i);
    return longint'(MODULI[i]);
  endfunction

  function automatic int choose(input int n, input int k);
    longint r = 1;
    for (int i = 0; i < k; i++) r = r * (n - i) / (i + 1);
    return int'(r);
  endfunction

  function automatic longint crt_group(input longint r [N], input int mask);
    longint bigm = 1, x = 0;
    for (int i = 0; i < N; i++) if (mask[i]) bigm *= md(i);
    for (int i = 0; i < N; i++) if (mask[i]) begin
      longint mi, t;
      mi = bigm / md(i);
      t = 0;
      for (longint c = 1; c < md(i); c++) if ((mi % md(i)) * c % md(i) == 1) t = c;
      x = (x + r[i] * mi % bigm * t) % bigm;
    end
    return (x >= (bigm + 1) / 2) ? x - bigm : x;
  endfunction

  function automatic void decode(input longint r [N], output bit ok, output bit unan,
                                 output longint val);
    longint gv [$];
    int thr;
    thr = choose(N - (N - K) / 2, K);
    for (int m = 0; m < (1 << N); m++) if ($countones(m) == K) gv.push_back(crt_group(r, m));
    ok = 0; unan = 1; val = gv[0];
    foreach (gv[g]) begin
      int votes;
      votes = 0;
      foreach (gv[j]) votes += int'(gv[j] == gv[g]);
      if (!ok && votes >= thr) begin
        ok = 1;
        val = gv[g];
      end
      if (gv[g] != gv[0]) unan = 0;
    end
  endfunction

  real wr [H][H];
  real sw [H];
  int  qw [H][H];

  task automatic load_weights();
    for (int k = 0; k < H; k++) begin
      sw[k] = 0.0;
      for (int j = 0; j < H; j++) begin
        wr[k][j] = real_of(fp32_of(rnd(1.0)));
        if (fabs(wr[k][j]) > sw[k]) sw[k] = fabs(wr[k][j]);
      end
      for (int j = 0; j < H; j++) qw[k][j] = quant(wr[k][j], sw[k], B);
    end
    for (int k = 0; k < H; k++)
      for (int j = 0; j < H; j++) begin
        w_valid = 1;
        w_data = fp32_of(wr[k][j]);
        @(posedge clk);
        while (!w_ready) @(posedge clk);
        #1;
      end
    w_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  task automatic run_vector(input int v);
    real    xr [H];
    int     qx [H];
    real    sin;
    longint ytrue;
    bit     exp_ok [H], exp_corr [H];
    longint exp_val [H];
    int     got, frow;

    relu_en = 1'($urandom);
    f_on    = (v >= 1);
    frow    = int'($urandom % H);
    f_row   = 8'(frow);
    f_mask  = (v == 2) ? 8'b0000_0101 : 8'(1 << ($urandom % N));
    f_off   = 16'(1 + $urandom % 200);

    sin = 0.0;
    for (int j = 0; j < H; j++) begin
      xr[j] = real_of(fp32_of(rnd(2.0)));
      if (fabs(xr[j]) > sin) sin = fabs(xr[j]);
    end
    for (int j = 0; j < H; j++) qx[j] = quant(xr[j], sin, B);

    for (int k = 0; k < H; k++) begin
      ytrue = 0;
      for (int j = 0; j < H; j++) ytrue += longint'(qw[k][j]) * qx[j];
      exp_ok[k] = 0;
      for (int a = 0; a < ALIM && !exp_ok[k]; a++) begin
        longint r [N];
        bit ok, unan;
        longint val;
        for (int i = 0; i < N; i++) begin
          r[i] = pmod(ytrue, md(i));
          if (f_on && a < FAULT_ATT && k == frow && f_mask[i]) r[i] = pmod(r[i] + f_off, md(i));
        end
        decode(r, ok, unan, val);
        exp_ok[k] = ok; exp_corr[k] = ok && !unan; exp_val[k] = val;
      end
      if (!(f_on && k == frow))
        chk(exp_val[k] == ytrue, "reference: error-free element decodes to the dot product");
    end

    for (int j = 0; j < H; j++) begin
      x_valid = 1;
      x_data = fp32_of(xr[j]);
      @(posedge clk);
      while (!x_ready) @(posedge clk);
      #1;
    end
    x_valid = 0;

    got = 0;
    while (got < H) begin
      @(negedge clk);
      if (y_valid) begin
        int k;
        real e, g;
        k = int'(y_idx);
        chk(k == got, "output order");
        chk(y_err == !exp_ok[k], $sformatf("v%0d elem %0d err flag", v, k));
        chk(y_corrected == exp_corr[k], $sformatf("v%0d elem %0d corrected flag", v, k));
        if (exp_ok[k]) begin
          e = real'(exp_val[k]) * sin * sw[k] / real'(QMAX * QMAX);
          if (relu_en && e < 0.0) e = 0.0;
          g = real_of(y_data);
          chk(fabs(g - e) <= fabs(e) * 4.8e-7,
              $sformatf("v%0d elem %0d got %g expected %g", v, k, g, e));
        end
        if (y_corrected) corrected++;
        got++;
      end
    end
    while (busy) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights();
    for (int v = 0; v < NVEC; v++) run_vector(v);
    done = 1;
  end
endmodule
