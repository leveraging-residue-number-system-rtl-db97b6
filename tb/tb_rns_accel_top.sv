// tb_rns_accel_top: end-to-end test of the RNS analog core.
//
// A random FP32 weight matrix is loaded, then input vectors are sent under
// different conditions:
//   vector 0  no analog error, ReLU off
//   vector 1  one residue error in one element (corrected by voting), ReLU on
//   vector 2  two residue errors in one element on the first attempt only
//             (detected, repaired by the retry)
//   vector 3  two residue errors in one element on every attempt
//             (flagged as an error after the last attempt)
//   vector 4+ random vectors, random single errors, random ReLU mode;
//             vector 4 and every odd one from 9 on use the sigmoid
// The reference is computed here independently: quantization in double
// precision, the integer dot products, the residues the analog units should
// return (plus the injected offsets), a brute-force CRT/vote decoder per
// attempt and the expected rescaled FP32 value. Every mechanism (weight load,
// MVM, signed results, correction, detection with retry, uncorrectable flag,
// ReLU clamping) is counted and must have happened at least once.
module tb_rns_accel_top;
  import tb_fp_pkg::*;
  import rns_pkg::*;
  localparam int H = 16, B = 6, N = 6, K = 4, IW = $clog2(H), MAXA = 2;
  localparam int QMAX = (1 << (B - 1)) - 1;
  localparam int MODS [N] = '{63, 62, 61, 59, 55, 53};
  localparam int NVEC = 12;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_valid = 0, w_ready, x_valid = 0, x_ready, relu_en = 0, sigmoid_en = 0;
  logic [31:0] w_data = '0, x_data = '0, y_data;
  analog_fault_t fault;
  logic y_valid, y_err, y_corrected, y_clamped, busy, retry;
  logic [IW-1:0] y_idx;
  logic [$clog2(MAXA+1)-1:0] attempt;

  rns_accel_top #(.H(H)) dut (.*);

  // Fault control: active on the first attempt only or on every attempt.
  logic        f_on = 0, f_persist = 0;
  logic [7:0]  f_mask = '0, f_row = '0;
  logic [15:0] f_off = '0;
  always_comb begin
    fault.en        = f_on && (f_persist || attempt == '0);
    fault.unit_mask = f_mask;
    fault.row       = f_row;
    fault.offset    = f_off;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Reference decoder: CRT of every 4-subset by search over the inverse,
  // then the vote with threshold C(5,4) = 5.
  function automatic longint crt_group(input longint r [N], input int mask);
    longint bigm = 1, x = 0;
    for (int i = 0; i < N; i++) if (mask[i]) bigm *= MODS[i];
    for (int i = 0; i < N; i++) if (mask[i]) begin
      longint mi = bigm / MODS[i], t = 0;
      for (longint c = 1; c < MODS[i]; c++) if ((mi % MODS[i]) * c % MODS[i] == 1) t = c;
      x = (x + r[i] * mi % bigm * t) % bigm;
    end
    return (x >= (bigm + 1) / 2) ? x - bigm : x;
  endfunction

  function automatic void decode(input longint r [N], output bit ok, output bit unan,
                                 output longint val);
    longint gv [$];
    for (int m = 0; m < (1 << N); m++) if ($countones(m) == K) gv.push_back(crt_group(r, m));
    ok = 0; unan = 1; val = gv[0];
    foreach (gv[g]) begin
      int votes = 0;
      foreach (gv[j]) votes += int'(gv[j] == gv[g]);
      if (!ok && votes >= 5) begin
        ok = 1;
        val = gv[g];
      end
      if (gv[g] != gv[0]) unan = 0;
    end
  endfunction

  real    wr [H][H];
  real    sw [H];
  int     qw [H][H];
  int     n_corr = 0, n_retry = 0, n_err = 0, n_clamp = 0, n_neg = 0, n_mvm = 0, n_wload = 0, n_sig = 0;

  always @(posedge clk) if (rst_n) begin
    if (retry) n_retry++;
    if (dut.u_ctl.mvm_start) n_mvm++;
  end

  task automatic load_weights();
    for (int k = 0; k < H; k++) begin
      real mag;
      mag = (k % 4 == 0) ? 0.01 : 1.0;
      sw[k] = 0.0;
      for (int j = 0; j < H; j++) begin
        wr[k][j] = real_of(fp32_of(rnd(mag)));
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
    n_wload++;
  endtask

  task automatic run_vector(input int v);
    real    xr [H];
    int     qx [H];
    real    sin;
    longint ytrue [H];
    bit     exp_ok [H], exp_corr [H];
    longint exp_val [H];
    int     attempts_needed, got;
    int     frow;

    // Scenario.
    relu_en   = (v == 1) ? 1'b1 : (v == 0 || v == 2 || v == 3) ? 1'b0 : 1'($urandom);
    sigmoid_en = (v == 4) || (v >= 9 && v % 2 == 1);
    f_on      = (v >= 1);
    f_persist = (v == 3);
    frow      = (v >= 4) ? int'($urandom % H) : (v == 1) ? 5 % H : (v == 2) ? 3 % H : 6 % H;
    f_row     = 8'(frow);
    f_mask    = (v == 2 || v == 3) ? 8'b0000_0011 : 8'(1 << ($urandom % N));
    f_off     = 16'(1 + $urandom % 50);

    sin = 0.0;
    for (int j = 0; j < H; j++) begin
      xr[j] = real_of(fp32_of(rnd(3.0)));
      if (fabs(xr[j]) > sin) sin = fabs(xr[j]);
    end
    for (int j = 0; j < H; j++) qx[j] = quant(xr[j], sin, B);

    // Expected decoding, attempt by attempt.
    attempts_needed = 1;
    for (int k = 0; k < H; k++) begin
      ytrue[k] = 0;
      for (int j = 0; j < H; j++) ytrue[k] += longint'(qw[k][j]) * qx[j];
      exp_ok[k] = 0;
      for (int a = 0; a < MAXA && !exp_ok[k]; a++) begin
        longint r [N];
        bit ok, unan;
        longint val;
        for (int i = 0; i < N; i++) begin
          r[i] = pmod(ytrue[k], MODS[i]);
          if (f_on && (f_persist || a == 0) && k == frow && f_mask[i])
            r[i] = pmod(r[i] + f_off, MODS[i]);
        end
        decode(r, ok, unan, val);
        exp_ok[k] = ok; exp_corr[k] = ok && !unan; exp_val[k] = val;
        if (!ok && a + 2 > attempts_needed) attempts_needed = a + 2;
      end
      if (attempts_needed > MAXA) attempts_needed = MAXA;
      if (exp_ok[k] && !exp_corr[k])
        chk(exp_val[k] == ytrue[k], "reference: clean element decodes to the true value");
    end

    // Send the vector.
    for (int j = 0; j < H; j++) begin
      x_valid = 1;
      x_data = fp32_of(xr[j]);
      @(posedge clk);
      while (!x_ready) @(posedge clk);
      #1;
    end
    x_valid = 0;

    // Collect H outputs.
    got = 0;
    while (got < H) begin
      @(negedge clk);
      if (y_valid) begin
        int k;
        real e, g;
        k = int'(y_idx);
        chk(k == got, $sformatf("v%0d output order %0d", v, k));
        chk(y_err == !exp_ok[k], $sformatf("v%0d elem %0d err flag %0d", v, k, y_err));
        chk(y_corrected == exp_corr[k], $sformatf("v%0d elem %0d corrected flag", v, k));
        if (exp_ok[k]) begin
          e = real'(exp_val[k]) * sin * sw[k] / real'(QMAX * QMAX);
          g = real_of(y_data);
          if (sigmoid_en) begin
            e = 1.0 / (1.0 + $exp(-e));
            n_sig++;
          end else if (relu_en && e < 0.0) e = 0.0;
          chk(sigmoid_en ? fabs(g - e) <= 1.0e-4 : fabs(g - e) <= fabs(e) * 4.8e-7,
              $sformatf("v%0d elem %0d got %g expected %g (Y_SI %0d)", v, k, g, e, exp_val[k]));
          if (exp_val[k] < 0) n_neg++;
        end
        if (y_corrected) n_corr++;
        if (y_err) n_err++;
        if (y_clamped) n_clamp++;
        got++;
      end
    end
    while (busy) @(negedge clk);
    chk(dut.u_ctl.attempt == $bits(attempt)'(attempts_needed - 1),
        $sformatf("v%0d attempts %0d expected %0d", v, dut.u_ctl.attempt + 1, attempts_needed));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights();
    for (int v = 0; v < NVEC; v++) run_vector(v);
    $display("mechanisms: weight loads %0d, MVMs %0d, negative results %0d, corrected %0d, retries %0d, uncorrectable %0d, ReLU clamps %0d, sigmoid outputs %0d",
             n_wload, n_mvm, n_neg, n_corr, n_retry, n_err, n_clamp, n_sig);
    chk(n_wload > 0, "weight load happened");
    chk(n_mvm > NVEC, "MVMs, including repeated ones");
    chk(n_neg > 0, "negative results (signed CRT range)");
    chk(n_corr > 0, "single-residue correction happened");
    chk(n_retry > 0, "retry after a detected error happened");
    chk(n_err > 0, "uncorrectable error flagged");
    chk(n_clamp > 0, "ReLU clamp happened");
    chk(n_sig > 0, "sigmoid applied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (H * H * 2 + NVEC * H * 12 + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
