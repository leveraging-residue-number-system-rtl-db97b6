// tb_rns_workload: a small two-layer classifier run on the core at its
// default size (H = 128, moduli {63, 62, 61, 59} + {55, 53}), as an example
// of how a network layer maps onto it.
//
//   layer 1  64 input "pixels" in [0, 1), zero-padded to 128, times a
//            128 x 128 weight tile, ReLU -> 128 hidden values
//   layer 2  the hidden values times a weight tile with 10 used rows (the
//            other 118 rows are zero), no activation -> 10 class scores
//
// A batch of four inputs goes through layer 1 with W1 loaded, then W2 is loaded
// and the four hidden vectors, as the core produced them in FP32, go through
// layer 2. While one of them passes, a residue error is injected on every
// attempt into one analog unit. The error must be corrected without a flag.
//
// Two references are used:
//   exact    the core's arithmetic in double precision: symmetric 6-bit
//            quantization, integer dot products, rescale. Every output must
//            match it to FP32 rounding.
//   float    the same network in double precision without quantization. The
//            class scores must stay within 10 % of the largest score. The
//            arg-max class is reported.
module tb_rns_workload;
  import tb_fp_pkg::*;
  import rns_pkg::*;
  localparam int H = 128, B = 6, IW = $clog2(H), MAXA = 2;
  localparam int QMAX = (1 << (B - 1)) - 1;
  localparam int NIMG = 4, NIN = 64, NOUT = 10;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_valid = 0, w_ready, x_valid = 0, x_ready, relu_en = 0, sigmoid_en = 0;
  logic [31:0] w_data = '0, x_data = '0, y_data;
  analog_fault_t fault;
  logic y_valid, y_err, y_corrected, y_clamped, busy, retry;
  logic [IW-1:0] y_idx;
  logic [$clog2(MAXA+1)-1:0] attempt;

  rns_accel_top dut (.*);

  logic f_on = 0;
  always_comb begin
    fault.en        = f_on;
    fault.unit_mask = 8'b0000_0100;
    fault.row       = 8'd3;
    fault.offset    = 16'd17;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  real w1 [H][H], w2 [H][H], wc [H][H];
  real img [NIMG][H], hid [NIMG][H], outv [NIMG][H];
  real sw [H];
  int  qw [H][H];
  int  n_corr = 0, n_err = 0;

  // Load the tile in wc into the core and prepare its quantized copy.
  task automatic load_tile();
    for (int k = 0; k < H; k++) begin
      sw[k] = 0.0;
      for (int j = 0; j < H; j++) if (fabs(wc[k][j]) > sw[k]) sw[k] = fabs(wc[k][j]);
      for (int j = 0; j < H; j++) qw[k][j] = quant(wc[k][j], sw[k], B);
    end
    for (int k = 0; k < H; k++)
      for (int j = 0; j < H; j++) begin
        w_valid = 1;
        w_data = fp32_of(wc[k][j]);
        @(posedge clk);
        while (!w_ready) @(posedge clk);
        #1;
      end
    w_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  // One input vector through the loaded tile; checks against the exact model.
  task automatic run_vector(input real x [H], input bit relu, output real y [H]);
    real    sin;
    int     qx [H];
    int     got;
    sin = 0.0;
    foreach (x[j]) if (fabs(x[j]) > sin) sin = fabs(x[j]);
    foreach (x[j]) qx[j] = quant(x[j], sin, B);
    relu_en = relu;
    for (int j = 0; j < H; j++) begin
      x_valid = 1;
      x_data = fp32_of(x[j]);
      @(posedge clk);
      while (!x_ready) @(posedge clk);
      #1;
    end
    x_valid = 0;
    got = 0;
    while (got < H) begin
      @(negedge clk);
      if (y_valid) begin
        int     k;
        longint ysi;
        real    e;
        k = int'(y_idx);
        ysi = 0;
        for (int j = 0; j < H; j++) ysi += longint'(qw[k][j]) * qx[j];
        e = real'(ysi) * sin * sw[k] / real'(QMAX * QMAX);
        if (relu && e < 0.0) e = 0.0;
        y[k] = real_of(y_data);
        chk(k == got && !y_err, $sformatf("element %0d order or error flag", k));
        chk(fabs(y[k] - e) <= fabs(e) * 4.8e-7, $sformatf("element %0d got %g expected %g", k, y[k], e));
        if (y_corrected) n_corr++;
        if (y_err) n_err++;
        got++;
      end
    end
    while (busy) @(negedge clk);
  endtask

  function automatic int argmax(input real v [H]);
    int a = 0;
    for (int k = 1; k < NOUT; k++) if (v[k] > v[a]) a = k;
    return a;
  endfunction

  initial begin
    for (int k = 0; k < H; k++)
      for (int j = 0; j < H; j++) begin
        w1[k][j] = real_of(fp32_of(rnd(0.25)));
        w2[k][j] = (k < NOUT) ? real_of(fp32_of(rnd(0.25))) : 0.0;
      end
    for (int i = 0; i < NIMG; i++)
      for (int j = 0; j < H; j++)
        img[i][j] = (j < NIN) ? real_of(fp32_of((rnd(1.0) + 1.0) / 2.0)) : 0.0;

    repeat (3) @(negedge clk);
    rst_n = 1;

    wc = w1;
    load_tile();
    for (int i = 0; i < NIMG; i++) run_vector(img[i], 1'b1, hid[i]);
    wc = w2;
    load_tile();
    for (int i = 0; i < NIMG; i++) begin
      f_on = (i == 1);
      run_vector(hid[i], 1'b0, outv[i]);
      f_on = 0;
    end

    // Unquantized reference network.
    for (int i = 0; i < NIMG; i++) begin
      real hf [H], of [H];
      real top;
      for (int k = 0; k < H; k++) begin
        hf[k] = 0.0;
        for (int j = 0; j < H; j++) hf[k] += w1[k][j] * img[i][j];
        if (hf[k] < 0.0) hf[k] = 0.0;
      end
      top = 0.0;
      for (int k = 0; k < H; k++) begin
        of[k] = 0.0;
        for (int j = 0; j < H; j++) of[k] += w2[k][j] * hf[j];
        if (fabs(of[k]) > top) top = fabs(of[k]);
      end
      for (int k = 0; k < H; k++)
        chk(fabs(outv[i][k] - of[k]) <= 0.1 * top,
            $sformatf("input %0d class %0d score %g, float %g", i, k, outv[i][k], of[k]));
      $display("input %0d: class %0d (float reference class %0d)", i, argmax(outv[i]), argmax(of));
    end
    $display("corrected elements %0d, flagged elements %0d", n_corr, n_err);
    chk(n_corr > 0, "injected residue error corrected");
    chk(n_err == 0, "no element flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * H * H + 2 * NIMG * H * 8 + 5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
