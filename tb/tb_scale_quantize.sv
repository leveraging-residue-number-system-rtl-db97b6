// tb_scale_quantize: streams random FP32 vectors (with an all-zero vector,
// an exact tie at the maximum and mixed magnitudes) through the quantizer.
// The scale factor must equal max|v| and every output must equal
// sign(v) * round(|v|/s * 31), computed here in double precision. The timing
// is checked too: in_ready for exactly H clocks, scale_valid one clock after
// the last element, then H consecutive outputs in index order (2H per vector).
module tb_scale_quantize;
  import tb_fp_pkg::*;
  localparam int H = 16, B = 6, IW = $clog2(H);
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, scale_valid, q_valid, q_last;
  logic [31:0] in_data = '0, scale;
  logic [IW-1:0] q_idx;
  logic signed [B-1:0] q_data;

  scale_quantize #(.H(H), .B(B)) dut (.*);

  logic [31:0] vec [H];
  real         smax;
  int          cyc = 0;
  always @(posedge clk) cyc++;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  task automatic run_vector(input int kind);
    int t0, got;
    smax = 0.0;
    for (int i = 0; i < H; i++) begin
      real r;
      case (kind)
        0: r = 0.0;
        1: r = rnd(1.0);
        2: r = rnd(100.0) * ((i % 3 == 0) ? 0.001 : 1.0);
        default: r = rnd(1.0e-3);
      endcase
      vec[i] = fp32_of(r);
      if (real_of(vec[i]) > smax) smax = real_of(vec[i]);
      if (-real_of(vec[i]) > smax) smax = -real_of(vec[i]);
    end
    // Send the vector, one element per clock.
    @(negedge clk);
    chk(in_ready, "in_ready high at vector start");
    t0 = cyc;
    for (int i = 0; i < H; i++) begin
      in_valid = 1;
      in_data  = vec[i];
      @(negedge clk);
    end
    in_valid = 0;
    chk(scale_valid, "scale_valid one clock after the last element");
    chk(real_of(scale) == smax, $sformatf("scale %g vs %g", real_of(scale), smax));
    chk(!in_ready, "in_ready low while emitting");
    for (int i = 0; i < H; i++) begin
      @(negedge clk);
      chk(q_valid && q_idx == IW'(i), $sformatf("q stream position %0d", i));
      got = int'(q_data);
      chk(got == quant(real_of(vec[i]), smax, B),
          $sformatf("q[%0d] got %0d expected %0d", i, got, quant(real_of(vec[i]), smax, B)));
      chk(q_last == (i == H - 1), "q_last");
    end
    chk(cyc - t0 == 2 * H, $sformatf("2H clocks per vector, took %0d", cyc - t0));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_vector(0);
    for (int v = 0; v < 30; v++) run_vector(1 + v % 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
