// tb_activation: random FP32 values through the activation stage in its three
// modes: identity, ReLU and sigmoid. With ReLU every negative value (and -0)
// must become +0 and be flagged as clamped; positive values and the identity
// mode pass unchanged. The sigmoid is compared with 1 / (1 + exp(-y)) in
// double precision, within 1e-4 absolute, over wide and narrow input ranges
// and at the table's end points. One clock of latency; index and tag travel
// with the data.
module tb_activation;
  import tb_fp_pkg::*;
  localparam int H = 16, IW = $clog2(H);
  int checks = 0, failures = 0, clamps = 0, sigs = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic relu_en = 0, sigmoid_en = 0, in_valid = 0, out_valid, out_clamped;
  logic [IW-1:0] in_idx = '0, out_idx;
  logic [31:0] in_data = '0, out_data;
  logic [1:0] in_tag = '0, out_tag;

  activation #(.H(H), .TAG_W(2)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 900; t++) begin
      real r, e, d;
      int  mode;
      mode = t % 3;
      case (t % 7)
        0, 1:    r = rnd(50.0);
        2, 3, 4: r = rnd(8.0);
        5:       r = rnd(0.01);
        default: r = (t % 2 == 0) ? 16.0 : -15.99;
      endcase
      relu_en    = (mode == 1) || (mode == 2 && t[0]);
      sigmoid_en = (mode == 2);
      in_valid = 1; in_idx = IW'(t); in_tag = 2'(t);
      in_data = (t == 3) ? 32'h8000_0000 : fp32_of(r);
      @(negedge clk);
      in_valid = 0;
      chk(out_valid && out_idx == IW'(t) && out_tag == 2'(t), "latency, index, tag");
      if (sigmoid_en) begin
        e = 1.0 / (1.0 + $exp(-real_of(in_data)));
        d = fabs(real_of(out_data) - e);
        chk(d <= 1.0e-4 && !out_data[31], $sformatf("sigmoid(%g) = %g, expected %g", real_of(in_data), real_of(out_data), e));
        sigs++;
      end else begin
        e = (relu_en && in_data[31]) ? 0.0 : real_of(in_data);
        chk(real_of(out_data) == e && !(relu_en && out_data[31]), $sformatf("value %g relu=%0d", r, relu_en));
      end
      chk(out_clamped == (!sigmoid_en && relu_en && in_data[31]), "clamp flag");
      if (out_clamped) clamps++;
      @(negedge clk);
      chk(!out_valid, "single-clock valid");
    end
    chk(sigs == 300, "sigmoid mode exercised");
    chk(clamps > 0, "ReLU clamped at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
