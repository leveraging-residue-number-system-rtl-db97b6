// tb_scale_back: writes random FP32 scale factors, streams random signed
// integers in the 18-bit output range and checks
//     out = y * s_in * s_w[idx] / 31^2
// against a double-precision reference (relative error at most 4 ulp of
// FP32 for three roundings), the three-clock latency, the index and the tag.
module tb_scale_back;
  import tb_fp_pkg::*;
  localparam int H = 16, B = 6, IW = $clog2(H);
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sw_we = 0, sin_we = 0, in_valid = 0, out_valid;
  logic [IW-1:0] sw_idx = '0, in_idx = '0, out_idx;
  logic [31:0] s_data = '0, out_data;
  logic signed [31:0] in_y = '0;
  logic [1:0] in_tag = '0, out_tag;

  scale_back #(.H(H), .B(B), .TAG_W(2)) dut (.*);

  real sw [H];
  real sin;

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
    for (int round = 0; round < 4; round++) begin
      for (int k = 0; k < H; k++) begin
        s_data = fp32_of($pow(10.0, rnd(3.0)));
        sw[k] = real_of(s_data);
        sw_we = 1; sw_idx = IW'(k);
        @(negedge clk);
      end
      sw_we = 0;
      s_data = fp32_of($pow(10.0, rnd(3.0)));
      sin = real_of(s_data);
      sin_we = 1;
      @(negedge clk);
      sin_we = 0;
      for (int t = 0; t < 200; t++) begin
        int y, k;
        real e, g;
        y = int'($urandom % 246017) - 123008;
        if (t == 0) y = 0;
        k = int'($urandom % H);
        in_valid = 1; in_idx = IW'(k); in_y = y; in_tag = 2'(t);
        @(negedge clk);
        in_valid = 0;
        @(negedge clk);
        @(negedge clk);
        chk(out_valid && out_idx == IW'(k) && out_tag == 2'(t), "latency 3, index and tag");
        e = real'(y) * sin * sw[k] / 961.0;
        g = real_of(out_data);
        if (e == 0.0) chk(g == 0.0, "zero stays zero");
        else chk(((g > e) ? g - e : e - g) <= ((e < 0.0) ? -e : e) * 4.8e-7, $sformatf("y=%0d got %g expected %g", y, g, e));
      end
    end
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
