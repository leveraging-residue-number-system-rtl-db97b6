// tb_forward_converter: exhaustive check of binary-to-residue conversion
// for every 6-bit signed input and the six default moduli, plus an 8-bit
// input against a small modulus where the reduction does real work.
module tb_forward_converter;
  import tb_fp_pkg::*;
  int checks = 0, failures = 0;

  localparam int MODS [6] = '{63, 62, 61, 59, 55, 53};
  logic signed [5:0] x6;
  logic        [5:0] r6 [6];
  logic signed [7:0] x8;
  logic        [3:0] r8;

  for (genvar i = 0; i < 6; i++) begin : g_m
    forward_converter #(.B(6), .MODULUS(MODS[i])) u (.x(x6), .r(r6[i]));
  end
  forward_converter #(.B(8), .MODULUS(13)) u13 (.x(x8), .r(r8));

  initial begin
    for (int v = -32; v < 32; v++) begin
      x6 = 6'(v);
      #1;
      for (int i = 0; i < 6; i++) begin
        checks++;
        if (longint'(r6[i]) != pmod(v, MODS[i])) begin
          failures++;
          $display("FAIL x=%0d m=%0d got %0d", v, MODS[i], r6[i]);
        end
      end
    end
    for (int v = -128; v < 128; v++) begin
      x8 = 8'(v);
      #1;
      checks++;
      if (longint'(r8) != pmod(v, 13)) begin
        failures++;
        $display("FAIL x=%0d m=13 got %0d", v, r8);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
