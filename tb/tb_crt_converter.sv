// tb_crt_converter: reverse conversion of random signed integers for two
// groups of four moduli (the non-redundant {63,62,61,59} and a group with the
// redundant {55,53}), covering the whole signed range [-M/2, M/2) of each
// group and its ends. Residues are formed here with the % operator.
module tb_crt_converter;
  import tb_fp_pkg::*;
  import rns_pkg::*;
  int checks = 0, failures = 0;

  localparam logic [7:0] GA = 8'b0000_1111;
  localparam logic [7:0] GB = 8'b0011_0101;
  localparam int MODS [6] = '{63, 62, 61, 59, 55, 53};

  logic [5:0][5:0] res;
  logic signed [31:0] ya, yb;

  crt_converter #(.MODULI(MODULI_6B), .N(6), .GROUP(GA), .RES_W(6)) ua (.res(res), .y(ya));
  crt_converter #(.MODULI(MODULI_6B), .N(6), .GROUP(GB), .RES_W(6)) ub (.res(res), .y(yb));

  function automatic longint prod(input logic [7:0] g);
    longint p = 1;
    for (int i = 0; i < 6; i++) if (g[i]) p *= MODS[i];
    return p;
  endfunction

  task automatic try(input longint v);
    longint ma = prod(GA), mb = prod(GB);
    for (int i = 0; i < 6; i++) res[i] = 6'(pmod(v, MODS[i]));
    #1;
    if (v >= -(ma / 2) && v < (ma + 1) / 2) begin
      checks++;
      if (longint'(ya) != v) begin
        failures++;
        $display("FAIL group A v=%0d got %0d", v, ya);
      end
    end
    if (v >= -(mb / 2) && v < (mb + 1) / 2) begin
      checks++;
      if (longint'(yb) != v) begin
        failures++;
        $display("FAIL group B v=%0d got %0d", v, yb);
      end
    end
  endtask

  initial begin
    try(0); try(1); try(-1);
    try(prod(GA) / 2 - 1); try(-(prod(GA) / 2));
    try(prod(GB) / 2); try(-(prod(GB) / 2));
    for (int t = 0; t < 4000; t++) try(longint'($urandom % 14057106) - 7028553);
    for (int t = 0; t < 2000; t++) try(longint'($urandom % 246017) - 123008);
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
