// tb_rrns_voter: redundant-RNS voting with the default RRNS(6,4) code.
// Random dot-product results in the 18-bit range [-123008, 123008] are
// encoded here with %, then 0, 1 or 2 residues are corrupted:
//   0 errors: ok, unanimous, exact value
//   1 error:  ok (corrected), not unanimous, exact value
//   2 errors: either detected (ok = 0) or, if accepted, the accepted value
//             agrees with at least 5 of the 6 received residues (the code
//             cannot do better); detections must occur.
// A second instance with the strict-majority threshold (VOTE_MIN = 8 of 15)
// must flag single errors as detected. Results must appear two clocks after
// the input, one per clock.
module tb_rrns_voter;
  import tb_fp_pkg::*;
  import rns_pkg::*;
  localparam int H = 16, IW = $clog2(H);
  localparam int MODS [6] = '{63, 62, 61, 59, 55, 53};
  int checks = 0, failures = 0, detected2 = 0, miscorrected2 = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  logic [IW-1:0] in_idx = '0;
  logic [5:0][5:0] res = '0;
  logic out_valid, ok, unanimous, out_valid_s, ok_s, unan_s;
  logic [IW-1:0] out_idx, out_idx_s;
  logic signed [31:0] value, value_s;

  rrns_voter #(.MODULI(MODULI_6B), .N(6), .K(4), .RES_W(6), .H(H)) dut (
    .clk, .rst_n, .in_valid, .in_idx, .res,
    .out_valid, .out_idx, .value, .ok, .unanimous);
  rrns_voter #(.MODULI(MODULI_6B), .N(6), .K(4), .RES_W(6), .H(H), .VOTE_MIN(8)) strict (
    .clk, .rst_n, .in_valid, .in_idx, .res,
    .out_valid(out_valid_s), .out_idx(out_idx_s), .value(value_s),
    .ok(ok_s), .unanimous(unan_s));

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  longint       exp_v [$];
  int           exp_e [$];
  logic [5:0][5:0] exp_r [$];

  // Drive one element per clock; check results two clocks later.
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      longint v;
      int ne, p1, p2;
      v  = longint'($urandom % 246017) - 123008;
      if (t == 0) v = 123008;
      if (t == 1) v = -123008;
      ne = t % 3;
      for (int i = 0; i < 6; i++) res[i] = 6'(pmod(v, MODS[i]));
      p1 = int'($urandom % 6);
      p2 = (p1 + 1 + int'($urandom % 5)) % 6;
      if (ne >= 1) res[p1] = 6'(pmod(longint'(res[p1]) + 1 + $urandom % (MODS[p1] - 1), MODS[p1]));
      if (ne >= 2) res[p2] = 6'(pmod(longint'(res[p2]) + 1 + $urandom % (MODS[p2] - 1), MODS[p2]));
      in_valid = 1;
      in_idx   = IW'(t);
      exp_v.push_back(v);
      exp_e.push_back(ne);
      exp_r.push_back(res);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (4) @(negedge clk);
    chk(exp_v.size() == 0, "every input produced a result");
    chk(detected2 > 0, "double errors are detected");
    $display("double errors: %0d detected, %0d accepted", detected2, miscorrected2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Results: in order, two clocks after the input.
  logic [1:0] vpipe = '0;
  always @(posedge clk) vpipe <= {vpipe[0], in_valid};

  always @(negedge clk) if (rst_n) begin
    chk(out_valid == vpipe[1], "two-clock latency");
    if (out_valid && exp_v.size() > 0) begin
      longint v;
      int ne, agree;
      logic [5:0][5:0] r;
      v = exp_v.pop_front();
      ne = exp_e.pop_front();
      r = exp_r.pop_front();
      if (ne == 0) begin
        chk(ok && unanimous && longint'(value) == v, $sformatf("clean v=%0d got %0d", v, value));
        chk(ok_s && longint'(value_s) == v, "strict rule accepts clean codewords");
      end else if (ne == 1) begin
        chk(ok && !unanimous && longint'(value) == v, $sformatf("1 error v=%0d got %0d ok=%0d", v, value, ok));
        chk(!ok_s, "strict rule does not accept a single error");
      end else begin
        chk(!unanimous, "2 errors are never unanimous");
        if (!ok) detected2++;
        else begin
          agree = 0;
          for (int i = 0; i < 6; i++) agree += int'(pmod(longint'(value), MODS[i]) == longint'(r[i]));
          miscorrected2++;
          chk(agree >= 5, "an accepted value agrees with 5 residues");
        end
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
