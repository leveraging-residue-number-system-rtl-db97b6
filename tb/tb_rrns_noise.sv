// tb_rrns_noise: output error rate of the redundant-RNS decoder under random
// residue noise, for 1, 2 and 4 redundant moduli and for 1 and 2 attempts.
//
// Three rrns_voter instances decode the 6-bit moduli {63, 62, 61, 59} plus
// 1 (55), 2 (55, 53) or 4 (55, 53, 47, 43) redundant moduli. Every sample is
// a random dot-product value in the 6-bit core's range (|y| <= 128 * 31 * 31).
// Each residue independently gets a random wrong value with probability P.
// A sample that the voter rejects is decoded again with fresh noise, as a
// repeated MVM would produce. It counts as an output error if it is
// rejected or wrong after the attempts, as in the p_err(R) of the
// error-rate analysis.
//
// Checks:
//   - a sample with at most floor((n-k)/2) wrong residues is always accepted
//     with the right value;
//   - a sample with no wrong residue is accepted unanimously;
//   - the second attempt lowers the error rate of every code;
//   - more redundant moduli give a lower error rate, for one attempt and for
//     two.
// The measured rates are printed.
module tb_rrns_noise;
  import tb_fp_pkg::*;
  import rns_pkg::*;
  localparam int      H = 16, K = 4, NCFG = 3, SAMPLES = 3000;
  localparam real     P = 0.05;
  localparam longint  YMAX = 128 * 31 * 31;
  localparam moduli_t MODS = {16'd43, 16'd47, 16'd53, 16'd55, 16'd59, 16'd61, 16'd62, 16'd63};
  localparam int      NS [NCFG] = '{5, 6, 8};

  int checks = 0, failures = 0;
  int err1 [NCFG], err2 [NCFG];
  bit done [NCFG];

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int N = NS[c];
    localparam int T = (N - K) / 2;
    logic                    in_valid = 0, out_valid, ok, unanimous;
    logic [3:0]              in_idx = '0, out_idx;
    logic [N-1:0][5:0]       res = '0;
    logic signed [31:0]      value;

    rrns_voter #(.MODULI(MODS), .N(N), .K(K), .RES_W(6), .H(H)) u_vote (
      .clk, .rst_n, .in_valid, .in_idx, .res,
      .out_valid, .out_idx, .value, .ok, .unanimous
    );

    // One decode of y with fresh noise; returns the outcome.
    task automatic decode_once(input longint y, output bit acc, output bit right);
      int nerr;
      nerr = 0;
      for (int i = 0; i < N; i++) begin
        longint m, r;
        m = longint'(MODS[i]);
        r = pmod(y, m);
        if (real'($urandom % 1000000) < P * 1.0e6) begin
          r = (r + 1 + longint'($urandom % 1000) % (m - 1)) % m;
          nerr++;
        end
        res[i] = 6'(r);
      end
      @(negedge clk);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      @(negedge clk);
      acc   = ok;
      right = ok && (longint'(value) == y);
      chk(out_valid, "voter latency");
      if (nerr <= T)
        chk(ok && right, $sformatf("n=%0d: %0d wrong residues not corrected", N, nerr));
      if (nerr == 0)
        chk(unanimous, $sformatf("n=%0d: clean codeword not unanimous", N));
    endtask

    initial begin
      err1[c] = 0;
      err2[c] = 0;
      done[c] = 0;
      @(posedge rst_n);
      for (int s = 0; s < SAMPLES; s++) begin
        longint y;
        bit     acc, right;
        y = longint'($urandom % (2 * YMAX + 1)) - YMAX;
        decode_once(y, acc, right);
        if (!right) err1[c]++;
        if (!acc) decode_once(y, acc, right);
        if (!right) err2[c]++;
      end
      done[c] = 1;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2]);
    for (int c = 0; c < NCFG; c++)
      $display("RRNS(%0d,4), p = %0.2f: p_err %0.4f with 1 attempt, %0.4f with 2 attempts",
               NS[c], P, real'(err1[c]) / SAMPLES, real'(err2[c]) / SAMPLES);
    for (int c = 0; c < NCFG; c++)
      chk(err2[c] < err1[c], $sformatf("n=%0d: retry lowers the error rate", NS[c]));
    for (int c = 1; c < NCFG; c++) begin
      chk(err1[c] < err1[c-1], $sformatf("n=%0d beats n=%0d with 1 attempt", NS[c], NS[c-1]));
      chk(err2[c] < err2[c-1], $sformatf("n=%0d beats n=%0d with 2 attempts", NS[c], NS[c-1]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (SAMPLES * 8 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
