// tb_rns_configs: the core with the other moduli sets of the design space,
// each end to end at H = 16 through tb_rns_config_env:
//   4-bit {15,14,13,11}            no redundancy (no 4-bit modulus is co-prime)
//   5-bit {31,29,28,27} + {25}     one redundant modulus: detection and retry
//   6-bit {63,62,61,59} + 4 more   {55,53,47,43}: two correctable errors
//   7-bit {127,126,125} + {121,113}
//   8-bit {255,254,253} + {251,247}
//   6-bit {63,62,61,59} + {55,53}  no attempt limit, errors on 3 attempts
// The redundant moduli are this design's choices. Correction must occur in
// every configuration with at least two redundant moduli, and a retry in the
// one with a single redundant modulus. The unlimited configuration must
// repeat the MVM until its double error is gone (at least 3 retries).
module tb_rns_configs;
  import rns_pkg::*;
  localparam int NC = 6;
  localparam moduli_t M4 = {16'd0, 16'd0, 16'd0, 16'd0, 16'd11, 16'd13, 16'd14, 16'd15};
  localparam moduli_t M5 = {16'd0, 16'd0, 16'd0, 16'd25, 16'd27, 16'd28, 16'd29, 16'd31};
  localparam moduli_t M6 = {16'd43, 16'd47, 16'd53, 16'd55, 16'd59, 16'd61, 16'd62, 16'd63};
  localparam moduli_t M7 = {16'd0, 16'd0, 16'd0, 16'd113, 16'd121, 16'd125, 16'd126, 16'd127};
  localparam moduli_t M8 = {16'd0, 16'd0, 16'd0, 16'd247, 16'd251, 16'd253, 16'd254, 16'd255};

  logic [NC-1:0] done;
  int checks [NC], failures [NC], corrected [NC], retries [NC];

  tb_rns_config_env #(.B(4), .K(4), .N(4), .MODULI(M4)) e4 (
    .done(done[0]), .checks(checks[0]), .failures(failures[0]),
    .corrected(corrected[0]), .retries(retries[0]));
  tb_rns_config_env #(.B(5), .K(4), .N(5), .MODULI(M5)) e5 (
    .done(done[1]), .checks(checks[1]), .failures(failures[1]),
    .corrected(corrected[1]), .retries(retries[1]));
  tb_rns_config_env #(.B(6), .K(4), .N(8), .MODULI(M6), .NVEC(4)) e6 (
    .done(done[2]), .checks(checks[2]), .failures(failures[2]),
    .corrected(corrected[2]), .retries(retries[2]));
  tb_rns_config_env #(.B(7), .K(3), .N(5), .MODULI(M7)) e7 (
    .done(done[3]), .checks(checks[3]), .failures(failures[3]),
    .corrected(corrected[3]), .retries(retries[3]));
  tb_rns_config_env #(.B(8), .K(3), .N(5), .MODULI(M8)) e8 (
    .done(done[4]), .checks(checks[4]), .failures(failures[4]),
    .corrected(corrected[4]), .retries(retries[4]));
  tb_rns_config_env #(.B(6), .K(4), .N(6), .MODULI(MODULI_6B), .NVEC(4),
                      .MAXA(0), .FAULT_ATT(3)) e6u (
    .done(done[5]), .checks(checks[5]), .failures(failures[5]),
    .corrected(corrected[5]), .retries(retries[5]));

  int tc, tf;
  initial begin
    wait (&done);
    tc = 0; tf = 0;
    for (int i = 0; i < NC; i++) begin
      tc += checks[i];
      tf += failures[i];
      $display("config %0d: checks %0d failures %0d corrected %0d retries %0d",
               i, checks[i], failures[i], corrected[i], retries[i]);
    end
    // Mechanisms: correction with >= 2 redundant moduli, retry with one.
    tc += 5;
    if (corrected[2] == 0) tf++;
    if (corrected[3] == 0) tf++;
    if (corrected[4] == 0) tf++;
    if (retries[1] == 0) tf++;
    if (retries[5] < 3) tf++;
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
    $finish;
  end

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf + 1);
    $finish;
  end
endmodule
