// tb_analog_mvm_unit: loads random weight and input residues into the
// analog-unit model and checks each MVM against the integer reference
// y_k = (sum_j w_kj x_j) mod m, including the one-clock latency and the
// error-injection port (offset added mod m to one row, only in the selected
// unit).
module tb_analog_mvm_unit;
  import tb_fp_pkg::*;
  import rns_pkg::*;
  localparam int H = 16, M = 61, IW = $clog2(H), RW = 6;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we = 0, x_we = 0, start = 0, y_valid;
  logic [IW-1:0] w_row = '0, w_col = '0, x_idx = '0;
  logic [RW-1:0] w_res = '0, x_res = '0;
  analog_fault_t fault = '0;
  logic [H-1:0][RW-1:0] y_res;

  analog_mvm_unit #(.H(H), .MODULUS(M), .UNIT(2)) dut (.*);

  int w [H][H];
  int x [H];

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
    for (int r = 0; r < H; r++)
      for (int c = 0; c < H; c++) begin
        w[r][c] = (r == 0) ? M - 1 : int'($urandom % M);
        w_we = 1; w_row = IW'(r); w_col = IW'(c); w_res = RW'(w[r][c]);
        @(negedge clk);
      end
    w_we = 0;
    for (int t = 0; t < 12; t++) begin
      int frow, foff;
      logic fen, fmine;
      for (int j = 0; j < H; j++) begin
        x[j] = (t == 0) ? M - 1 : int'($urandom % M);
        x_we = 1; x_idx = IW'(j); x_res = RW'(x[j]);
        @(negedge clk);
      end
      x_we = 0;
      frow  = int'($urandom % H);
      foff  = 1 + int'($urandom % (M - 1));
      fen   = (t % 3 == 1);
      fmine = (t % 2 == 1);
      fault.en        = fen;
      fault.unit_mask = fmine ? 8'b0000_0100 : 8'b0000_1000;
      fault.row       = 8'(frow);
      fault.offset    = 16'(foff);
      start = 1;
      @(negedge clk);
      start = 0;
      fault = '0;
      chk(y_valid, "y_valid one clock after start");
      for (int k = 0; k < H; k++) begin
        longint acc;
        acc = 0;
        for (int j = 0; j < H; j++) acc += longint'(w[k][j]) * x[j];
        if (fen && fmine && k == frow) acc += foff;
        chk(longint'(y_res[k]) == pmod(acc, M),
            $sformatf("t=%0d row %0d got %0d expected %0d", t, k, y_res[k], pmod(acc, M)));
      end
      @(negedge clk);
      chk(!y_valid, "y_valid is a single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
