// tb_residue_buffer: captures random residue vectors and reads every
// element back in random order, checking the data, the echoed index and the
// one-clock read latency; a capture during reads must not disturb the read
// of the same clock.
module tb_residue_buffer;
  localparam int H = 16, N = 3, RW = 6, IW = $clog2(H);
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cap = 0, rd_en = 0, rd_valid;
  logic [N-1:0][H-1:0][RW-1:0] cap_res = '0, model;
  logic [IW-1:0] rd_idx = '0, rd_idx_q;
  logic [N-1:0][RW-1:0] rd_res;

  residue_buffer #(.H(H), .N(N), .RES_W(RW)) dut (.*);

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
    for (int t = 0; t < 10; t++) begin
      for (int i = 0; i < N; i++)
        for (int k = 0; k < H; k++) cap_res[i][k] = RW'($urandom);
      cap = 1;
      @(negedge clk);
      cap = 0;
      model = cap_res;
      for (int r = 0; r < 2 * H; r++) begin
        int idx;
        idx = int'($urandom % H);
        rd_en  = 1;
        rd_idx = IW'(idx);
        // Capture new data in the same clock as the last read.
        if (r == 2 * H - 1) begin
          cap = 1;
          cap_res = ~model;
        end
        @(negedge clk);
        rd_en = 0;
        cap   = 0;
        chk(rd_valid && rd_idx_q == IW'(idx), "read valid and index one clock later");
        for (int i = 0; i < N; i++)
          chk(rd_res[i] == model[i][idx], $sformatf("t=%0d unit %0d elem %0d", t, i, idx));
        if (r == 2 * H - 1) model = ~model;
      end
      @(negedge clk);
      chk(!rd_valid, "rd_valid low without a read");
      rd_en = 1; rd_idx = '0;
      @(negedge clk);
      rd_en = 0;
      for (int i = 0; i < N; i++)
        chk(rd_res[i] == model[i][0], "data of the overlapping capture");
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
