// tb_rns_controller: the sequencer against simple models of its neighbours.
// The testbench plays the scale/quantize unit (H-element load pass, then
// scale_valid and an H-clock q stream), the analog units (done two clocks
// after start), the residue buffer plus voter (answer three clocks after a
// read; the answer encodes element and attempt, ok/unanimous per scenario).
// It checks the weight-load addressing, the scale-factor writes, that one MVM
// is made when everything is accepted, that a detected error causes exactly
// one retry with only the unresolved element updated, that an error that
// persists ends flagged, and the tags and order of the output stream.
module tb_rns_controller;
  localparam int H = 8, IW = $clog2(H), MAXA = 2;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_valid = 0, w_ready, x_valid = 0, x_ready;
  logic [31:0] w_data = '0, x_data = '0, qin_data;
  logic qin_valid, qin_ready, q_scale_valid, q_valid, q_last;
  logic [IW-1:0] q_idx;
  logic sw_we, sin_we, aw_we, ax_we, mvm_start, mvm_done;
  logic [IW-1:0] sw_idx, aw_row, aw_col, ax_idx;
  logic rb_rd_en;
  logic [IW-1:0] rb_rd_idx;
  logic v_valid, v_ok, v_unanimous;
  logic [IW-1:0] v_idx;
  logic signed [31:0] v_value;
  logic sb_valid;
  logic [IW-1:0] sb_idx;
  logic signed [31:0] sb_y;
  logic [1:0] sb_tag;
  logic busy, retry;
  logic [$clog2(MAXA+1)-1:0] attempt;

  rns_controller #(.H(H), .MAX_ATTEMPTS(MAXA)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Quantizer model.
  int qcnt = 0, qemit = -1;
  assign qin_ready = (qemit < 0);
  always @(posedge clk) begin
    q_scale_valid <= 1'b0;
    q_valid       <= 1'b0;
    q_last        <= 1'b0;
    if (!rst_n) begin
      qcnt  <= 0;
      qemit <= -1;
      q_idx <= '0;
    end else if (qemit < 0) begin
      if (qin_valid) begin
        if (qcnt == H - 1) begin
          qcnt <= 0;
          qemit <= 0;
          q_scale_valid <= 1'b1;
        end else qcnt <= qcnt + 1;
      end
    end else begin
      q_valid <= 1'b1;
      q_idx   <= IW'(qemit);
      q_last  <= (qemit == H - 1);
      qemit   <= (qemit == H - 1) ? -1 : qemit + 1;
    end
  end

  // Analog + buffer + voter model.
  int starts = 0;
  logic [1:0] dpipe = '0;
  logic [2:0] rpipe = '0;
  logic [IW-1:0] ridx [3];
  logic [H-1:0] fail0 = '0, fail1 = '0, nonunan = '0;
  always @(posedge clk) begin
    dpipe <= rst_n ? {dpipe[0], mvm_start} : 2'b00;
    rpipe <= rst_n ? {rpipe[1:0], rb_rd_en} : 3'b000;
    ridx[0] <= rb_rd_idx; ridx[1] <= ridx[0]; ridx[2] <= ridx[1];
    if (mvm_start) starts <= starts + 1;
  end
  assign mvm_done = dpipe[1];
  always_comb begin
    v_valid     = rpipe[2];
    v_idx       = ridx[2];
    v_value     = 32'(int'(ridx[2]) * 10 + (starts - 1) * 1000);
    v_ok        = (starts == 1) ? !fail0[ridx[2]] : !fail1[ridx[2]];
    v_unanimous = !nonunan[ridx[2]];
  end

  // Counters of controller actions.
  int n_sw = 0, n_aw = 0, n_sin = 0, n_ax = 0, n_retry = 0, n_sb = 0;
  int sb_val [H];
  logic [1:0] sb_t [H];
  always @(posedge clk) if (rst_n) begin
    if (sw_we) n_sw <= n_sw + 1;
    if (sin_we) n_sin <= n_sin + 1;
    if (ax_we) n_ax <= n_ax + 1;
    if (retry) n_retry <= n_retry + 1;
    if (aw_we) begin
      n_aw <= n_aw + 1;
      if (aw_col != q_idx || aw_row != sw_idx) begin
        failures++;
        $display("FAIL weight address");
      end
    end
    if (sb_valid) begin
      if (int'(sb_idx) != n_sb % H) begin
        failures++;
        $display("FAIL output order");
      end
      n_sb <= n_sb + 1;
      sb_val[sb_idx] <= int'(sb_y);
      sb_t[sb_idx]   <= sb_tag;
    end
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic run_vector(input logic [H-1:0] f0, input logic [H-1:0] f1,
                            input logic [H-1:0] nu, input int exp_starts);
    int nsb0;
    fail0 = f0; fail1 = f1; nonunan = nu;
    starts = 0;
    nsb0 = n_sb;
    for (int i = 0; i < H; i++) begin
      x_valid = 1;
      x_data = 32'(i);
      @(negedge clk);
      while (!x_ready) @(negedge clk);
      @(posedge clk);
      #1;
    end
    @(negedge clk);
    x_valid = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    chk(starts == exp_starts, $sformatf("MVMs made: %0d expected %0d", starts, exp_starts));
    chk(n_sb - nsb0 == H, "H outputs");
    for (int k = 0; k < H; k++) begin
      int att;
      att = (f0[k]) ? 1 : 0;
      chk(sb_val[k] == k * 10 + att * 1000, $sformatf("elem %0d value %0d", k, sb_val[k]));
      chk(sb_t[k] == {f0[k] && f1[k] && exp_starts > 1 || (f0[k] && exp_starts == 1),
                      !nu[k] ? 1'b0 : !(f0[k] && (f1[k] || exp_starts == 1))},
          $sformatf("elem %0d tag %b", k, sb_t[k]));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Weight load: H rows of H elements.
    for (int i = 0; i < H * H; i++) begin
      w_valid = 1;
      w_data  = 32'(i);
      @(posedge clk);
      while (!w_ready) @(posedge clk);
      #1;
    end
    w_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    chk(n_sw == H, $sformatf("row scale writes %0d", n_sw));
    chk(n_aw == H * H, $sformatf("weight writes %0d", n_aw));
    // Clean vector, one element accepted only after correction.
    run_vector('0, '0, 8'b0000_0100, 1);
    chk(n_retry == 0, "no retry without detected errors");
    // Element 3 detected on the first attempt, clean on the second.
    run_vector(8'b0000_1000, '0, 8'b0000_1000, 2);
    chk(n_retry == 1, "one retry");
    // Element 5 fails on both attempts: flagged.
    run_vector(8'b0010_0000, 8'b0010_0000, 8'b0010_0000, 2);
    chk(n_retry == 2, "retry count");
    chk(n_sin == 3 && n_ax == 3 * H, "input scale and DAC writes");
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
