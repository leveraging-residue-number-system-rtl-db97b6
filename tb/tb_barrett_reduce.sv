// tb_barrett_reduce: checks Barrett reduction against the % operator for a
// small modulus over its whole input range and for a 24-bit CRT-sized
// modulus on random and boundary operands.
module tb_barrett_reduce;
  int checks = 0, failures = 0;

  logic [5:0]  xa;
  logic [5:0]  ra;
  logic [32:0] xb;
  logic [23:0] rb;
  logic [47:0] xc;
  logic [5:0]  rc;

  barrett_reduce #(.X_W(6),  .MODULUS(63))       u_a (.x(xa), .r(ra));
  barrett_reduce #(.X_W(33), .MODULUS(14057106)) u_b (.x(xb), .r(rb));
  barrett_reduce #(.X_W(48), .MODULUS(59))       u_c (.x(xc), .r(rc));

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 64; v++) begin
      xa = 6'(v);
      #1 chk(longint'(ra), longint'(v % 63), "m=63");
    end
    for (int t = 0; t < 3000; t++) begin
      longint unsigned vb, vc;
      vb = (t < 4) ? ((t == 0) ? 0 : (t == 1) ? 14057105 : (t == 2) ? 14057106 : 64'h1_FFFF_FFFF)
                   : {$urandom, $urandom} & 64'h1_FFFF_FFFF;
      vc = {$urandom, $urandom} & 64'hFFFF_FFFF_FFFF;
      if (t == 5) vc = 64'hFFFF_FFFF_FFFF;
      xb = 33'(vb);
      xc = 48'(vc);
      #1;
      chk(longint'(rb), longint'(vb % 14057106), "m=14057106");
      chk(longint'(rc), longint'(vc % 59), "m=59");
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
