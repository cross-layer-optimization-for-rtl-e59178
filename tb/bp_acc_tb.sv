// Self-checking testbench of bp_acc.
// Instance A: 16-bit addend, Q_SCALE 7, one protected bit (protects bits 14..23).
// Instance B: 24-bit addend, Q_SCALE 7, two protected bits (bits 13..23).
// Random sums are compared with a reference addition; a flipped primary bit
// must be masked inside the protected slice and visible below it.
module bp_acc_tb;
  logic [23:0] acc_in, fm, oa, ob;
  logic signed [15:0] add16;
  logic signed [23:0] add24;
  int checks = 0, failures = 0;

  bp_acc #(.Q_SCALE(7), .S(1), .IN_W(16)) u_a (.acc_in, .addend(add16), .fi_mask(fm), .acc_out(oa));
  bp_acc #(.Q_SCALE(7), .S(2), .IN_W(24)) u_b (.acc_in, .addend(add24), .fi_mask(fm), .acc_out(ob));

  task automatic chk(logic [23:0] got, logic [23:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h fm=%h", what, got, exp, fm);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [23:0] ea, eb;
      acc_in = 24'($urandom); add16 = 16'($urandom); add24 = 24'($urandom);
      if (n < 10) begin acc_in = 24'hFFFFFF; add16 = 16'sd1; add24 = 24'sd1; end
      fm = '0; #1;
      ea = acc_in + 24'(add16);
      eb = acc_in + 24'(add24);
      chk(oa, ea, "A nofault");
      chk(ob, eb, "B nofault");
      for (int bpos = 0; bpos < 24; bpos++) begin
        fm = 24'(1) << bpos; #1;
        chk(oa, (bpos >= 14) ? ea : (ea ^ fm), "A fault");
        chk(ob, (bpos >= 13) ? eb : (eb ^ fm), "B fault");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
