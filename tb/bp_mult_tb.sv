// Self-checking testbench of bp_mult.
// Instance A: Q_SCALE 7, one protected bit (2D-array PE setting).
// Instance B: Q_SCALE 7, two protected bits (DPPU setting).
// 1. Without faults, every product of all 65536 signed operand pairs equals a*b
//    for a few truncation positions.
// 2. With one primary column flipped, the product must be exact when that
//    column is one of the window's protected top columns, and must differ from
//    a*b in exactly that bit otherwise.
module bp_mult_tb;
  logic signed [7:0] a, b;
  logic [4:0]  tl;
  logic [15:0] fm;
  logic [15:0] pa, pb;
  int checks = 0, failures = 0;

  bp_mult #(.Q_SCALE(7), .S(1)) u_a (.a, .b, .trunc_lsb(tl), .fi_mask(fm), .p(pa));
  bp_mult #(.Q_SCALE(7), .S(2)) u_b (.a, .b, .trunc_lsb(tl), .fi_mask(fm), .p(pb));

  function automatic logic [15:0] ref_p(logic signed [7:0] x, logic signed [7:0] y);
    int v;
    v = int'(x) * int'(y);
    return v[15:0];
  endfunction

  task automatic chk(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s a=%0d b=%0d tl=%0d fm=%h got=%h exp=%h", what, a, b, tl, fm, got, exp);
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
    fm = '0;
    for (int t = 7; t <= 16; t += 3) begin
      tl = 5'(t);
      for (int i = -128; i < 128; i++)
        for (int j = -128; j < 128; j++) begin
          a = 8'(i); b = 8'(j); #1;
          chk(pa, ref_p(a, b), "A nofault");
          chk(pb, ref_p(a, b), "B nofault");
        end
    end
    for (int t = 7; t <= 16; t++) begin
      tl = 5'(t);
      for (int c = 0; c < 16; c++) begin
        for (int n = 0; n < 40; n++) begin
          logic [15:0] e;
          a = 8'($urandom); b = 8'($urandom); fm = 16'(1) << c; #1;
          e = ref_p(a, b);
          chk(pa, (c == t + 7) ? e : (e ^ fm), "A fault");
          chk(pb, (c == t + 7 || c == t + 6) ? e : (e ^ fm), "B fault");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
