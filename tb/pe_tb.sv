// Self-checking testbench of pe.
// Streams tiles of random operands (first flag on the first element), checks
// the accumulator one cycle after each valid element against a running
// reference, checks the one-cycle pass-through of weight, activation and
// flags, holds the accumulator on invalid cycles, and checks that a flipped
// multiplier column inside the protected window top is masked while one below
// it shows up in the accumulator.
module pe_tb;
  logic clk = 0, rst_n = 0;
  logic [4:0] tl = 5'd8;
  logic signed [7:0] w_in = 0, x_in = 0;
  logic vld_in = 0, first_in = 0;
  logic [15:0] fi_mul = 0;
  logic [23:0] fi_acc = 0;
  logic signed [7:0] w_out, x_out;
  logic vld_out, first_out;
  logic [23:0] acc;
  int checks = 0, failures = 0;
  int cyc = 0;

  pe #(.Q_SCALE(7), .S(1)) dut (.clk, .rst_n, .trunc_lsb(tl), .w_in, .vld_in, .first_in, .x_in,
    .fi_mul, .fi_acc, .w_out, .vld_out, .first_out, .x_out, .acc);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h at %0d", what, got, exp, cyc);
    end
  endtask

  logic [23:0] ref_acc;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 20; tile++) begin
      int k;
      k = 1 + ($urandom % 30);
      for (int i = 0; i < k; i++) begin
        logic signed [7:0] wv, xv;
        logic v;
        wv = 8'($urandom); xv = 8'($urandom);
        v = (i == 0) || ($urandom % 4 != 0);
        @(negedge clk);
        w_in = wv; x_in = xv; vld_in = v; first_in = (i == 0);
        // a flip in protected column trunc_lsb+7 = 15 must vanish
        fi_mul = (tile % 3 == 1) ? 16'h8000 : 16'h0;
        if (v) ref_acc = ((i == 0) ? 24'd0 : ref_acc) + 24'(int'(wv) * int'(xv));
        @(negedge clk);
        chk(32'(acc), 32'(ref_acc), "acc");
        chk(32'(w_out), 32'(wv), "w pass");
        chk(32'(x_out), 32'(xv), "x pass");
        chk(32'(vld_out), 32'(v), "vld pass");
        chk(32'(first_out), 32'(i == 0), "first pass");
        vld_in = 0; fi_mul = 0;
        if ($urandom % 2 == 0) begin
          @(negedge clk);
          chk(32'(acc), 32'(ref_acc), "acc hold");
        end
      end
    end
    // unprotected column 3: the error appears in the accumulator
    @(negedge clk);
    w_in = 8'sd5; x_in = 8'sd3; vld_in = 1; first_in = 1; fi_mul = 16'h0008;
    @(negedge clk);
    vld_in = 0; fi_mul = 0;
    chk(32'(acc), 32'(24'd15 ^ 24'h8), "unprotected flip visible");
    // accumulator bit 20 lies in the protected slice (>= 14): masked
    @(negedge clk);
    w_in = 8'sd5; x_in = 8'sd3; vld_in = 1; first_in = 1; fi_acc = 24'h100000;
    @(negedge clk);
    vld_in = 0; fi_acc = 0;
    chk(32'(acc), 32'd15, "protected acc flip masked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
