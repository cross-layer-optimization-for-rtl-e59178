// Self-checking testbench of pe_array (8 x 8 to keep the run short).
// Streams W (8 x K) and X (K x 8) for several tiles and checks every
// accumulator against a reference matrix product exactly at cycle
// t0+K+ROWS+COLS-1 (t0 = cycle of the first element), and that the
// bottom-right PE is not yet final one cycle earlier. A flip in an unprotected
// multiplier column of one PE must change only that PE's result.
module pe_array_tb;
  localparam int R = 8, C = 8;
  logic clk = 0, rst_n = 0;
  logic [4:0] tl = 5'd7;
  logic [R*8-1:0] w_vec = '0;
  logic [C*8-1:0] x_vec = '0;
  logic in_vld = 0, in_first = 0;
  logic fi_en = 0;
  logic [4:0] fi_row = 0, fi_col = 0;
  logic [15:0] fi_mul = 0;
  logic [23:0] fi_acc = 0;
  logic [23:0] acc [R][C];
  int checks = 0, failures = 0;

  pe_array #(.ROWS(R), .COLS(C), .Q_SCALE(7), .S(1)) dut (.clk, .rst_n, .trunc_lsb(tl), .w_vec, .x_vec,
    .in_vld, .in_first, .fi_en, .fi_row, .fi_col, .fi_mul, .fi_acc, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [7:0] W [R][64];
  logic signed [7:0] X [64][C];
  logic [23:0] ref_c [R][C];
  logic [23:0] ref_f;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 6; tile++) begin
      int K;
      K = 1 + ($urandom % 40);
      for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) W[r][k] = 8'($urandom);
      for (int k = 0; k < K; k++) for (int c = 0; c < C; c++) X[k][c] = 8'($urandom);
      W[R-1][K-1] = 8'sd7; X[K-1][C-1] = -8'sd3;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        ref_c[r][c] = '0;
        for (int k = 0; k < K; k++) ref_c[r][c] += 24'(int'(W[r][k]) * int'(X[k][c]));
      end
      fi_en = (tile == 5); fi_row = 5'd2; fi_col = 5'd5; fi_mul = 16'h0010;
      if (tile == 5) begin
        // flipping product bit 4 of PE(2,5) on every element: exact expectation
        ref_f = '0;
        for (int k = 0; k < K; k++)
          ref_f += 24'(signed'(16'(int'(W[2][k]) * int'(X[k][5])) ^ 16'h0010));
      end
      for (int k = 0; k < K + R + C; k++) begin
        @(negedge clk);
        in_vld = (k < K); in_first = (k == 0);
        for (int r = 0; r < R; r++) w_vec[r*8 +: 8] = (k < K) ? W[r][k] : 8'h0;
        for (int c = 0; c < C; c++) x_vec[c*8 +: 8] = (k < K) ? X[k][c] : 8'h0;
        // k is the current cycle index relative to t0
        if (k == K + R + C - 2) begin
          checks++;
          if (acc[R-1][C-1] === ref_c[R-1][C-1]) begin
            failures++; $display("FAIL bottom-right final too early, K=%0d", K);
          end
        end
        if (k == K + R + C - 1) begin
          for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
            checks++;
            if (acc[r][c] !== ((tile == 5 && r == 2 && c == 5) ? ref_f : ref_c[r][c])) begin
              failures++;
              if (failures < 10) $display("FAIL tile %0d acc[%0d][%0d]=%h exp %h", tile, r, c, acc[r][c], ref_c[r][c]);
            end
          end
        end
      end
      if (tile == 5) begin
        // a flip of product bit 4 (unprotected) on every valid element
        // adds or removes 16 per element; only that PE differs from the
        // fault-free product
        checks++;
        if (acc[2][5] == ref_c[2][5]) begin
          failures++; $display("FAIL injected fault not visible");
        end
      end
      @(negedge clk);
      in_vld = 0;
      fi_en = 0;
      repeat (R + C) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
