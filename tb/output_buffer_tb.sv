// Self-checking testbench of output_buffer (full 32 x 32).
// Captures random accumulators at several window positions, overwrites some
// neurons as the DPPU would (also in the same cycle as a capture, where the
// override must win), and reads every neuron back, comparing with the
// reference window acc[lsb+7:lsb].
module output_buffer_tb;
  localparam int R = 32, C = 32;
  logic clk = 0, rst_n = 0;
  logic [4:0] tl = 7;
  logic cap_en = 0, ovr_en = 0;
  logic [23:0] cap_acc [R][C];
  logic [4:0] ovr_row = 0, ovr_col = 0, rd_row = 0, rd_col = 0;
  logic [23:0] ovr_acc = 0;
  logic [7:0] rd_data;
  logic [7:0] refm [R][C];
  int checks = 0, failures = 0;

  output_buffer dut (.clk, .rst_n, .trunc_lsb(tl), .cap_en, .cap_acc, .ovr_en, .ovr_row, .ovr_col,
    .ovr_acc, .rd_row, .rd_col, .rd_data);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] win(logic [23:0] v, int lsb);
    logic [23:0] s;
    s = v >> lsb;
    return s[7:0];
  endfunction

  initial begin
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) cap_acc[r][c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      @(negedge clk);
      tl = 5'(7 + 3 * t);
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        cap_acc[r][c] = 24'($urandom);
        refm[r][c] = win(cap_acc[r][c], int'(tl));
      end
      cap_en = 1;
      // same-cycle override: the DPPU value must win
      ovr_en = 1; ovr_row = 5'd3; ovr_col = 5'd4; ovr_acc = 24'($urandom);
      refm[3][4] = win(ovr_acc, int'(tl));
      @(negedge clk);
      cap_en = 0;
      for (int n = 0; n < 20; n++) begin
        ovr_row = 5'($urandom); ovr_col = 5'($urandom); ovr_acc = 24'($urandom);
        refm[ovr_row][ovr_col] = win(ovr_acc, int'(tl));
        @(negedge clk);
      end
      ovr_en = 0;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        rd_row = 5'(r); rd_col = 5'(c);
        @(negedge clk);
        checks++;
        if (rd_data !== refm[r][c]) begin
          failures++;
          if (failures < 5) $display("FAIL (%0d,%0d) got %h exp %h", r, c, rd_data, refm[r][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
