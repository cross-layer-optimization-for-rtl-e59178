// Self-checking testbench of pos_table: fills all 1024 entries with random
// (col, row) pairs, reads them back in random order, checks the one-cycle
// latency and the hold of rd_data while rd_en is low.
module pos_table_tb;
  import ft_pkg::*;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [9:0] wr_addr = 0, rd_addr = 0;
  pos_entry_t wr_data = '0, rd_data;
  pos_entry_t refm [1024];
  int checks = 0, failures = 0;

  pos_table dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 10'(i);
      wr_data.col = 5'($urandom); wr_data.row = 5'($urandom);
      refm[i] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      int a;
      a = $urandom % 1024;
      @(negedge clk);
      rd_en = 1; rd_addr = 10'(a);
      @(negedge clk);
      rd_en = 0; rd_addr = 10'(a + 1);
      checks++;
      if (rd_data !== refm[a]) begin failures++; if (failures < 5) $display("FAIL read %0d", a); end
      @(negedge clk);
      checks++;
      if (rd_data !== refm[a]) begin failures++; if (failures < 5) $display("FAIL hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
