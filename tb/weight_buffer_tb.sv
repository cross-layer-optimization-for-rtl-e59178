// Self-checking testbench of weight_buffer at its full 512 KB size.
// Writes random words to random addresses (and the first and last word),
// keeps a reference copy, and reads them back, checking the one-cycle read
// latency and that rd_data holds while rd_en is low.
module weight_buffer_tb;
  localparam int ROWS = 32, DEPTH = 512 * 1024 / ROWS, AW = $clog2(DEPTH);
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [ROWS*8-1:0] wr_data = 0, rd_data;
  int checks = 0, failures = 0;
  logic [ROWS*8-1:0] refm [int];
  logic [AW-1:0] addrs [$];

  weight_buffer dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ROWS*8-1:0] rnd();
    logic [ROWS*8-1:0] v;
    for (int i = 0; i < ROWS / 4; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    addrs.push_back('0);
    addrs.push_back(AW'(DEPTH - 1));
    for (int i = 0; i < 300; i++) addrs.push_back(AW'($urandom % DEPTH));
    foreach (addrs[i]) begin
      @(negedge clk);
      wr_en = 1; wr_addr = addrs[i]; wr_data = rnd();
      refm[int'(addrs[i])] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    foreach (addrs[i]) begin
      @(negedge clk);
      rd_en = 1; rd_addr = addrs[i];
      @(negedge clk);
      rd_en = 0; rd_addr = ~addrs[i];
      checks++;
      if (rd_data !== refm[int'(addrs[i])]) begin
        failures++;
        if (failures < 5) $display("FAIL addr %0d", addrs[i]);
      end
      @(negedge clk);
      checks++;
      if (rd_data !== refm[int'(addrs[i])]) begin
        failures++; $display("FAIL hold addr %0d", addrs[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
