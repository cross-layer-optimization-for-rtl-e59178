// Self-checking testbench of data_load_ctrl (32 x 32 array, Dot_size 52).
// A small model stands in for the buffers (read data = address), the
// position table (entry i holds col = i mod 32, row = (3i) mod 32) and the
// DPPU (accepts a job after a random delay, stays busy a few cycles). For
// several tiles it checks: exactly K valid array cycles with first only on
// k = 0 and buffer addresses base+k issued one cycle before; the capture word
// and byte of each k and the captured count; the capture pulse exactly
// ROWS+COLS cycles after the last valid element; the jobs, in table order,
// with the source the capacity rule predicts (reuse, DRAM, and DRAM when
// reuse is disabled); res_ready only after the capture; done once at the end.
module data_load_ctrl_tb;
  import ft_pkg::*;
  localparam int R = 32, C = 32, DOT = 52, KMAX = 4608;
  localparam int KW = (KMAX + DOT - 1) / DOT, QW = $clog2(KW + 1), BW = $clog2(DOT);
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [12:0] k_len = 0;
  logic [13:0] wbase = 0;
  logic [12:0] ibase = 0;
  logic [9:0] pbase = 0;
  logic [10:0] pcount = 0;
  logic reuse = 1;
  logic wb_rd_en, ib_rd_en, arr_vld, arr_first, cap_en, arr_capture, pos_rd_en;
  logic [13:0] wb_rd_addr;
  logic [12:0] ib_rd_addr;
  logic [QW-1:0] cap_word;
  logic [BW-1:0] cap_byte;
  logic [12:0] cap_level;
  logic [9:0] pos_rd_addr;
  pos_entry_t pos_rd_data, job_pos;
  logic job_valid, job_ready = 0, dppu_busy, res_ready, mode_dram;
  dppu_src_e job_src;
  int checks = 0, failures = 0, cyc = 0;

  data_load_ctrl dut (.clk, .rst_n, .start, .busy, .done, .k_len, .wbuf_base(wbase), .ibuf_base(ibase),
    .pos_base(pbase), .pos_count(pcount), .data_reuse(reuse),
    .wb_rd_en, .wb_rd_addr, .ib_rd_en, .ib_rd_addr, .arr_vld, .arr_first, .cap_en, .cap_word,
    .cap_byte, .cap_level, .arr_capture, .pos_rd_en, .pos_rd_addr, .pos_rd_data,
    .job_valid, .job_ready, .job_pos, .job_src, .dppu_busy, .res_ready, .mode_dram);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d at %0d", what, got, exp, cyc);
    end
  endtask

  // position table model: one cycle read latency
  always_ff @(posedge clk)
    if (pos_rd_en) begin
      pos_rd_data.col <= 5'(pos_rd_addr);
      pos_rd_data.row <= 5'(3 * pos_rd_addr);
    end

  // DPPU model
  int busy_cnt = 0;
  always @(posedge clk) begin
    if (job_valid && job_ready) busy_cnt <= 3;
    else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
  end
  assign dppu_busy = (busy_cnt > 0);
  always @(negedge clk) job_ready = ($urandom % 3 == 0) && (busy_cnt == 0);

  // monitors
  int nvld, njobs, last_vld_cyc, cap_cyc, ndone, res_ready_early;
  int exp_src;
  logic [13:0] prev_waddr;
  logic prev_rd;
  always @(posedge clk) if (rst_n) begin
    if (arr_vld) begin
      chk(32'(arr_first), 32'(nvld == 0), "first flag");
      chk(32'(prev_rd), 32'd1, "read issued a cycle before");
      chk(32'(prev_waddr), 32'(wbase + 14'(nvld)), "weight address");
      chk(32'(cap_en), 32'd1, "capture with array");
      chk(32'(cap_word), 32'(nvld / DOT), "capture word");
      chk(32'(cap_byte), 32'(nvld % DOT), "capture byte");
      chk(32'(cap_level), 32'(nvld), "captured count");
      nvld++;
      last_vld_cyc = cyc;
    end
    prev_rd = wb_rd_en && ib_rd_en && (ib_rd_addr == ibase + 13'(wb_rd_addr - wbase));
    prev_waddr = wb_rd_addr;
    if (arr_capture) cap_cyc = cyc;
    if (res_ready && busy && cap_cyc < 0) res_ready_early++;
    if (job_valid && job_ready) begin
      chk(32'(job_pos.col), 32'(5'(pbase + 10'(njobs))), "job order col");
      chk(32'(job_pos.row), 32'(5'(3 * (pbase + 10'(njobs)))), "job order row");
      chk(32'(job_src), 32'(exp_src), "job source");
      njobs++;
    end
    if (done) ndone++;
  end

  int n_reuse = 0, n_dram = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      int K, N, nch;
      K = (t == 7) ? 60 : 1 + ($urandom % 300);
      N = (t % 3 == 0) ? 1 + $urandom % 3 : ((t % 3 == 1) ? 40 + $urandom % 40 : 0);
      reuse = (t != 4);
      nch = (K + DOT - 1) / DOT;
      exp_src = (!reuse || N * (2 * nch + 2) > K + R + C) ? 1 : 0;
      if (exp_src == 1) n_dram++; else if (N > 0) n_reuse++;
      @(negedge clk);
      k_len = 13'(K); wbase = 14'($urandom); ibase = 13'($urandom); pbase = 10'($urandom % 900);
      pcount = 11'(N);
      nvld = 0; njobs = 0; cap_cyc = -1; ndone = 0; res_ready_early = 0;
      start = 1;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      chk(32'(nvld), 32'(K), "valid count");
      chk(32'(cap_cyc - last_vld_cyc), 32'(R + C), "capture timing");
      chk(32'(njobs), 32'(N), "job count");
      chk(32'(ndone), 32'd1, "done once");
      chk(32'(res_ready_early), 32'd0, "no result before capture");
      chk(32'(mode_dram), 32'(exp_src), "mode");
      chk(32'(busy), 32'd0, "idle");
    end
    checks++;
    if (n_reuse == 0 || n_dram == 0) begin failures++; $display("FAIL both modes not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
