// Self-checking testbench of dppu at its full size (Dot_size 52, 32 x 32
// array, KMAX 4608, two protected bits).
// A random tile W (32 x K), X (K x 32) is streamed through the capture port,
// the same data are placed in the DRAM model (W row-major, X column-major),
// and jobs for random neuron positions are run from both sources. Each result
// is compared with the reference dot product. Checked besides: a reuse job
// waits for the stream to deliver its chunks, a job on captured data takes
// 2*ceil(K/52)+2 cycles from acceptance to result, a DRAM job issues ceil(K/52) requests, the result
// FIFO holds results while res_ready is low, and a flip in a protected
// multiplier column (window top) is masked while one in a low column is not.
module dppu_tb;
  import ft_pkg::*;
  localparam int R = 32, C = 32, DOT = 52, KMAX = 4608;
  localparam int KW = (KMAX + DOT - 1) / DOT, QW = $clog2(KW + 1), BW = $clog2(DOT);
  logic clk = 0, rst_n = 0;
  logic [4:0] tl = 5'd7;
  logic [12:0] k_len = 0;
  logic [31:0] wbase = 32'h0, xbase = 32'h40000;
  logic cap_en = 0;
  logic [QW-1:0] cap_word = 0;
  logic [BW-1:0] cap_byte = 0;
  logic [R*8-1:0] cap_w = 0;
  logic [C*8-1:0] cap_x = 0;
  logic [12:0] cap_level = 0;
  logic job_valid = 0, job_ready;
  pos_entry_t job_pos = '0, res_pos;
  dppu_src_e job_src = SRC_REUSE;
  logic dreq_v, dreq_r, drsp_v;
  logic [31:0] dwa, dxa;
  logic [DOT*8-1:0] drsp_w, drsp_x;
  logic res_valid, res_ready = 1, busy;
  logic [23:0] res_acc;
  logic fi_en = 0;
  logic [5:0] fi_lane = 0;
  logic [15:0] fi_mul = 0;
  logic [23:0] fi_acc = 0;
  int checks = 0, failures = 0;
  int cyc = 0;

  dppu dut (.clk, .rst_n, .trunc_lsb(tl), .k_len, .w_dram_base(wbase), .x_dram_base(xbase),
    .cap_en, .cap_word, .cap_byte, .cap_w, .cap_x, .cap_level,
    .job_valid, .job_ready, .job_pos, .job_src,
    .dram_req_valid(dreq_v), .dram_req_ready(dreq_r), .dram_req_waddr(dwa), .dram_req_xaddr(dxa),
    .dram_rsp_valid(drsp_v), .dram_rsp_w(drsp_w), .dram_rsp_x(drsp_x),
    .res_valid, .res_ready, .res_pos, .res_acc, .busy,
    .fi_en, .fi_lane, .fi_mul, .fi_acc);

  dram_model #(.DOT(DOT), .MEM_BYTES(1 << 19), .LAT(3)) u_dram (.clk, .rst_n,
    .req_valid(dreq_v), .req_ready(dreq_r), .req_waddr(dwa), .req_xaddr(dxa),
    .rsp_valid(drsp_v), .rsp_w(drsp_w), .rsp_x(drsp_x));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [7:0] W [R][KMAX];
  logic signed [7:0] X [KMAX][C];

  function automatic logic [23:0] ref_dot(int r, int c, int K);
    logic [23:0] s;
    s = '0;
    for (int k = 0; k < K; k++) s += 24'(int'(W[r][k]) * int'(X[k][c]));
    return s;
  endfunction

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 40) $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  // stream k = 0..K-1 into the capture port, one per cycle
  task automatic stream(int K);
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      cap_en = 1; cap_word = QW'(k / DOT); cap_byte = BW'(k % DOT);
      for (int r = 0; r < R; r++) cap_w[r*8 +: 8] = W[r][k];
      for (int c = 0; c < C; c++) cap_x[c*8 +: 8] = X[k][c];
      @(posedge clk);
      #1 cap_level = 13'(k + 1);
    end
    @(negedge clk) cap_en = 0;
  endtask

  // run one job, return its cycle count from acceptance to result
  task automatic run_job(int r, int c, dppu_src_e src, output int cycles, output logic [23:0] acc);
    int t0;
    @(negedge clk);
    job_valid = 1; job_pos.row = 5'(r); job_pos.col = 5'(c); job_src = src;
    while (!job_ready) @(negedge clk);
    @(posedge clk);
    t0 = cyc;
    #1 job_valid = 0;
    while (!res_valid) @(posedge clk);
    cycles = cyc - t0;
    acc = res_acc;
    @(negedge clk);
  endtask

  initial begin
    int K, cyc_n, nreq0;
    logic [23:0] got;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (K_list[t]) begin
      K = K_list[t];
      k_len = 13'(K);
      for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) W[r][k] = 8'($urandom);
      for (int k = 0; k < K; k++) for (int c = 0; c < C; c++) X[k][c] = 8'($urandom);
      for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) u_dram.mem[r * K + k] = W[r][k];
      for (int c = 0; c < C; c++) for (int k = 0; k < K; k++) u_dram.mem[32'h40000 + c * K + k] = X[k][c];
      cap_level = 0;
      // a reuse job issued before the stream must wait for it
      fork
        begin
          int r, c;
          r = $urandom % R; c = $urandom % C;
          run_job(r, c, SRC_REUSE, cyc_n, got);
          chk(32'(got), 32'(ref_dot(r, c, K)), "reuse job during stream");
          checks++;
          if (cyc_n < K) begin failures++; $display("FAIL reuse job finished before stream (%0d < %0d)", cyc_n, K); end
        end
        stream(K);
      join
      for (int n = 0; n < 6; n++) begin
        int r, c;
        r = $urandom % R; c = $urandom % C;
        run_job(r, c, SRC_REUSE, cyc_n, got);
        chk(32'(got), 32'(ref_dot(r, c, K)), "reuse job");
        chk(32'(cyc_n), 32'(2 * ((K + DOT - 1) / DOT) + 2), "reuse job cycles");
        nreq0 = u_dram.nreq;
        r = $urandom % R; c = $urandom % C;
        run_job(r, c, SRC_DRAM, cyc_n, got);
        chk(32'(got), 32'(ref_dot(r, c, K)), "dram job");
        chk(32'(u_dram.nreq - nreq0), 32'((K + DOT - 1) / DOT), "dram requests");
      end
    end
    // fault injection: K from the last tile; window LSB 7, protected columns 13,14
    fi_en = 1; fi_lane = 6'd0; fi_mul = 16'h4000;
    run_job(1, 1, SRC_REUSE, cyc_n, got);
    chk(32'(got), 32'(ref_dot(1, 1, K)), "protected column flip masked");
    fi_mul = 16'h0001;
    run_job(1, 1, SRC_REUSE, cyc_n, got);
    checks++;
    if (got == ref_dot(1, 1, K)) begin failures++; $display("FAIL unprotected flip not visible"); end
    fi_mul = 0; fi_acc = 24'h400000;
    run_job(1, 2, SRC_REUSE, cyc_n, got);
    chk(32'(got), 32'(ref_dot(1, 2, K)), "protected accumulator flip masked");
    fi_en = 0; fi_acc = 0;
    // FIFO: results wait while res_ready is low
    res_ready = 0;
    for (int n = 0; n < 3; n++) begin
      @(negedge clk);
      job_valid = 1; job_pos.row = 5'(n); job_pos.col = 5'(n + 1); job_src = SRC_REUSE;
      @(posedge clk);
      while (!job_ready) @(posedge clk);
      #1 job_valid = 0;
      while (busy && dut.st != 0) @(posedge clk);
    end
    repeat (20) @(negedge clk);
    chk(32'(busy), 32'd1, "busy while results wait");
    res_ready = 1;
    for (int n = 0; n < 3; n++) begin
      #1;
      chk(32'(res_valid), 32'd1, "fifo valid");
      chk(32'(res_pos.row), 32'(n), "fifo order");
      chk(32'(res_acc), 32'(ref_dot(n, n + 1, K)), "fifo value");
      @(posedge clk);
    end
    #1;
    chk(32'(res_valid), 32'd0, "fifo empty after drain");
    @(negedge clk);
    chk(32'(busy), 32'd0, "idle after drain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int K_list[3] = '{60, 52, 200};
endmodule
