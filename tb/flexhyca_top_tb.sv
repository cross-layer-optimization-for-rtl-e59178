// End-to-end testbench of flexhyca_top at its default (full) size:
// 32 x 32 array, Dot_size 52, 512 KB / 256 KB buffers, Q_scale 7,
// NB_TH 1, IB_TH 2.
//
// Each tile gets random weights W (32 x K) and activations X (K x 32),
// written into the weight and input buffers through the fill ports and into
// the DRAM model (W row-major, X column-major) for the DPPU's direct path,
// plus a list of distinct important-neuron positions in the position table.
// After done, all 1024 outputs are read back and compared with a reference
// computed here: the window acc[lsb+7:lsb] of the exact dot product, or of
// the faulty one where an injected fault must stay visible.
//
// Mechanisms that must each happen at least once (counted, failure if not):
//   reuse      tile whose DPPU jobs reuse the array's stream
//   dram       tile whose DPPU jobs load operands from DRAM (too many
//              important neurons, and reuse disabled)
//   override   a fault in an important neuron's PE (unprotected bit) that
//              the DPPU's recomputed value removes from the output
//   arr_mask   a fault in a protected multiplier column of an ordinary PE,
//              masked by the PE's TMR
//   visible    a fault in an unprotected column of an ordinary PE, which
//              must show in that neuron's output
//   dppu_mask  a fault in a protected column of a DPPU multiplier lane
// Tiles that reuse the stream must finish within K + 64 + 2*ceil(K/52) + 12
// cycles, i.e. the DPPU must not stretch the tile noticeably.
module flexhyca_top_tb;
  import ft_pkg::*;
  localparam int R = 32, C = 32, DOT = 52;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, mode_dram;
  logic [12:0] k_len = 0;
  logic [4:0] tl = 7;
  logic [13:0] wbase = 0;
  logic [12:0] ibase = 0;
  logic [9:0] pbase = 0;
  logic [10:0] pcount = 0;
  logic reuse = 1;
  logic [31:0] wdb = 32'h0, xdb = 32'h10000;
  logic wb_wr_en = 0, ib_wr_en = 0, pos_wr_en = 0;
  logic [13:0] wb_wr_addr = 0;
  logic [12:0] ib_wr_addr = 0;
  logic [9:0] pos_wr_addr = 0;
  logic [R*8-1:0] wb_wr_data = 0;
  logic [C*8-1:0] ib_wr_data = 0;
  pos_entry_t pos_wr_data = '0;
  logic dreq_v, dreq_r, drsp_v;
  logic [31:0] dwa, dxa;
  logic [DOT*8-1:0] drsp_w, drsp_x;
  logic [4:0] ob_row = 0, ob_col = 0;
  logic [7:0] ob_data;
  logic fi_arr_en = 0, fi_dppu_en = 0;
  logic [4:0] fi_row = 0, fi_col = 0;
  logic [15:0] fi_arr_mul = 0, fi_dppu_mul = 0;
  logic [23:0] fi_arr_acc = 0, fi_dppu_acc = 0;
  logic [5:0] fi_lane = 0;
  int checks = 0, failures = 0, cyc = 0;

  flexhyca_top dut (
    .clk, .rst_n, .start, .busy, .done, .mode_dram,
    .cfg_k_len(k_len), .cfg_trunc_lsb(tl), .cfg_wbuf_base(wbase), .cfg_ibuf_base(ibase),
    .cfg_pos_base(pbase), .cfg_pos_count(pcount), .cfg_data_reuse(reuse),
    .cfg_w_dram_base(wdb), .cfg_x_dram_base(xdb),
    .wb_wr_en, .wb_wr_addr, .wb_wr_data, .ib_wr_en, .ib_wr_addr, .ib_wr_data,
    .pos_wr_en, .pos_wr_addr, .pos_wr_data,
    .dram_req_valid(dreq_v), .dram_req_ready(dreq_r), .dram_req_waddr(dwa), .dram_req_xaddr(dxa),
    .dram_rsp_valid(drsp_v), .dram_rsp_w(drsp_w), .dram_rsp_x(drsp_x),
    .ob_rd_row(ob_row), .ob_rd_col(ob_col), .ob_rd_data(ob_data),
    .fi_arr_en, .fi_row, .fi_col, .fi_arr_mul, .fi_arr_acc,
    .fi_dppu_en, .fi_lane, .fi_dppu_mul, .fi_dppu_acc);

  dram_model #(.DOT(DOT), .MEM_BYTES(1 << 17), .LAT(4)) u_dram (.clk, .rst_n,
    .req_valid(dreq_v), .req_ready(dreq_r), .req_waddr(dwa), .req_xaddr(dxa),
    .rsp_valid(drsp_v), .rsp_w(drsp_w), .rsp_x(drsp_x));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [7:0] W [R][512];
  logic signed [7:0] X [512][C];
  logic [7:0] expo [R][C];
  logic       imp [R][C];
  int n_reuse = 0, n_dram = 0, n_override = 0, n_arr_mask = 0, n_visible = 0, n_dppu_mask = 0;

  function automatic logic [7:0] window(logic [23:0] v, int lsb);
    logic [23:0] s;
    s = v >> lsb;
    return s[7:0];
  endfunction

  // dot product of neuron (r,c); flip_col >= 0 flips that product bit of
  // every element, as a stuck soft error on one multiplier column would
  function automatic logic [23:0] dotp(int r, int c, int K, int flip_col);
    logic [23:0] s;
    logic [15:0] p;
    s = '0;
    for (int k = 0; k < K; k++) begin
      p = 16'(int'(W[r][k]) * int'(X[k][c]));
      if (flip_col >= 0) p = p ^ (16'(1) << flip_col);
      s += 24'(signed'(p));
    end
    return s;
  endfunction

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  // fault kinds: 0 none, 1 important PE unprotected bit, 2 ordinary PE
  // protected column, 3 ordinary PE unprotected column, 4 DPPU lane protected
  task automatic run_tile(int K, int N, int lsb, bit use_reuse, int fault);
    int nch, t0, t1, fr, fc;
    bit exp_dram;
    nch = (K + DOT - 1) / DOT;
    exp_dram = !use_reuse || (N * (2 * nch + 2) > K + R + C);
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) W[r][k] = 8'($urandom);
    for (int k = 0; k < K; k++) for (int c = 0; c < C; c++) X[k][c] = 8'($urandom);
    wbase = 14'($urandom % 8000); ibase = 13'($urandom % 4000); pbase = 10'($urandom % 512);
    // fill buffers and DRAM
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      wb_wr_en = 1; wb_wr_addr = wbase + 14'(k);
      ib_wr_en = 1; ib_wr_addr = ibase + 13'(k);
      for (int r = 0; r < R; r++) wb_wr_data[r*8 +: 8] = W[r][k];
      for (int c = 0; c < C; c++) ib_wr_data[c*8 +: 8] = X[k][c];
    end
    @(negedge clk) begin wb_wr_en = 0; ib_wr_en = 0; end
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) u_dram.mem[int'(wdb) + r * K + k] = W[r][k];
    for (int c = 0; c < C; c++) for (int k = 0; k < K; k++) u_dram.mem[int'(xdb) + c * K + k] = X[k][c];
    // important neurons: N distinct positions
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) imp[r][c] = 0;
    for (int i = 0; i < N; i++) begin
      int r, c;
      do begin r = $urandom % R; c = $urandom % C; end while (imp[r][c]);
      imp[r][c] = 1;
      @(negedge clk);
      pos_wr_en = 1; pos_wr_addr = pbase + 10'(i); pos_wr_data.row = 5'(r); pos_wr_data.col = 5'(c);
      if (i == 0) begin fr = r; fc = c; end
    end
    @(negedge clk) pos_wr_en = 0;
    // reference outputs
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) expo[r][c] = window(dotp(r, c, K, -1), lsb);
    fi_arr_en = 0; fi_dppu_en = 0; fi_arr_mul = 0; fi_dppu_mul = 0; fi_arr_acc = 0; fi_dppu_acc = 0;
    case (fault)
      1: begin fi_arr_en = 1; fi_row = 5'(fr); fi_col = 5'(fc); fi_arr_mul = 16'(1) << lsb; end
      2, 3: begin
        int r, c;
        do begin r = $urandom % R; c = $urandom % C; end while (imp[r][c]);
        fi_arr_en = 1; fi_row = 5'(r); fi_col = 5'(c);
        fi_arr_mul = 16'(1) << ((fault == 2) ? lsb + 7 : lsb + 1);
        if (fault == 3) expo[r][c] = window(dotp(r, c, K, lsb + 1), lsb);
      end
      4: begin fi_dppu_en = 1; fi_lane = 6'($urandom % DOT); fi_dppu_mul = 16'(1) << (lsb + 6); end
      default: ;
    endcase
    @(negedge clk);
    k_len = 13'(K); tl = 5'(lsb); pcount = 11'(N); reuse = use_reuse;
    start = 1;
    t0 = cyc;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    t1 = cyc;
    fi_arr_en = 0; fi_dppu_en = 0;
    chk(32'(mode_dram), 32'(exp_dram), "source choice");
    if (!exp_dram && N > 0) begin
      n_reuse++;
      checks++;
      if (t1 - t0 > K + R + C + 2 * nch + 12) begin
        failures++; $display("FAIL reuse tile took %0d cycles (K=%0d N=%0d)", t1 - t0, K, N);
      end
    end
    if (exp_dram && N > 0) n_dram++;
    // read back
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      ob_row = 5'(r); ob_col = 5'(c);
      @(negedge clk);
      chk(32'(ob_data), 32'(expo[r][c]), $sformatf("out(%0d,%0d) K=%0d N=%0d f=%0d", r, c, K, N, fault));
    end
    case (fault)
      1: n_override++;
      2: n_arr_mask++;
      3: n_visible++;
      4: if (N > 0) n_dppu_mask++;
      default: ;
    endcase
    $display("tile K=%0d N=%0d lsb=%0d reuse=%0d fault=%0d: %0d cycles, %s", K, N, lsb, use_reuse,
             fault, t1 - t0, exp_dram ? "DRAM" : "reuse");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tile(60, 2, 7, 1, 0);     // reuse, two chunks per neuron
    run_tile(130, 3, 8, 1, 1);    // reuse, fault on an important PE
    run_tile(40, 30, 7, 1, 2);    // too many important neurons: DRAM; TMR-masked fault
    run_tile(100, 4, 8, 0, 3);    // reuse disabled: DRAM; visible fault
    run_tile(200, 5, 7, 1, 4);    // reuse; fault in a DPPU lane
    run_tile(52, 0, 9, 1, 0);     // no important neurons, window at bit 9
    chk(32'(n_reuse > 0), 1, "reuse happened");
    chk(32'(n_dram > 0), 1, "dram happened");
    chk(32'(n_override > 0), 1, "override happened");
    chk(32'(n_arr_mask > 0), 1, "array mask happened");
    chk(32'(n_visible > 0), 1, "visible fault happened");
    chk(32'(n_dppu_mask > 0), 1, "dppu mask happened");
    $display("mechanisms: reuse=%0d dram=%0d override=%0d arr_mask=%0d visible=%0d dppu_mask=%0d",
             n_reuse, n_dram, n_override, n_arr_mask, n_visible, n_dppu_mask);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
