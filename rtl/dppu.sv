// Dot-product processing unit (DPPU) of FlexHyCA.
//
// Recomputes the important neurons of a tile with stronger bit protection
// than the 2D array gives them. DOT bit-protected multipliers (IB_TH
// protected high bits) feed an adder tree; one pass adds a chunk of DOT
// products of one neuron to a bit-protected 24-bit accumulator, and a neuron
// of reduction length K takes nch = ceil(K / DOT) passes.
//
// Operands come through the source muxes in front of the DPPU input and
// weight buffers, chosen per job:
//  * SRC_REUSE: the DPPU keeps a copy of the operands streamed into the 2D
//    array (capture port: every cycle byte k mod DOT of word k / DOT is
//    written for all rows of W and all columns of X). A chunk is read once
//    the stream has passed it (cap_level), so no extra DRAM traffic.
//  * SRC_DRAM: the DPPU requests the chunk from DRAM itself, W row-major at
//    w_dram_base + row*K + q*DOT and X column-major at x_dram_base +
//    col*K + q*DOT, and does not depend on the array's stream.
// Operand bytes at k >= K are masked to zero. A finished neuron goes into the
// DPPU buffer (a FIFO of RES_DEPTH results) and leaves on the res_* port.
//
// Timing: a chunk takes 2 cycles on reused data (buffer read, multiply-add)
// and 2 cycles plus the DRAM latency on the direct path; accepting the job and
// storing the result add one cycle each, so a neuron on reused data occupies
// the DPPU for 2*ceil(K/DOT)+2 cycles and its result is on res_* that many
// cycles after the job was accepted.
// Handshakes: job_*, dram_req_* and res_* are valid/ready; dram_rsp_* is a
// plain valid that answers the oldest request.
//
// Follows the paper: multipliers into an adder tree, the two data sources
// selected by mux, the DPPU buffer towards the output buffer, Dot_size = 52
// and IB_TH protected bits. Own choices: the tile copy used for reuse, the
// DRAM request format, one neuron at a time, and the buffer depths.
module dppu #(
  parameter int ROWS      = ft_pkg::ARRAY_ROWS,
  parameter int COLS      = ft_pkg::ARRAY_COLS,
  parameter int DOT       = ft_pkg::DEF_DOT_SIZE,
  parameter int KMAX      = 4608,
  parameter int Q_SCALE   = ft_pkg::DEF_Q_SCALE,
  parameter int S         = ft_pkg::DEF_IB_TH,
  parameter int RES_DEPTH = 16,
  localparam int KW  = (KMAX + DOT - 1) / DOT,
  localparam int QW  = $clog2(KW + 1),
  localparam int BW  = $clog2(DOT)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [4:0]         trunc_lsb,
  input  logic [12:0]        k_len,
  input  logic [31:0]        w_dram_base,
  input  logic [31:0]        x_dram_base,
  // copy of the array stream
  input  logic               cap_en,
  input  logic [QW-1:0]      cap_word,
  input  logic [BW-1:0]      cap_byte,
  input  logic [ROWS*8-1:0]  cap_w,
  input  logic [COLS*8-1:0]  cap_x,
  input  logic [12:0]        cap_level,   // k values captured so far
  // jobs from the data load controller
  input  logic               job_valid,
  output logic               job_ready,
  input  ft_pkg::pos_entry_t job_pos,
  input  ft_pkg::dppu_src_e  job_src,
  // direct DRAM path
  output logic               dram_req_valid,
  input  logic               dram_req_ready,
  output logic [31:0]        dram_req_waddr,
  output logic [31:0]        dram_req_xaddr,
  input  logic               dram_rsp_valid,
  input  logic [DOT*8-1:0]   dram_rsp_w,
  input  logic [DOT*8-1:0]   dram_rsp_x,
  // results towards the output buffer
  output logic               res_valid,
  input  logic               res_ready,
  output ft_pkg::pos_entry_t res_pos,
  output logic [23:0]        res_acc,
  output logic               busy,
  // soft-error injection into one multiplier lane and the accumulator
  input  logic               fi_en,
  input  logic [5:0]         fi_lane,
  input  logic [15:0]        fi_mul,
  input  logic [23:0]        fi_acc
);
  import ft_pkg::*;

  // DPPU input/weight buffers filled from the array stream. They are split
  // into DOT banks by k mod DOT; bank b holds, at word k / DOT, the whole
  // streamed weight column (all rows) and activation row (all columns) of
  // that k. One write per cycle goes to one bank; a chunk read fetches word q
  // from every bank at once, and the operand mux then picks byte row / col.
  logic [ROWS*8-1:0] wrd [DOT];
  logic [COLS*8-1:0] xrd [DOT];
  logic              cap_rd;
  logic [QW-1:0]     cap_rd_word;
  for (genvar b = 0; b < DOT; b++) begin : g_bank
    logic [ROWS*8-1:0] wbank [KW];
    logic [COLS*8-1:0] xbank [KW];
    always_ff @(posedge clk) begin
      if (cap_en && cap_byte == BW'(b)) begin
        wbank[cap_word] <= cap_w;
        xbank[cap_word] <= cap_x;
      end
      if (cap_rd) begin
        wrd[b] <= wbank[cap_rd_word];
        xrd[b] <= xbank[cap_rd_word];
      end
    end
  end

  typedef enum logic [2:0] {ST_IDLE, ST_FETCH, ST_WAIT, ST_MAC, ST_PUSH} st_e;
  st_e         st;
  pos_entry_t  cur_pos;
  dppu_src_e   cur_src;
  logic [12:0] kbase;        // first k of the current chunk
  logic [QW-1:0] q;          // current chunk
  logic [7:0]  opw [DOT];
  logic [7:0]  opx [DOT];
  logic [23:0] acc;

  // Source mux and multipliers with adder tree.
  logic [7:0]  mw [DOT];
  logic [7:0]  mx [DOT];
  always_comb
    for (int i = 0; i < DOT; i++) begin
      mw[i] = (cur_src == SRC_REUSE) ? wrd[i][cur_pos.row*8 +: 8] : opw[i];
      mx[i] = (cur_src == SRC_REUSE) ? xrd[i][cur_pos.col*8 +: 8] : opx[i];
    end
  logic [15:0] prod [DOT];
  logic signed [23:0] tree;
  for (genvar i = 0; i < DOT; i++) begin : g_lane
    logic inrange;
    assign inrange = (14'(kbase) + 14'(i)) < 14'(k_len);
    bp_mult #(.Q_SCALE(Q_SCALE), .S(S)) u_mul (
      .a(inrange ? mw[i] : 8'd0), .b(inrange ? mx[i] : 8'd0), .trunc_lsb,
      .fi_mask((fi_en && fi_lane == 6'(i)) ? fi_mul : 16'd0), .p(prod[i]));
  end
  always_comb begin
    tree = '0;
    for (int i = 0; i < DOT; i++) tree = tree + 24'(signed'(prod[i]));
  end

  logic [23:0] acc_next;
  bp_acc #(.Q_SCALE(Q_SCALE), .S(S), .IN_W(24)) u_acc (
    .acc_in(acc), .addend(tree), .fi_mask(fi_en ? fi_acc : 24'd0), .acc_out(acc_next));

  // DPPU buffer (result FIFO).
  localparam int FAW = $clog2(RES_DEPTH);
  pos_entry_t     f_pos [RES_DEPTH];
  logic [23:0]    f_acc [RES_DEPTH];
  logic [FAW-1:0] f_wp, f_rp;
  logic [FAW:0]   f_cnt;
  logic           f_push, f_pop;
  assign f_push    = (st == ST_PUSH) && (f_cnt != (FAW+1)'(RES_DEPTH));
  assign f_pop     = res_valid && res_ready;
  assign res_valid = (f_cnt != '0);
  assign res_pos   = f_pos[f_rp];
  assign res_acc   = f_acc[f_rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_wp <= '0; f_rp <= '0; f_cnt <= '0;
    end else begin
      if (f_push) begin
        f_pos[f_wp] <= cur_pos;
        f_acc[f_wp] <= acc;
        f_wp <= (f_wp == FAW'(RES_DEPTH-1)) ? '0 : f_wp + 1'b1;
      end
      if (f_pop) f_rp <= (f_rp == FAW'(RES_DEPTH-1)) ? '0 : f_rp + 1'b1;
      f_cnt <= f_cnt + (FAW+1)'(f_push) - (FAW+1)'(f_pop);
    end
  end

  // Chunk end for the reuse wait: the chunk is complete once the stream has
  // delivered min(kbase + DOT, K) values.
  logic [13:0] chunk_end;
  assign chunk_end = ((14'(kbase) + 14'(DOT)) < 14'(k_len)) ? 14'(kbase) + 14'(DOT) : 14'(k_len);

  assign job_ready      = (st == ST_IDLE);
  assign dram_req_valid = (st == ST_FETCH) && (cur_src == SRC_DRAM);
  assign dram_req_waddr = w_dram_base + 32'(cur_pos.row) * 32'(k_len) + 32'(kbase);
  assign dram_req_xaddr = x_dram_base + 32'(cur_pos.col) * 32'(k_len) + 32'(kbase);
  assign busy           = (st != ST_IDLE) || (f_cnt != '0);
  assign cap_rd         = (st == ST_FETCH) && (cur_src == SRC_REUSE) && (14'(cap_level) >= chunk_end);
  assign cap_rd_word    = q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= ST_IDLE; cur_pos <= '0; cur_src <= SRC_REUSE;
      kbase <= '0; q <= '0; acc <= '0;
      for (int i = 0; i < DOT; i++) begin opw[i] <= '0; opx[i] <= '0; end
    end else begin
      unique case (st)
        ST_IDLE: if (job_valid) begin
          cur_pos <= job_pos; cur_src <= job_src;
          kbase <= '0; q <= '0; acc <= '0;
          st <= ST_FETCH;
        end
        ST_FETCH: begin
          if (cur_src == SRC_REUSE) begin
            if (14'(cap_level) >= chunk_end) st <= ST_MAC;
          end else if (dram_req_ready) begin
            st <= ST_WAIT;
          end
        end
        ST_WAIT: if (dram_rsp_valid) begin
          for (int i = 0; i < DOT; i++) begin
            opw[i] <= dram_rsp_w[i*8 +: 8];
            opx[i] <= dram_rsp_x[i*8 +: 8];
          end
          st <= ST_MAC;
        end
        ST_MAC: begin
          acc   <= acc_next;
          kbase <= kbase + 13'(DOT);
          q     <= q + 1'b1;
          st    <= ((14'(kbase) + 14'(DOT)) >= 14'(k_len)) ? ST_PUSH : ST_FETCH;
        end
        ST_PUSH: if (f_push) st <= ST_IDLE;
        default: st <= ST_IDLE;
      endcase
    end
  end

  a_job_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dram_req_valid && !dram_req_ready |=> dram_req_valid && $stable(dram_req_waddr));
  a_k_range: assert property (@(posedge clk) disable iff (!rst_n)
    job_valid && job_ready |-> (k_len != 0 && int'(k_len) <= KMAX));
endmodule
