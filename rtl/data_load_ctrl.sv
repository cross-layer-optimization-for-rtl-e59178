// Data load controller of FlexHyCA: sequences one tile.
//
// On start it
//  1. streams the tile into the 2D array: it reads weight-buffer word
//     wbuf_base+k and input-buffer word ibuf_base+k for k = 0..K-1, one per
//     cycle, and one cycle later marks the data valid for the array (first on
//     k = 0) and for the DPPU's copy of the stream (word k / DOT, byte
//     k mod DOT, and the count of values copied so far);
//  2. waits until the last PE has finished (ROWS+COLS cycles after the last
//     element) and has the output buffer capture every accumulator;
//  3. reads the tile's entries of the important-neuron position table
//     (pos_base .. pos_base+pos_count-1) and hands each to the DPPU as a job;
//  4. lets DPPU results overwrite the output buffer only after step 2, so a
//     recomputed neuron always replaces the array's value;
//  5. raises done (one cycle) when the stream, the capture, all jobs and the
//     DPPU are finished.
//
// Source choice (the FlexHyCA mechanism): with data_reuse set, the DPPU
// reuses the array's streamed data if it can recompute the tile's important
// neurons within the array's own tile time,
//     pos_count * (2 * ceil(K / DOT) + 2) <= K + ROWS + COLS,
// and otherwise every job of the tile loads its operands directly from DRAM,
// so a tile with many important neurons does not hold the DPPU to the stream.
// With data_reuse clear, DRAM is always used. mode_dram shows the choice.
//
// Follows the paper: the controller reads the position table and drives the
// input/weight data control and the DPPU's reuse-or-DRAM choice by the share
// of important neurons. Own choices: the exact capacity rule above, one tile
// at a time, and the ordering of steps 2 and 4.
module data_load_ctrl #(
  parameter int ROWS      = ft_pkg::ARRAY_ROWS,
  parameter int COLS      = ft_pkg::ARRAY_COLS,
  parameter int DOT       = ft_pkg::DEF_DOT_SIZE,
  parameter int KMAX      = 4608,
  parameter int WAW       = 14,     // weight buffer address width
  parameter int IAW       = 13,     // input buffer address width
  parameter int PAW       = 10,     // position table address width
  localparam int KW  = (KMAX + DOT - 1) / DOT,
  localparam int QW  = $clog2(KW + 1),
  localparam int BW  = $clog2(DOT)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  input  logic [12:0]        k_len,
  input  logic [WAW-1:0]     wbuf_base,
  input  logic [IAW-1:0]     ibuf_base,
  input  logic [PAW-1:0]     pos_base,
  input  logic [PAW:0]       pos_count,
  input  logic               data_reuse,
  // buffer read control (weight / input data control)
  output logic               wb_rd_en,
  output logic [WAW-1:0]     wb_rd_addr,
  output logic               ib_rd_en,
  output logic [IAW-1:0]     ib_rd_addr,
  // array and DPPU stream control
  output logic               arr_vld,
  output logic               arr_first,
  output logic               cap_en,
  output logic [QW-1:0]      cap_word,
  output logic [BW-1:0]      cap_byte,
  output logic [12:0]        cap_level,
  output logic               arr_capture,
  // position table
  output logic               pos_rd_en,
  output logic [PAW-1:0]     pos_rd_addr,
  input  ft_pkg::pos_entry_t pos_rd_data,
  // DPPU jobs and results
  output logic               job_valid,
  input  logic               job_ready,
  output ft_pkg::pos_entry_t job_pos,
  output ft_pkg::dppu_src_e  job_src,
  input  logic               dppu_busy,
  output logic               res_ready,
  output logic               mode_dram
);
  import ft_pkg::*;

  // ---- stream -------------------------------------------------------------
  logic          streaming, stream_done, draining, captured;
  logic [12:0]   k;
  logic [QW-1:0] kw;
  logic [BW-1:0] kb;
  logic [6:0]    drain;

  // ---- jobs ---------------------------------------------------------------
  typedef enum logic [1:0] {J_IDLE, J_READ, J_OFFER, J_DONE} jst_e;
  jst_e        jst;
  logic [PAW:0] jidx;

  logic [12:0] nch;
  logic [20:0] need, budget;
  assign nch    = 13'((14'(k_len) + 14'(DOT - 1)) / 14'(DOT));
  assign need   = 21'(pos_count) * (21'(nch) * 21'd2 + 21'd2);
  assign budget = 21'(k_len) + 21'(ROWS + COLS);

  assign wb_rd_en   = streaming;
  assign ib_rd_en   = streaming;
  assign wb_rd_addr = wbuf_base + WAW'(k);
  assign ib_rd_addr = ibuf_base + IAW'(k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; streaming <= 1'b0; stream_done <= 1'b0;
      draining <= 1'b0; captured <= 1'b0; k <= '0; kw <= '0; kb <= '0; drain <= '0;
      arr_vld <= 1'b0; arr_first <= 1'b0; cap_en <= 1'b0; cap_word <= '0; cap_byte <= '0;
      cap_level <= '0; arr_capture <= 1'b0; mode_dram <= 1'b0;
      jst <= J_IDLE; jidx <= '0;
    end else begin
      done        <= 1'b0;
      arr_capture <= 1'b0;
      // data read in the previous cycle reaches the array and the DPPU copy
      arr_vld   <= streaming;
      arr_first <= streaming && (k == '0);
      cap_en    <= streaming;
      cap_word  <= kw;
      cap_byte  <= kb;
      if (cap_en) cap_level <= cap_level + 1'b1;

      if (start && !busy) begin
        busy <= 1'b1; streaming <= 1'b1; stream_done <= 1'b0; draining <= 1'b0;
        captured <= 1'b0; k <= '0; kw <= '0; kb <= '0; cap_level <= '0;
        mode_dram <= !data_reuse || (need > budget);
        jst <= (pos_count == '0) ? J_DONE : J_READ;
        jidx <= '0;
      end else if (busy) begin
        if (streaming) begin
          if (k == k_len - 1'b1) begin
            streaming <= 1'b0; draining <= 1'b1; drain <= '0;
          end
          k <= k + 1'b1;
          if (kb == BW'(DOT - 1)) begin kb <= '0; kw <= kw + 1'b1; end
          else kb <= kb + 1'b1;
        end
        if (draining) begin
          drain <= drain + 1'b1;
          if (drain == 7'(ROWS + COLS - 1)) begin
            draining <= 1'b0; arr_capture <= 1'b1; captured <= 1'b1; stream_done <= 1'b1;
          end
        end
        unique case (jst)
          J_READ:  jst <= J_OFFER;
          J_OFFER: if (job_ready) begin
            jidx <= jidx + 1'b1;
            jst  <= (jidx + 1'b1 == pos_count) ? J_DONE : J_READ;
          end
          default: ;
        endcase
        if (stream_done && jst == J_DONE && !dppu_busy && !job_valid) begin
          busy <= 1'b0; done <= 1'b1; stream_done <= 1'b0;
        end
      end
    end
  end

  assign pos_rd_en   = (jst == J_READ);
  assign pos_rd_addr = pos_base + PAW'(jidx);
  assign job_valid   = busy && (jst == J_OFFER);
  assign job_pos     = pos_rd_data;
  assign job_src     = mode_dram ? SRC_DRAM : SRC_REUSE;
  assign res_ready   = captured;

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy) else $error("data_load_ctrl: start while busy");
  a_count: assert property (@(posedge clk) disable iff (!rst_n)
    start && !busy |-> (k_len != 0 && int'(k_len) <= KMAX && int'(pos_count) <= (1 << PAW)));
endmodule
