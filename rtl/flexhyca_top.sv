// FlexHyCA: fault-tolerant DNN accelerator with selective, cross-layer
// protection.
//
// Ordinary neurons are computed on a ROWS x COLS output-stationary 2D array
// whose PEs triplicate only the NB_TH high bits of each output window. The
// few important neurons of a tile, listed by array position in the
// position table, are computed a second time on the DPPU, a Dot_size-wide
// dot-product unit whose multipliers and accumulator triplicate IB_TH high
// bits; the DPPU result overwrites the array's result in the output buffer.
// The data load controller streams each tile from the weight and input
// buffers into the array, lets the DPPU reuse that stream when the tile has
// few important neurons, and otherwise has the DPPU load its operands
// straight from DRAM. All protected logic is sized by the quantization
// constraint Q_SCALE: output windows never start below that bit.
//
// Interface: the buffers and the position table are filled through plain
// write ports (a DMA engine from DRAM is outside this design); a tile is
// configured on the cfg inputs and started with start; done pulses when its
// outputs are in the output buffer, read through ob_rd_*. The DPPU's direct
// DRAM path is the dram_req_*/dram_rsp_* port. fi_* inputs flip chosen
// primary-copy bits in one PE or one DPPU lane to emulate soft errors.
//
// Defaults are the paper's main configuration: 32 x 32 array, 512 KB weight
// buffer, 256 KB input buffer, 8-bit data, 24-bit accumulators, and the
// optimum reported for fault rate I: Q_scale 7, IB_TH 2, NB_TH 1,
// Dot_size 52, data reuse on, configurable (mux-steered) bit protection.
// KMAX (4608 = 3*3*512, the longest convolution reduction of VGG16 and ResNet-50) sizes
// the DPPU's copy of the stream and is this design's choice.
module flexhyca_top #(
  parameter int ROWS       = ft_pkg::ARRAY_ROWS,
  parameter int COLS       = ft_pkg::ARRAY_COLS,
  parameter int DOT        = ft_pkg::DEF_DOT_SIZE,
  parameter int KMAX       = 4608,
  parameter int Q_SCALE    = ft_pkg::DEF_Q_SCALE,
  parameter int NB_TH      = ft_pkg::DEF_NB_TH,
  parameter int IB_TH      = ft_pkg::DEF_IB_TH,
  parameter int WBUF_BYTES = 512 * 1024,
  parameter int IBUF_BYTES = 256 * 1024,
  parameter int POS_DEPTH  = 1024,
  parameter int RES_DEPTH  = 16,
  localparam int WAW = $clog2(WBUF_BYTES / ROWS),
  localparam int IAW = $clog2(IBUF_BYTES / COLS),
  localparam int PAW = $clog2(POS_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // tile configuration and control
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic               mode_dram,
  input  logic [12:0]        cfg_k_len,
  input  logic [4:0]         cfg_trunc_lsb,
  input  logic [WAW-1:0]     cfg_wbuf_base,
  input  logic [IAW-1:0]     cfg_ibuf_base,
  input  logic [PAW-1:0]     cfg_pos_base,
  input  logic [PAW:0]       cfg_pos_count,
  input  logic               cfg_data_reuse,
  input  logic [31:0]        cfg_w_dram_base,
  input  logic [31:0]        cfg_x_dram_base,
  // buffer and table fill
  input  logic               wb_wr_en,
  input  logic [WAW-1:0]     wb_wr_addr,
  input  logic [ROWS*8-1:0]  wb_wr_data,
  input  logic               ib_wr_en,
  input  logic [IAW-1:0]     ib_wr_addr,
  input  logic [COLS*8-1:0]  ib_wr_data,
  input  logic               pos_wr_en,
  input  logic [PAW-1:0]     pos_wr_addr,
  input  ft_pkg::pos_entry_t pos_wr_data,
  // DPPU direct DRAM path
  output logic               dram_req_valid,
  input  logic               dram_req_ready,
  output logic [31:0]        dram_req_waddr,
  output logic [31:0]        dram_req_xaddr,
  input  logic               dram_rsp_valid,
  input  logic [DOT*8-1:0]   dram_rsp_w,
  input  logic [DOT*8-1:0]   dram_rsp_x,
  // output buffer read
  input  logic [4:0]         ob_rd_row,
  input  logic [4:0]         ob_rd_col,
  output logic [7:0]         ob_rd_data,
  // soft-error injection
  input  logic               fi_arr_en,
  input  logic [4:0]         fi_row,
  input  logic [4:0]         fi_col,
  input  logic [15:0]        fi_arr_mul,
  input  logic [23:0]        fi_arr_acc,
  input  logic               fi_dppu_en,
  input  logic [5:0]         fi_lane,
  input  logic [15:0]        fi_dppu_mul,
  input  logic [23:0]        fi_dppu_acc
);
  import ft_pkg::*;
  localparam int KW = (KMAX + DOT - 1) / DOT;
  localparam int QW = $clog2(KW + 1);
  localparam int BW = $clog2(DOT);

  logic               wb_rd_en, ib_rd_en;
  logic [WAW-1:0]     wb_rd_addr;
  logic [IAW-1:0]     ib_rd_addr;
  logic [ROWS*8-1:0]  w_vec;
  logic [COLS*8-1:0]  x_vec;
  logic               arr_vld, arr_first, cap_en, arr_capture;
  logic [QW-1:0]      cap_word;
  logic [BW-1:0]      cap_byte;
  logic [12:0]        cap_level;
  logic               pos_rd_en;
  logic [PAW-1:0]     pos_rd_addr;
  pos_entry_t         pos_rd_data, job_pos, res_pos;
  dppu_src_e          job_src;
  logic               job_valid, job_ready, dppu_busy, res_valid, res_ready;
  logic [23:0]        res_acc;
  logic [23:0]        acc [ROWS][COLS];

  weight_buffer #(.ROWS(ROWS), .BYTES(WBUF_BYTES)) u_wbuf (
    .clk, .wr_en(wb_wr_en), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(w_vec));

  input_buffer #(.COLS(COLS), .BYTES(IBUF_BYTES)) u_ibuf (
    .clk, .wr_en(ib_wr_en), .wr_addr(ib_wr_addr), .wr_data(ib_wr_data),
    .rd_en(ib_rd_en), .rd_addr(ib_rd_addr), .rd_data(x_vec));

  pos_table #(.DEPTH(POS_DEPTH)) u_pos (
    .clk, .wr_en(pos_wr_en), .wr_addr(pos_wr_addr), .wr_data(pos_wr_data),
    .rd_en(pos_rd_en), .rd_addr(pos_rd_addr), .rd_data(pos_rd_data));

  data_load_ctrl #(.ROWS(ROWS), .COLS(COLS), .DOT(DOT), .KMAX(KMAX),
                   .WAW(WAW), .IAW(IAW), .PAW(PAW)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .k_len(cfg_k_len), .wbuf_base(cfg_wbuf_base), .ibuf_base(cfg_ibuf_base),
    .pos_base(cfg_pos_base), .pos_count(cfg_pos_count), .data_reuse(cfg_data_reuse),
    .wb_rd_en, .wb_rd_addr, .ib_rd_en, .ib_rd_addr,
    .arr_vld, .arr_first, .cap_en, .cap_word, .cap_byte, .cap_level, .arr_capture,
    .pos_rd_en, .pos_rd_addr, .pos_rd_data,
    .job_valid, .job_ready, .job_pos, .job_src, .dppu_busy,
    .res_ready, .mode_dram);

  pe_array #(.ROWS(ROWS), .COLS(COLS), .Q_SCALE(Q_SCALE), .S(NB_TH)) u_array (
    .clk, .rst_n, .trunc_lsb(cfg_trunc_lsb), .w_vec, .x_vec,
    .in_vld(arr_vld), .in_first(arr_first),
    .fi_en(fi_arr_en), .fi_row, .fi_col, .fi_mul(fi_arr_mul), .fi_acc(fi_arr_acc),
    .acc);

  dppu #(.ROWS(ROWS), .COLS(COLS), .DOT(DOT), .KMAX(KMAX), .Q_SCALE(Q_SCALE),
         .S(IB_TH), .RES_DEPTH(RES_DEPTH)) u_dppu (
    .clk, .rst_n, .trunc_lsb(cfg_trunc_lsb), .k_len(cfg_k_len),
    .w_dram_base(cfg_w_dram_base), .x_dram_base(cfg_x_dram_base),
    .cap_en, .cap_word, .cap_byte, .cap_w(w_vec), .cap_x(x_vec), .cap_level,
    .job_valid, .job_ready, .job_pos, .job_src,
    .dram_req_valid, .dram_req_ready, .dram_req_waddr, .dram_req_xaddr,
    .dram_rsp_valid, .dram_rsp_w, .dram_rsp_x,
    .res_valid, .res_ready, .res_pos, .res_acc, .busy(dppu_busy),
    .fi_en(fi_dppu_en), .fi_lane, .fi_mul(fi_dppu_mul), .fi_acc(fi_dppu_acc));

  output_buffer #(.ROWS(ROWS), .COLS(COLS)) u_obuf (
    .clk, .rst_n, .trunc_lsb(cfg_trunc_lsb),
    .cap_en(arr_capture), .cap_acc(acc),
    .ovr_en(res_valid && res_ready), .ovr_row(res_pos.row), .ovr_col(res_pos.col),
    .ovr_acc(res_acc),
    .rd_row(ob_rd_row), .rd_col(ob_rd_col), .rd_data(ob_rd_data));
endmodule
