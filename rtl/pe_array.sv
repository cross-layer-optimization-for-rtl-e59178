// 2D computing array of the FlexHyCA accelerator (ROWS x COLS PEs).
//
// Computes one output tile C = W x X, with W of ROWS x K and X of K x COLS:
// PE(r,c) accumulates output neuron (r,c). Each cycle the array takes one
// column W[:,k] at its left edge and one row X[k,:] at its top edge; skew
// registers delay row r of the weights by r cycles and column c of the
// activations by c cycles, so that W[r][k] and X[k][c] meet in PE(r,c) at
// cycle k+r+c. Weights, valid and first flags move right, activations move
// down. acc of PE(r,c) holds the finished neuron from cycle
// (K-1)+r+c+1 after the first element entered.
//
// The array, its size (32 x 32) and its role (ordinary neurons, with NB_TH
// protected bits per PE) follow the paper; the output-stationary systolic
// dataflow and the parallel read-out of all accumulators are this design's
// choices. A soft error can be injected into one PE (fi_row, fi_col).
module pe_array #(
  parameter int ROWS    = ft_pkg::ARRAY_ROWS,
  parameter int COLS    = ft_pkg::ARRAY_COLS,
  parameter int Q_SCALE = ft_pkg::DEF_Q_SCALE,
  parameter int S       = ft_pkg::DEF_NB_TH
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [4:0]        trunc_lsb,
  input  logic [ROWS*8-1:0] w_vec,     // W[r][k] in byte r
  input  logic [COLS*8-1:0] x_vec,     // X[k][c] in byte c
  input  logic              in_vld,
  input  logic              in_first,  // k == 0
  input  logic              fi_en,
  input  logic [4:0]        fi_row,
  input  logic [4:0]        fi_col,
  input  logic [15:0]       fi_mul,
  input  logic [23:0]       fi_acc,
  output logic [23:0]       acc [ROWS][COLS]
);
  // Skew registers at the edges.
  logic [7:0] w_sk [ROWS][ROWS];
  logic       v_sk [ROWS][ROWS];
  logic       f_sk [ROWS][ROWS];
  logic [7:0] x_sk [COLS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int d = 0; d < ROWS; d++) begin
          w_sk[r][d] <= '0; v_sk[r][d] <= 1'b0; f_sk[r][d] <= 1'b0;
        end
      for (int c = 0; c < COLS; c++)
        for (int d = 0; d < COLS; d++) x_sk[c][d] <= '0;
    end else begin
      for (int r = 0; r < ROWS; r++) begin
        w_sk[r][0] <= w_vec[r*8 +: 8];
        v_sk[r][0] <= in_vld;
        f_sk[r][0] <= in_first;
        for (int d = 1; d < ROWS; d++) begin
          w_sk[r][d] <= w_sk[r][d-1]; v_sk[r][d] <= v_sk[r][d-1]; f_sk[r][d] <= f_sk[r][d-1];
        end
      end
      for (int c = 0; c < COLS; c++) begin
        x_sk[c][0] <= x_vec[c*8 +: 8];
        for (int d = 1; d < COLS; d++) x_sk[c][d] <= x_sk[c][d-1];
      end
    end
  end

  logic [7:0] wh [ROWS][COLS+1];
  logic       vh [ROWS][COLS+1];
  logic       fh [ROWS][COLS+1];
  logic [7:0] xv [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign wh[r][0] = w_sk[r][r];
    assign vh[r][0] = v_sk[r][r];
    assign fh[r][0] = f_sk[r][r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign xv[0][c] = x_sk[c][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic hit;
      assign hit = fi_en && (fi_row == 5'(r)) && (fi_col == 5'(c));
      pe #(.Q_SCALE(Q_SCALE), .S(S)) u_pe (
        .clk, .rst_n, .trunc_lsb,
        .w_in(wh[r][c]), .vld_in(vh[r][c]), .first_in(fh[r][c]), .x_in(xv[r][c]),
        .fi_mul(hit ? fi_mul : 16'd0), .fi_acc(hit ? fi_acc : 24'd0),
        .w_out(wh[r][c+1]), .vld_out(vh[r][c+1]), .first_out(fh[r][c+1]),
        .x_out(xv[r+1][c]), .acc(acc[r][c]));
    end
  end
endmodule
