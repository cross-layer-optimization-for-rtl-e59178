// Output buffer of a tile.
//
// Holds the ROWS x COLS output neurons of the current tile as 8-bit values,
// each the window acc[trunc_lsb+7 : trunc_lsb] of its 24-bit accumulator.
// Two writers share it: cap_en copies every accumulator of the 2D array at
// once when the array has finished the tile, and ovr_en then overwrites one
// neuron with the value the DPPU recomputed for it, so important neurons
// leave the accelerator with the DPPU's stronger protection. If both write
// the same cycle the DPPU value wins. Read port: synchronous, one cycle.
// The buffer and the DPPU-to-output-buffer path follow the paper's
// architecture figure; the plain truncation and the parallel capture are
// this design's choices.
module output_buffer #(
  parameter int ROWS = ft_pkg::ARRAY_ROWS,
  parameter int COLS = ft_pkg::ARRAY_COLS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  trunc_lsb,
  input  logic        cap_en,
  input  logic [23:0] cap_acc [ROWS][COLS],
  input  logic        ovr_en,
  input  logic [4:0]  ovr_row,
  input  logic [4:0]  ovr_col,
  input  logic [23:0] ovr_acc,
  input  logic [4:0]  rd_row,
  input  logic [4:0]  rd_col,
  output logic [7:0]  rd_data
);
  logic [7:0] ob [ROWS][COLS];

  function automatic logic [7:0] window(logic [23:0] v, logic [4:0] lsb);
    return 8'(v >> lsb);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) ob[r][c] <= '0;
      rd_data <= '0;
    end else begin
      if (cap_en)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) ob[r][c] <= window(cap_acc[r][c], trunc_lsb);
      if (ovr_en) ob[ovr_row][ovr_col] <= window(ovr_acc, trunc_lsb);
      rd_data <= ob[rd_row][rd_col];
    end
  end
endmodule
