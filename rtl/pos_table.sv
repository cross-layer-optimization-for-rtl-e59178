// Table of the positions of important neurons.
//
// Each entry names one important neuron of a tile by the (column, row) of the
// PE that computes it in the 2D array; the entries of a tile are stored
// consecutively and read one per cycle by the data load controller, which
// hands them to the DPPU for recomputation. Loaded from DRAM through the
// write port; synchronous read with one cycle of latency.
// The table and its (col, row) content follow the paper's architecture
// figure; the depth (one full tile of entries) and 0-based coordinates are
// this design's choices.
module pos_table #(
  parameter int DEPTH = 1024,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               wr_en,
  input  logic [AW-1:0]      wr_addr,
  input  ft_pkg::pos_entry_t wr_data,
  input  logic               rd_en,
  input  logic [AW-1:0]      rd_addr,
  output ft_pkg::pos_entry_t rd_data
);
  ft_pkg::pos_entry_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
