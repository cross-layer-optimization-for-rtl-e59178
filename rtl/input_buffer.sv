// Input buffer (on-chip data cache) of the 2D array.
//
// One word holds the activations of all COLS array columns for one reduction index k
// (byte c = X[k][c]), so one read per cycle feeds the top edge of the array.
// The capacity is the paper's 256 KB data cache: BYTES / COLS words. Filled
// from DRAM through the write port. Simple dual-port memory: one synchronous
// write port, one synchronous read port with one cycle of read latency.
// The capacity follows the paper; the word organisation is this design's.
module input_buffer #(
  parameter int COLS  = ft_pkg::ARRAY_COLS,
  parameter int BYTES = 256 * 1024,
  localparam int DEPTH = BYTES / COLS,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [COLS*8-1:0] wr_data,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [COLS*8-1:0] rd_data
);
  logic [COLS*8-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
