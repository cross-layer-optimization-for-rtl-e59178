// Weight buffer (on-chip weight cache) of the 2D array.
//
// One word holds the weights of all ROWS array rows for one reduction index k
// (byte r = W[r][k]), so one read per cycle feeds the left edge of the array.
// The capacity is the paper's 512 KB weight cache: BYTES / ROWS words. Filled
// from DRAM through the write port. Simple dual-port memory: one synchronous
// write port, one synchronous read port with one cycle of read latency.
// The capacity follows the paper; the word organisation is this design's.
module weight_buffer #(
  parameter int ROWS  = ft_pkg::ARRAY_ROWS,
  parameter int BYTES = 512 * 1024,
  localparam int DEPTH = BYTES / ROWS,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [ROWS*8-1:0] wr_data,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [ROWS*8-1:0] rd_data
);
  logic [ROWS*8-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
