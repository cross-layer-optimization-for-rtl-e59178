// Behavioural model of the off-chip DRAM as seen by the DPPU's direct path.
// A byte-addressed memory of MEM_BYTES; each accepted request returns, LAT
// cycles later, DOT consecutive bytes from the weight address and DOT from
// the activation address (bytes beyond the memory read as zero). One request
// is outstanding at a time; ready is low while it is served. Testbenches
// fill mem directly and read the counters nreq (requests served).
module dram_model #(
  parameter int DOT       = 52,
  parameter int MEM_BYTES = 1 << 20,
  parameter int LAT       = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [31:0]      req_waddr,
  input  logic [31:0]      req_xaddr,
  output logic             rsp_valid,
  output logic [DOT*8-1:0] rsp_w,
  output logic [DOT*8-1:0] rsp_x
);
  logic [7:0] mem [MEM_BYTES];
  int nreq;
  int cnt;
  logic pend;
  logic [31:0] wa, xa;

  function automatic logic [7:0] rd(logic [31:0] a);
    return (a < 32'(MEM_BYTES)) ? mem[a] : 8'h0;
  endfunction

  assign req_ready = !pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= 1'b0; cnt <= 0; rsp_valid <= 1'b0; nreq <= 0; wa <= '0; xa <= '0;
      rsp_w <= '0; rsp_x <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && !pend) begin
        pend <= 1'b1; cnt <= LAT; wa <= req_waddr; xa <= req_xaddr;
      end else if (pend) begin
        if (cnt <= 1) begin
          pend <= 1'b0; rsp_valid <= 1'b1; nreq <= nreq + 1;
          for (int i = 0; i < DOT; i++) begin
            rsp_w[i*8 +: 8] <= rd(wa + 32'(i));
            rsp_x[i*8 +: 8] <= rd(xa + 32'(i));
          end
        end
        cnt <= cnt - 1;
      end
    end
  end
endmodule
