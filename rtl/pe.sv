// Processing element of the 2D computing array.
//
// Output-stationary multiply-accumulate: a weight enters from the left with a
// valid and a first-of-tile flag, an activation enters from the top, both are
// registered and passed on (weight and flags to the right, activation down)
// one cycle later. When the weight is valid the PE adds w*x to its 24-bit
// accumulator, starting from zero on the first element of a tile. The
// multiplier and the accumulator adder are the bit-protected versions, with S
// (NB_TH for ordinary neurons) protected high bits of the output window.
//
// Timing: the product of the operands present in cycle t is in acc from
// cycle t+1. fi_mul and fi_acc flip primary-copy bits to emulate soft errors.
// The PE itself follows the paper's 2D array of multiply-add units with
// selective bit protection; the output-stationary dataflow is this design's
// choice.
module pe #(
  parameter int Q_SCALE = ft_pkg::DEF_Q_SCALE,
  parameter int S       = ft_pkg::DEF_NB_TH
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [4:0]        trunc_lsb,
  input  logic signed [7:0] w_in,
  input  logic              vld_in,
  input  logic              first_in,
  input  logic signed [7:0] x_in,
  input  logic [15:0]       fi_mul,
  input  logic [23:0]       fi_acc,
  output logic signed [7:0] w_out,
  output logic              vld_out,
  output logic              first_out,
  output logic signed [7:0] x_out,
  output logic [23:0]       acc
);
  logic [15:0] prod;
  logic [23:0] acc_base, acc_next;

  bp_mult #(.Q_SCALE(Q_SCALE), .S(S)) u_mul (
    .a(w_in), .b(x_in), .trunc_lsb(trunc_lsb), .fi_mask(fi_mul), .p(prod));

  assign acc_base = first_in ? '0 : acc;

  bp_acc #(.Q_SCALE(Q_SCALE), .S(S), .IN_W(16)) u_acc (
    .acc_in(acc_base), .addend(prod), .fi_mask(fi_acc), .acc_out(acc_next));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_out     <= '0;
      x_out     <= '0;
      vld_out   <= 1'b0;
      first_out <= 1'b0;
      acc       <= '0;
    end else begin
      w_out     <= w_in;
      x_out     <= x_in;
      vld_out   <= vld_in;
      first_out <= first_in & vld_in;
      if (vld_in) acc <= acc_next;
    end
  end

  // The window must respect the quantization constraint the protection was built for.
  a_trunc_range: assert property (@(posedge clk) disable iff (!rst_n)
    vld_in |-> (trunc_lsb >= 5'(Q_SCALE) && trunc_lsb <= 5'd16))
    else $error("pe: trunc_lsb %0d outside [Q_SCALE, 16]", trunc_lsb);
endmodule
