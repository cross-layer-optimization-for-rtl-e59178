// Bit-protected accumulator adder.
//
// Adds a sign-extended addend to a 24-bit running sum. The bits at and above
// Q_SCALE+8-S are the only ones that can be among the S high bits of any
// 8-bit output window allowed by the quantization constraint, so only that
// upper slice of the adder is triplicated: three copies add the upper slices
// together with the carry out of the lower, unprotected slice, and a bitwise
// majority picks the result.
//
// Follows the paper in protecting only the accumulator bits that can be
// important under the Q_scale constraint (the red accumulator bits of the
// paper's quantization figure). Own choices: the whole reachable upper slice
// is triplicated directly rather than steered by mux (an adder slice is cheap
// next to the multiplier), and fi_mask flips bits of the primary copy to
// emulate soft errors. Combinational.
module bp_acc #(
  parameter int Q_SCALE = ft_pkg::DEF_Q_SCALE,
  parameter int S       = ft_pkg::DEF_NB_TH,
  parameter int IN_W    = 16                   // addend width, signed
) (
  input  logic [23:0]             acc_in,
  input  logic signed [IN_W-1:0]  addend,
  input  logic [23:0]             fi_mask,   // flip bits of the primary copy
  output logic [23:0]             acc_out
);
  localparam int PLO_RAW = Q_SCALE + 8 - S;
  localparam int PLO = (PLO_RAW < 1) ? 1 : ((PLO_RAW > 23) ? 23 : PLO_RAW);
  localparam int HW  = 24 - PLO;

  logic [23:0]   addx;
  logic [PLO:0]  lo;          // lower slice with its carry out
  logic [HW-1:0] h0, h1, h2;

  assign addx = 24'(addend);  // sign extension
  assign lo   = {1'b0, acc_in[PLO-1:0]} + {1'b0, addx[PLO-1:0]};
  assign h0   = (acc_in[23:PLO] + addx[23:PLO] + HW'(lo[PLO])) ^ fi_mask[23:PLO];
  assign h1   =  acc_in[23:PLO] + addx[23:PLO] + HW'(lo[PLO]);
  assign h2   =  acc_in[23:PLO] + addx[23:PLO] + HW'(lo[PLO]);

  assign acc_out[PLO-1:0] = lo[PLO-1:0] ^ fi_mask[PLO-1:0];
  assign acc_out[23:PLO]  = (h0 & h1) | (h0 & h2) | (h1 & h2);
endmodule
