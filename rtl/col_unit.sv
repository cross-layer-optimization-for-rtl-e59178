// One column of the multiplier's partial-product array.
//
// The unit counts the partial-product bits of its column plus the carry value
// arriving from the column to its right, emits the column's product bit and
// passes the rest of the count on, halved, as the carry into the next column.
// This is the "computing unit" column of the paper's multiplier drawings; a
// Wallace tree or a shift-add array compute the same column count with
// different wiring, so the count is written here as a plain sum and left to
// synthesis. Purely combinational.
module col_unit #(
  parameter int NPP = 9,   // partial-product bits in the column (with constants)
  parameter int CW  = 4    // width of the carry value between columns
) (
  input  logic [NPP-1:0] pp,
  input  logic [CW-1:0]  cin,
  output logic           sum,
  output logic [CW-1:0]  cout
);
  logic [CW:0] total;
  always_comb begin
    total = (CW+1)'(cin);
    for (int i = 0; i < NPP; i++) total = total + (CW+1)'(pp[i]);
    sum  = total[0];
    cout = total[CW:1];
  end
endmodule
