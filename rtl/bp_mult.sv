// Configurable bit-protected 8x8 signed multiplier.
//
// The product is formed column by column: column c of the partial-product
// array (Baugh-Wooley form, so signed operands need no sign extension) is a
// col_unit that counts its partial-product bits and the carry value from
// column c-1. This primary array computes all 16 product bits.
//
// Only the S most significant bits of the 8-bit window that the accumulator
// will later keep (acc[trunc_lsb+7 : trunc_lsb]) matter much for accuracy, so
// only the columns that produce them are triplicated. Because trunc_lsb may
// change from layer to layer, the triplication is configurable: a redundant
// array of two copies x S column units is steered by input muxes onto columns
// trunc_lsb+8-S .. trunc_lsb+7, and for those columns the product bit is the
// bitwise majority of the primary and the two redundant results. The
// quantization constraint Q_SCALE (trunc_lsb >= Q_SCALE) bounds the columns
// the muxes must reach to Q_SCALE+8-S .. 15, which is what keeps the
// redundant array and its muxes small.
//
// Each redundant copy forms its own short carry chain across its S columns;
// its lowest column takes the carry of the primary array. Voted carries are
// not fed back into the primary array: carries only move upward, so the
// columns above the window cannot change the kept bits, and leaving them out
// keeps the circuit free of loops through the configuration muxes.
//
// Follows the paper: selective TMR of the important-bit columns only, a
// redundant array shared by mux according to the quantization, and the
// Q_scale bound on the protected region. Own choices: Baugh-Wooley signed
// array, the column count written as a sum (a Wallace tree or a shift array
// compute the same count), one redundant copy pair per protected bit, no
// merging of the narrow left columns, and the fi_mask port that flips primary
// column outputs to emulate soft errors. trunc_lsb below Q_SCALE is clamped to
// Q_SCALE for steering. Combinational; no clock.
module bp_mult #(
  parameter int Q_SCALE = ft_pkg::DEF_Q_SCALE, // lowest allowed truncation LSB
  parameter int S       = ft_pkg::DEF_NB_TH    // protected high bits of the window
) (
  input  logic signed [7:0]  a,
  input  logic signed [7:0]  b,
  input  logic [4:0]         trunc_lsb,  // window LSB in the 24-bit accumulator
  input  logic [15:0]        fi_mask,    // soft-error injection: flip primary column c
  output logic [15:0]        p           // a*b modulo 2^16
);
  localparam int NPP = 8;
  localparam int CW  = 4;
  localparam int PLO_RAW = Q_SCALE + 8 - S;
  localparam int PLO = (PLO_RAW < 0) ? 0 : PLO_RAW;   // lowest column the muxes reach

  // Partial-product bits per column (Baugh-Wooley with constants at 8 and 15).
  logic [NPP-1:0] pp [16];
  always_comb begin
    int n [16];
    for (int c = 0; c < 16; c++) begin
      pp[c] = '0;
      n[c]  = 0;
    end
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        logic bit_ij;
        bit_ij = a[i] & b[j];
        if ((i == 7) != (j == 7)) bit_ij = ~bit_ij;
        pp[i+j][n[i+j]] = bit_ij;
        n[i+j] = n[i+j] + 1;
      end
    pp[8][n[8]]   = 1'b1;
    pp[15][n[15]] = 1'b1;
  end

  // Primary array.
  logic [CW-1:0] carry [17];
  logic [15:0]   psum_raw, psum;
  assign carry[0] = '0;
  for (genvar c = 0; c < 16; c++) begin : g_prim
    col_unit #(.NPP(NPP), .CW(CW)) u_col (
      .pp(pp[c]), .cin(carry[c]), .sum(psum_raw[c]), .cout(carry[c+1]));
  end
  assign psum = psum_raw ^ fi_mask;

  // Column each redundant slot covers for the current window.
  logic [4:0] n_eff;
  assign n_eff = (trunc_lsb < 5'(Q_SCALE)) ? 5'(Q_SCALE) : trunc_lsb;

  if (PLO <= 15) begin : g_red
    localparam int NS = S;
    logic [5:0]     slot_col [NS];
    logic           slot_on  [NS];
    logic [NPP-1:0] slot_pp  [NS];
    logic [CW-1:0]  base_cin;
    logic [CW-1:0]  rc_a [NS+1];
    logic [CW-1:0]  rc_b [NS+1];
    logic           rs_a [NS];
    logic           rs_b [NS];

    // Input muxes of the redundant array.
    always_comb begin
      for (int i = 0; i < NS; i++) begin
        slot_col[i] = 6'(n_eff) + 6'(8 - S + i);
        slot_on[i]  = (slot_col[i] <= 6'd15);
        slot_pp[i]  = '0;
        for (int c = PLO + i; c < 16; c++)
          if (slot_col[i] == 6'(c)) slot_pp[i] = pp[c];
      end
      base_cin = '0;
      for (int c = PLO; c < 16; c++)
        if (slot_col[0] == 6'(c)) base_cin = carry[c];
    end

    assign rc_a[0] = base_cin;
    assign rc_b[0] = base_cin;
    for (genvar i = 0; i < NS; i++) begin : g_slot
      col_unit #(.NPP(NPP), .CW(CW)) u_ra (
        .pp(slot_pp[i]), .cin(rc_a[i]), .sum(rs_a[i]), .cout(rc_a[i+1]));
      col_unit #(.NPP(NPP), .CW(CW)) u_rb (
        .pp(slot_pp[i]), .cin(rc_b[i]), .sum(rs_b[i]), .cout(rc_b[i+1]));
    end

    // Output muxes and voters.
    always_comb begin
      p = psum;
      for (int c = PLO; c < 16; c++)
        for (int i = 0; i < NS; i++)
          if (slot_on[i] && slot_col[i] == 6'(c))
            p[c] = (psum[c] & rs_a[i]) | (psum[c] & rs_b[i]) | (rs_a[i] & rs_b[i]);
    end
  end else begin : g_nored
    assign p = psum;
  end
endmodule
