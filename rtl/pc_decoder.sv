// pc_decoder - multiple-wordline address decoder of the in-SRAM multiplier.
//
// The SRAM holds, for each time step t, a group of LINES wordlines with the
// stored lines of one kernel element per column (see pp_encoder). Given t and
// the input mantissa (the multiplier, hidden one included), the decoder turns
// on, inside group t only:
//   * line c (c = 0 .. 2**(GRP-1)-1), where c is the value of the GRP-1
//     multiplier bits just below the MSB: this line holds the exact product
//     of the multiplicand with the top GRP multiplier bits. The MSB is always
//     one, so exactly one of these lines is on;
//   * line 2**(GRP-1) + k for each set multiplier bit
//     i = MANT_W-GRP-1-k, down to bit 1 with truncation or bit 0 without.
// With GRP = 3 and TRUNC = 1 (PC3_tr) that is 4 + 4 = 8 lines per step.
// A zero input (zero = 1) or en = 0 turns on no wordline at all, which is
// how multiplications by zero are bypassed.
// The line order inside a group is this design's own choice; which lines
// exist follows the paper's FLA / PC2 / PC3 and truncation rules.
// Purely combinational.
module pc_decoder
  import daism_pkg::*;
#(
  parameter int unsigned ROW_GROUPS = 32,
  parameter int unsigned GRP        = 3,
  parameter bit          TRUNC      = 1'b1,
  localparam int unsigned LINES     = n_lines(GRP, TRUNC),
  localparam int unsigned ROWS      = ROW_GROUPS * LINES
) (
  input  logic                          en,
  input  logic [$clog2(ROW_GROUPS)-1:0] t,
  input  logic [MANT_W-1:0]             mant,
  input  logic                          zero,
  output logic [ROWS-1:0]               wl
);

  localparam int unsigned NCOMB = 1 << (GRP - 1);
  localparam int unsigned LOWB  = low_bit(TRUNC);

  logic [LINES-1:0] grp_lines;

  always_comb begin
    grp_lines = '0;
    // pre-computed combination of the top GRP partial products
    for (int unsigned c = 0; c < NCOMB; c++) begin
      if (GRP == 1) grp_lines[c] = 1'b1;
      else grp_lines[c] = (32'(mant[MANT_W-2 -: (GRP > 1 ? GRP-1 : 1)]) == c);
    end
    // one line per remaining partial product
    for (int unsigned k = 0; k < LINES - NCOMB; k++) begin
      grp_lines[NCOMB + k] = mant[MANT_W - GRP - 1 - k];
    end
    if (!en || zero) grp_lines = '0;
  end

  always_comb begin
    wl = '0;
    for (int unsigned g = 0; g < ROW_GROUPS; g++) begin
      if (32'(t) == g) wl[g*LINES +: LINES] = grp_lines;
    end
  end

  // the lowest line in use must be the truncation limit
  initial assert (MANT_W - GRP - 1 - (LINES - NCOMB - 1) == LOWB);

endmodule
