// pp_encoder - builds the stored lines of one kernel element.
//
// The multiplicand (the kernel element's mantissa m, hidden one included) is
// written into LINES consecutive SRAM rows of its column:
//   * line c (c = 0 .. 2**(GRP-1)-1) holds the exact sum of the top GRP
//     partial products selected by c, i.e. m * ({1, c} << (MANT_W-GRP));
//     for GRP = 1 this is simply m << (MANT_W-1);
//   * line 2**(GRP-1) + k holds the single partial product m << i with
//     i = MANT_W-GRP-1-k, down to i = 1 with truncation (i = 0 without).
// Each line is PROD_W = 16 bits wide, the column width. The matching
// wordline selection is done by pc_decoder; the OR of the selected lines is
// the approximate product. Purely combinational.
module pp_encoder
  import daism_pkg::*;
#(
  parameter int unsigned GRP   = 3,
  parameter bit          TRUNC = 1'b1,
  localparam int unsigned LINES = n_lines(GRP, TRUNC)
) (
  input  logic [MANT_W-1:0]             mant,
  output logic [LINES-1:0][PROD_W-1:0]  lines
);

  localparam int unsigned NCOMB = 1 << (GRP - 1);

  always_comb begin
    lines = '0;
    for (int unsigned c = 0; c < NCOMB; c++) begin
      lines[c] = PROD_W'((PROD_W'(mant) * PROD_W'((1 << (GRP - 1)) | c))
                         << (MANT_W - GRP));
    end
    for (int unsigned k = 0; k < LINES - NCOMB; k++) begin
      lines[NCOMB + k] = PROD_W'(PROD_W'(mant) << (MANT_W - GRP - 1 - k));
    end
  end

endmodule
