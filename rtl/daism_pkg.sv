// daism_pkg - types, sizes and helper functions shared by the DAISM blocks.
//
// Number format: bfloat16 (1 sign bit, 8 exponent bits with bias 127, 7
// fraction bits). The in-SRAM multiplier works on the 8-bit mantissa that
// includes the implicit leading one, so a mantissa product is 16 bits wide.
// A value whose exponent field is 0 (zero or subnormal) is treated as zero;
// infinities and NaNs are not given any special meaning (design choice).
//
// Multiplier variants: GRP is the number of most-significant partial
// products whose sums are pre-computed and stored (1 = FLA, 2 = PC2,
// 3 = PC3); TRUNC = 1 keeps only the MANT_W most significant product bits
// (the "_tr" variants). The default everywhere is PC3_tr, the variant the
// accelerator is built around.
package daism_pkg;

  localparam int unsigned MANT_W = 8;            // mantissa incl. hidden one
  localparam int unsigned PROD_W = 2 * MANT_W;   // full mantissa product
  localparam int unsigned EXP_W  = 8;
  localparam int unsigned BF16_W = 16;
  localparam int unsigned BIAS   = 127;

  typedef struct packed {
    logic                  sign;
    logic [EXP_W-1:0]      exp;
    logic [MANT_W-2:0]     frac;
  } bf16_t;

  // Number of stored lines (wordlines) per kernel element.
  //   2**(grp-1) lines hold every pre-computed sum of the grp top partial
  //   products; the top one is always active because of the hidden one, so
  //   the combinations without it never occur and are not stored.
  //   One line per remaining partial product, except that truncation drops
  //   the unshifted partial product, which lies wholly below the kept bits.
  function automatic int unsigned n_lines(int unsigned grp, bit trunc);
    return (1 << (grp - 1)) + (MANT_W - grp) - (trunc ? 1 : 0);
  endfunction

  // Lowest multiplier bit that still has a line of its own.
  function automatic int unsigned low_bit(bit trunc);
    return trunc ? 1 : 0;
  endfunction

  function automatic logic [MANT_W-1:0] mant_of(bf16_t v);
    return {1'b1, v.frac};
  endfunction

  function automatic logic is_zero(bf16_t v);
    return v.exp == '0;
  endfunction

endpackage
