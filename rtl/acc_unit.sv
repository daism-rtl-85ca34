// acc_unit - one accumulator of a bank's ACC UNIT row, with the exponent,
// sign and zero handling that the in-SRAM multiplier leaves out.
//
// Per time step it receives the MANT_W most significant bits of the column's
// OR-read (the truncated approximate mantissa product, PC3_tr), the input's
// sign and exponent and the kernel element's sign and exponent. It
//   * bypasses the step when either operand is zero (exponent field 0);
//   * takes the product sign as the XOR of the operand signs;
//   * adds the exponents and aligns the 16-bit mantissa product to a fixed
//     point accumulator whose weight is set by a block exponent ebase
//     (a block-floating-point style scheme, one exponent per operation):
//     one accumulator LSB is worth 2**(ebase - 2*127 - 14);
//   * adds the aligned product into a signed ACC_W-bit accumulator, with
//     saturation and a sticky overflow flag.
// result is the accumulator converted back to bfloat16 (leading-one
// normalisation, fraction truncated, flush to zero on underflow, largest
// finite value on overflow).
// Timing: clear and valid act on the clock edge; result follows acc
// combinationally. clear has priority over valid. A step with first = 1
// starts a new sum (the old one is discarded without a separate clear
// cycle), so passes can follow each other without a gap. Reset is
// synchronous.
// The paper says exponents are handled outside the SRAM "similar to block
// floating point"; the fixed-point alignment, the widths, saturation and the
// rounding are this design's choices.
module acc_unit
  import daism_pkg::*;
#(
  parameter int unsigned ACC_W = 40
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 valid,
  input  logic                 first,     // first step: restart the sum
  input  logic [MANT_W-1:0]    prod_hi,   // top MANT_W bits of the OR read
  input  logic                 x_sign,
  input  logic [EXP_W-1:0]     x_exp,
  input  logic                 w_sign,
  input  logic [EXP_W-1:0]     w_exp,
  input  logic [EXP_W:0]       ebase,
  output logic signed [ACC_W-1:0] acc,
  output bf16_t                result,
  output logic                 ovf,
  output logic                 bypassed   // this step was skipped (zero)
);

  localparam logic signed [ACC_W:0] MAXV = (ACC_W+1)'((64'(1) << (ACC_W - 1)) - 1);
  localparam logic signed [ACC_W:0] MINV = -MAXV;
  localparam int unsigned SH_MAX = ACC_W - 1 - PROD_W;  // largest exact shift

  logic [PROD_W-1:0]       p;
  logic signed [EXP_W+2:0] sh;
  logic [ACC_W-1:0]        mag;
  logic                    mag_ovf;
  logic signed [ACC_W:0]   term, sum;
  logic                    sum_ovf;

  assign p        = {prod_hi, {(PROD_W-MANT_W){1'b0}}};
  assign bypassed = valid && (x_exp == '0 || w_exp == '0);

  always_comb begin
    sh      = $signed({2'b00, x_exp}) + $signed({2'b00, w_exp}) - $signed({1'b0, ebase});
    mag     = '0;
    mag_ovf = 1'b0;
    if (sh >= 0) begin
      if (sh > $signed((EXP_W+3)'(SH_MAX))) mag_ovf = 1'b1;
      else mag = ACC_W'(p) << sh;
    end else if (-sh < $signed((EXP_W+3)'(PROD_W))) begin
      mag = ACC_W'(p >> (-sh));
    end
    term = (x_sign ^ w_sign) ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    sum  = (first ? '0 : $signed({acc[ACC_W-1], acc})) + term;
    sum_ovf = mag_ovf || sum > MAXV || sum < MINV;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0;
      ovf <= 1'b0;
    end else if (clear) begin
      acc <= '0;
      ovf <= 1'b0;
    end else if (valid && bypassed) begin
      if (first) begin
        acc <= '0;
        ovf <= 1'b0;
      end
    end else if (valid) begin
      if (sum_ovf) begin
        acc <= (x_sign ^ w_sign) ? ACC_W'(MINV) : ACC_W'(MAXV);
        ovf <= 1'b1;
      end else begin
        acc <= ACC_W'(sum);
        if (first) ovf <= 1'b0;
      end
    end
  end

  // ---- conversion to bfloat16 ----
  logic [ACC_W-1:0]        amag;
  logic [$clog2(ACC_W)-1:0] lead;
  logic                    nz;
  logic signed [EXP_W+3:0] e_out;
  logic [ACC_W-1:0]        norm;

  always_comb begin
    amag = acc[ACC_W-1] ? ACC_W'(-acc) : ACC_W'(acc);
    lead = '0;
    nz   = 1'b0;
    for (int unsigned i = 0; i < ACC_W; i++) begin
      if (amag[i]) begin
        lead = ($clog2(ACC_W))'(i);
        nz   = 1'b1;
      end
    end
    e_out = $signed((EXP_W+4)'(lead)) + $signed((EXP_W+4)'(ebase))
            - $signed((EXP_W+4)'(2*BIAS + 2*(MANT_W-1) - BIAS));
    norm  = amag << (ACC_W - 1 - 32'(lead));
    result = '0;
    if (nz && e_out > 0) begin
      result.sign = acc[ACC_W-1];
      if (e_out >= 255) begin
        result.exp  = 8'hFE;
        result.frac = '1;
      end else begin
        result.exp  = EXP_W'(e_out);
        result.frac = norm[ACC_W-2 -: MANT_W-1];
      end
    end
  end

endmodule
