// tb_pp_encoder - checks the eight stored lines of every multiplicand
// against their definition, and checks the multiplier they form: for every
// pair of mantissas, the OR of the lines the multiplier selects equals the
// reference approximate product, and equals the exact product whenever the
// multiplier has no set bit below the top three (pre-computed) bits.
module tb_pp_encoder;
  import tb_util_pkg::*;
  logic [7:0] mant;
  logic [7:0][15:0] lines;
  logic [15:0] orv;
  int checks = 0, failures = 0;

  pp_encoder dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 128; m < 256; m++) begin
      mant = 8'(m);
      #1;
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (lines[c] !== 16'(m * (4 + c) * 32)) failures++;
      end
      for (int i = 4; i >= 1; i--) begin
        checks++;
        if (lines[8 - i] !== 16'(m * (2 ** i))) failures++;
      end
      for (int x = 128; x < 256; x++) begin
        orv = lines[x[6:5]];
        for (int i = 4; i >= 1; i--) if (x[i]) orv |= lines[8 - i];
        checks++;
        if (orv[15:8] !== approx_mul_hi(8'(m), 8'(x))) failures++;
        if (x[4:0] == 0) begin
          checks++;
          if (orv[15:8] !== exact_mul_hi(8'(m), 8'(x))) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
