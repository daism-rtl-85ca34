// tb_pc_decoder - exhaustive check of the PC3_tr wordline decoder: every
// time step and every mantissa with its hidden one; one of the four
// pre-computed lines plus one line per set bit 4..1; nothing for zero
// inputs or when disabled.
module tb_pc_decoder;
  localparam int unsigned RG = 32, LINES = 8;
  logic en, zero;
  logic [4:0] t;
  logic [7:0] mant;
  logic [RG*LINES-1:0] wl, expv;
  int checks = 0, failures = 0;

  pc_decoder #(.ROW_GROUPS(RG)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int tt = 0; tt < RG; tt++) begin
      for (int m = 128; m < 256; m++) begin
        for (int mode = 0; mode < 3; mode++) begin
          t = 5'(tt); mant = 8'(m);
          en = (mode != 1); zero = (mode == 2);
          #1;
          expv = '0;
          if (mode == 0) begin
            expv[tt*LINES + m[6:5]] = 1'b1;    // A, A+C, A+B, A+B+C
            if (m[4]) expv[tt*LINES + 4] = 1'b1;  // D
            if (m[3]) expv[tt*LINES + 5] = 1'b1;  // E
            if (m[2]) expv[tt*LINES + 6] = 1'b1;  // F
            if (m[1]) expv[tt*LINES + 7] = 1'b1;  // G
          end
          checks++;
          if (wl !== expv) begin
            failures++;
            if (failures < 5) $display("t=%0d m=%h mode=%0d mismatch", tt, m, mode);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
