// tb_pim_sram - checks that a multi-wordline read returns the OR of all
// selected rows, that a single-wordline read is a plain read, that the
// write mask protects unmasked bits, and the one-cycle read latency.
module tb_pim_sram;
  localparam int unsigned ROWS = 256, BITS = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, rd_en;
  logic [$clog2(ROWS)-1:0] waddr;
  logic [BITS-1:0] wdata, wmask, rdata, expv;
  logic [ROWS-1:0] wl;
  logic [BITS-1:0] model [ROWS];
  int checks = 0, failures = 0;

  pim_sram #(.ROWS(ROWS), .BITS(BITS)) dut (.*);

  function automatic logic [BITS-1:0] rnd();
    logic [BITS-1:0] r;
    for (int i = 0; i < BITS / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; rd_en = 0; wl = '0; waddr = '0; wdata = '0; wmask = '0;
    // fill every row
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); we = 1; waddr = 8'(r); wdata = rnd(); wmask = '1;
      model[r] = wdata;
    end
    // masked writes
    for (int k = 0; k < 200; k++) begin
      @(negedge clk); we = 1; waddr = 8'($urandom); wdata = rnd(); wmask = rnd();
      model[waddr] = (model[waddr] & ~wmask) | (wdata & wmask);
    end
    @(negedge clk); we = 0;
    // reads with 1..many wordlines
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      rd_en = 1;
      wl = '0;
      if (k < 100) wl[$urandom % ROWS] = 1'b1;
      else for (int j = 0; j < (k % 12) + 1; j++) wl[$urandom % ROWS] = 1'b1;
      expv = '0;
      for (int r = 0; r < ROWS; r++) if (wl[r]) expv |= model[r];
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rdata !== expv) begin
        failures++;
        if (failures < 5) $display("read %0d mismatch", k);
      end
    end
    // rd_en low keeps the last result
    expv = rdata;
    wl = '1;
    repeat (2) @(negedge clk);
    checks++; if (rdata !== expv) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
