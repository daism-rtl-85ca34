// pim_sram - SRAM bank whose read activates several wordlines at once.
//
// Behaviour: a read drives any number of wordlines (wl, one bit per row) and
// returns the bitwise OR of every selected row, which is what the
// precharged bitlines of a multi-wordline SRAM read give. A read with a
// single wordline set is an ordinary SRAM read. The OR is how the
// accelerator approximates the sum of partial products (no adder tree).
//
// Interface: one write port (one row per cycle, per-bit write mask so that a
// single kernel column can be written) and one multi-wordline read port.
// Timing: the read result is registered; rdata holds the OR of the rows
// selected in the cycle rd_en was high, from the next cycle on. A write and
// a read in the same cycle see the old row content.
//
// In silicon this is a custom macro (modified decoder and sense amplifiers);
// here it is written as a synthesizable array. Size defaults: 256 x 256 bits
// = 8 kB, the bank size of the main 16 x 8 kB configuration.
module pim_sram #(
  parameter int unsigned ROWS = 256,
  parameter int unsigned BITS = 256
) (
  input  logic                    clk,
  // write port
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  logic [BITS-1:0]         wdata,
  input  logic [BITS-1:0]         wmask,
  // multi-wordline read port
  input  logic                    rd_en,
  input  logic [ROWS-1:0]         wl,
  output logic [BITS-1:0]         rdata
);

  logic [BITS-1:0] mem [ROWS];
  logic [BITS-1:0] or_bus;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= (mem[waddr] & ~wmask) | (wdata & wmask);
  end

  // wired-OR of all active wordlines
  always_comb begin
    or_bus = '0;
    for (int unsigned r = 0; r < ROWS; r++) begin
      if (wl[r]) or_bus = or_bus | mem[r];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rdata <= or_bus;
  end

endmodule
