// scratchpad - on-chip buffer memory, used twice in the accelerator: as the
// inputs scratchpad that feeds the banks' register files and as the outputs
// scratchpad that receives the finished results.
//
// One write port and one read port, both WIDTH bits wide; a word holds
// WIDTH/16 bfloat16 values. Timing: rdata is registered and shows the word
// addressed in the cycle re was high from the next cycle on; a read of the
// word being written returns the old content.
// The paper names the two scratchpads but gives neither their size nor
// their ports; DEPTH, WIDTH and the 1R1W organisation are choices of this
// design.
module scratchpad #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 256
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
