// input_bus - the data bus from the inputs scratchpad to the banks'
// register files.
//
// Every bank whose register file has room for a scratchpad word raises
// req with the word address it wants. A round-robin arbiter picks one bank
// per cycle, the bus reads that word from the scratchpad, and one cycle
// later delivers it with rvalid[bank] set for the bank that asked. So the
// bus serves one bank per cycle and each read brings LANES inputs; with
// LANES = 16 and 16 banks it can keep every bank fed at one input per cycle
// in steady state. Banks that are not granted wait (they see gnt = 0).
// The arbitration scheme and the word width are this design's choices;
// the paper only says that more banks need a wider bus.
module input_bus #(
  parameter int unsigned NB    = 16,
  parameter int unsigned AW    = 10,
  parameter int unsigned WIDTH = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // bank side
  input  logic [NB-1:0]        req,
  input  logic [NB-1:0][AW-1:0] addr,
  output logic [NB-1:0]        gnt,
  output logic [NB-1:0]        rvalid,
  output logic [WIDTH-1:0]     rdata,
  // scratchpad read port
  output logic                 sp_re,
  output logic [AW-1:0]        sp_raddr,
  input  logic [WIDTH-1:0]     sp_rdata
);

  logic [$clog2(NB)-1:0] idx;

  rr_arbiter #(.N(NB)) u_arb (
    .clk, .rst_n, .req, .adv(1'b1), .gnt, .gnt_idx(idx)
  );

  assign sp_re    = |gnt;
  assign sp_raddr = addr[idx];
  assign rdata    = sp_rdata;

  always_ff @(posedge clk) begin
    if (!rst_n) rvalid <= '0;
    else        rvalid <= gnt;
  end

endmodule
