// output_bus - carries finished results from the banks' ACC units to the
// outputs scratchpad.
//
// A bank with a finished result holds valid, its target word address and a
// word of COLS bfloat16 results until it sees ready. A round-robin arbiter
// lets one bank write per cycle; the chosen bank's word is written to the
// scratchpad in the same cycle and the bank gets ready. Banks that finish
// together are served one after another and wait meanwhile.
// The paper shows the connection (Fig. 3) but not how it is shared; the
// arbitration is this design's choice.
module output_bus #(
  parameter int unsigned NB    = 16,
  parameter int unsigned AW    = 10,
  parameter int unsigned WIDTH = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NB-1:0]         valid,
  input  logic [NB-1:0][AW-1:0] addr,
  input  logic [NB-1:0][WIDTH-1:0] data,
  output logic [NB-1:0]         ready,
  output logic                  sp_we,
  output logic [AW-1:0]         sp_waddr,
  output logic [WIDTH-1:0]      sp_wdata
);

  logic [$clog2(NB)-1:0] idx;

  rr_arbiter #(.N(NB)) u_arb (
    .clk, .rst_n, .req(valid), .adv(1'b1), .gnt(ready), .gnt_idx(idx)
  );

  assign sp_we    = |valid;
  assign sp_waddr = addr[idx];
  assign sp_wdata = data[idx];

endmodule
