// input_regfile - per-bank input register file (the REG boxes in front of
// each bank's decoder).
//
// It prefetches inputs from the inputs scratchpad so that the bank, which
// consumes one input per cycle, does not read the scratchpad every cycle: a
// scratchpad word of LANES inputs is written in one cycle, and the entries
// are read out one at a time in order. It is organised as a circular buffer.
//
// Interface: wr_en writes the first wr_cnt (1..LANES) entries of wr_data;
// the writer must check free_slots first. rd_data is the oldest entry
// (valid while empty = 0) and rd_en removes it. A write and a read may
// happen in the same cycle. flush empties it.
// Timing: a written entry is readable the next cycle. Reset is synchronous.
// Depth default 32: one vector for the 32 time steps of an 8 kB bank. The
// depth and the circular organisation are this design's choices; the paper
// gives only the register file's purpose.
module input_regfile
  import daism_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned LANES = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      flush,
  input  logic                      wr_en,
  input  logic [$clog2(LANES+1)-1:0] wr_cnt,
  input  bf16_t [LANES-1:0]         wr_data,
  input  logic                      rd_en,
  output bf16_t                     rd_data,
  output logic                      empty,
  output logic [$clog2(DEPTH+1)-1:0] free_slots
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  bf16_t         mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [CW-1:0] count;

  assign empty      = (count == '0);
  assign free_slots = CW'(DEPTH) - count;
  assign rd_data    = mem[rd_ptr];

  logic do_rd;
  assign do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int unsigned l = 0; l < LANES; l++) begin
        if (l < 32'(wr_cnt)) mem[AW'((32'(wr_ptr) + l) % DEPTH)] <= wr_data[l];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (flush) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_en)  wr_ptr <= AW'((32'(wr_ptr) + 32'(wr_cnt)) % DEPTH);
      if (do_rd)  rd_ptr <= AW'((32'(rd_ptr) + 1) % DEPTH);
      count <= count + (wr_en ? CW'(wr_cnt) : CW'(0)) - (do_rd ? CW'(1) : CW'(0));
    end
  end

  // a write must fit in the free space
  assert property (@(posedge clk) disable iff (!rst_n || flush)
                   wr_en |-> (32'(wr_cnt) <= 32'(free_slots) + (do_rd ? 1 : 0)));

endmodule
