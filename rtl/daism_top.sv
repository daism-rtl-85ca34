// daism_top - the DAISM accelerator: NB banks of in-SRAM approximate
// multipliers between an inputs scratchpad and an outputs scratchpad.
//
// Dataflow: the host fills the inputs scratchpad (words of LANES bfloat16
// inputs) and loads kernel elements into the banks; each bank stores up to
// COLS kernels as columns of its SRAM. It then issues an operation to a
// bank: a dot-product pass over op_len consecutive inputs. The bank
// prefetches its inputs over the shared input bus into its register file,
// feeds one input per cycle through its decoder into the SRAM, where a
// multiple-wordline read forms the approximate mantissa products of that
// input with one element of every stored kernel, and accumulates them in its
// ACC units. The COLS results go over the output bus into one word of the
// outputs scratchpad, from where the host reads them. Different banks take
// different inputs in the same cycle, so NB banks give NB x COLS
// multiply-accumulates per cycle (16 x 16 = 256 with the defaults).
//
// Defaults follow the main configuration, 16 banks of 8 kB with PC3_tr
// multipliers on bfloat16 data. The scratchpad sizes, the host-side ports
// and the buses' arbitration are this design's choices.
//
// Host interface timing: in_we writes one input word per cycle; out_re
// returns out_rdata one cycle later; wl_* and op_* are valid/ready
// handshakes routed to bank wl_bank / op_bank. ovf_flags[b] is set when a
// result word of bank b with a saturated accumulator reaches the outputs
// scratchpad and stays set until reset. The ev_* outputs are per-cycle
// event strobes for performance counting.
module daism_top
  import daism_pkg::*;
#(
  parameter int unsigned NB         = 16,
  parameter int unsigned COLS       = 16,
  parameter int unsigned ROW_GROUPS = 32,
  parameter int unsigned GRP        = 3,
  parameter bit          TRUNC      = 1'b1,
  parameter int unsigned LANES      = 16,
  parameter int unsigned RF_DEPTH   = 32,
  parameter int unsigned ACC_W      = 40,
  parameter int unsigned IN_DEPTH   = 1024,
  parameter int unsigned OUT_DEPTH  = 1024,
  localparam int unsigned IN_AW     = $clog2(IN_DEPTH),
  localparam int unsigned OUT_AW    = $clog2(OUT_DEPTH),
  localparam int unsigned BW        = $clog2(NB),
  localparam int unsigned CW        = $clog2(COLS),
  localparam int unsigned TW        = $clog2(ROW_GROUPS),
  localparam int unsigned LW        = $clog2(ROW_GROUPS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // inputs scratchpad, host write port
  input  logic                 in_we,
  input  logic [IN_AW-1:0]     in_waddr,
  input  bf16_t [LANES-1:0]    in_wdata,
  // outputs scratchpad, host read port
  input  logic                 out_re,
  input  logic [OUT_AW-1:0]    out_raddr,
  output bf16_t [COLS-1:0]     out_rdata,
  // kernel element load
  input  logic                 wl_valid,
  output logic                 wl_ready,
  input  logic [BW-1:0]        wl_bank,
  input  logic [CW-1:0]        wl_col,
  input  logic [TW-1:0]        wl_t,
  input  bf16_t                wl_data,
  // operation issue
  input  logic                 op_valid,
  output logic                 op_ready,
  input  logic [BW-1:0]        op_bank,
  input  logic [IN_AW-1:0]     op_in_base,
  input  logic [LW-1:0]        op_len,
  input  logic [OUT_AW-1:0]    op_out_addr,
  input  logic [EXP_W:0]       op_ebase,
  // status and events
  output logic [NB-1:0]        bank_busy,
  output logic [NB-1:0]        ovf_flags,
  output logic [NB-1:0]        ev_step,
  output logic [NB-1:0]        ev_stall,
  output logic [NB-1:0]        ev_out_wait,
  output logic [NB-1:0]        ev_bypass
);

  localparam int unsigned IW = LANES * BF16_W;
  localparam int unsigned OW = COLS * BF16_W;

  // ---------------- inputs scratchpad + input bus ----------------
  logic                     isp_re;
  logic [IN_AW-1:0]         isp_raddr;
  logic [IW-1:0]            isp_rdata, ibus_rdata;
  logic [NB-1:0]            f_req, f_gnt, f_rvalid;
  logic [NB-1:0][IN_AW-1:0] f_addr;

  scratchpad #(.DEPTH(IN_DEPTH), .WIDTH(IW)) u_in_spad (
    .clk, .we(in_we), .waddr(in_waddr), .wdata(in_wdata),
    .re(isp_re), .raddr(isp_raddr), .rdata(isp_rdata)
  );

  input_bus #(.NB(NB), .AW(IN_AW), .WIDTH(IW)) u_ibus (
    .clk, .rst_n, .req(f_req), .addr(f_addr), .gnt(f_gnt), .rvalid(f_rvalid),
    .rdata(ibus_rdata), .sp_re(isp_re), .sp_raddr(isp_raddr), .sp_rdata(isp_rdata)
  );

  // ---------------- banks ----------------
  logic [NB-1:0]             b_wl_ready, b_op_ready, r_valid, r_ready, b_ovf;
  logic [NB-1:0][OUT_AW-1:0] r_addr;
  logic [NB-1:0][OW-1:0]     r_data;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    bf16_t [COLS-1:0] rd;
    logic  [COLS-1:0] byp;
    daism_bank #(
      .COLS(COLS), .ROW_GROUPS(ROW_GROUPS), .GRP(GRP), .TRUNC(TRUNC),
      .RF_DEPTH(RF_DEPTH), .LANES(LANES), .ACC_W(ACC_W),
      .IN_AW(IN_AW), .OUT_AW(OUT_AW)
    ) u_bank (
      .clk, .rst_n,
      .wl_valid(wl_valid && 32'(wl_bank) == b), .wl_ready(b_wl_ready[b]),
      .wl_col, .wl_t, .wl_data,
      .op_valid(op_valid && 32'(op_bank) == b), .op_ready(b_op_ready[b]),
      .op_in_base, .op_len, .op_out_addr, .op_ebase,
      .f_req(f_req[b]), .f_addr(f_addr[b]), .f_gnt(f_gnt[b]),
      .f_rvalid(f_rvalid[b]), .f_rdata(ibus_rdata),
      .r_valid(r_valid[b]), .r_ready(r_ready[b]), .r_addr(r_addr[b]),
      .r_data(rd), .ovf(b_ovf[b]),
      .busy(bank_busy[b]), .stall(ev_stall[b]), .step(ev_step[b]), .bypass(byp)
    );
    assign r_data[b]      = rd;
    assign ev_bypass[b]   = |byp;
    assign ev_out_wait[b] = r_valid[b] && !r_ready[b];
  end

  assign wl_ready = b_wl_ready[wl_bank];
  assign op_ready = b_op_ready[op_bank];

  // ---------------- output bus + outputs scratchpad ----------------
  logic              osp_we;
  logic [OUT_AW-1:0] osp_waddr;
  logic [OW-1:0]     osp_wdata, osp_rdata;

  output_bus #(.NB(NB), .AW(OUT_AW), .WIDTH(OW)) u_obus (
    .clk, .rst_n, .valid(r_valid), .addr(r_addr), .data(r_data), .ready(r_ready),
    .sp_we(osp_we), .sp_waddr(osp_waddr), .sp_wdata(osp_wdata)
  );

  scratchpad #(.DEPTH(OUT_DEPTH), .WIDTH(OW)) u_out_spad (
    .clk, .we(osp_we), .waddr(osp_waddr), .wdata(osp_wdata),
    .re(out_re), .raddr(out_raddr), .rdata(osp_rdata)
  );

  assign out_rdata = osp_rdata;

  always_ff @(posedge clk) begin
    if (!rst_n) ovf_flags <= '0;
    else        ovf_flags <= ovf_flags | (r_valid & r_ready & b_ovf);
  end

endmodule
