// daism_bank - one DAISM bank: input register file, multiple-wordline
// decoder, PIM SRAM, kernel sign/exponent store and a row of ACC units,
// run by a small sequencer.
//
// Data layout (kernels stored as columns): column c (PROD_W = 16 bits wide)
// holds kernel c, flattened; time step t owns LINES consecutive wordlines,
// which hold the stored lines of element t of every kernel. Feeding input x
// at step t therefore multiplies x by element t of all COLS kernels at once,
// and the COLS accumulators build COLS dot products of length up to
// ROW_GROUPS. With the defaults (8 kB = 256 x 256 bits, PC3_tr, 8 lines per
// element) a bank holds 16 kernels of up to 32 elements and performs 16
// approximate multiply-accumulates per cycle.
//
// Operation:
//  * Weight load (wl_*): one bfloat16 kernel element per request. Its sign
//    and exponent go to a small side store; its mantissa goes through
//    pp_encoder and the LINES lines are written into its column, one SRAM
//    row per cycle (LINES + 1 cycles per element).
//  * Operation (op_*): a dot-product pass of op_len inputs read from the
//    inputs scratchpad starting at word op_in_base. Up to two passes are
//    queued. A fetch engine prefetches their scratchpad words (LANES inputs
//    each) in queue order over the input bus into the register file; the
//    issue engine takes one input per cycle, drives the decoder for step t
//    and reads the SRAM (one cycle); the ACC units accumulate in the next
//    cycle. If the register file runs dry the issue stalls (stall = 1).
//    The first step of a pass restarts the accumulators, so consecutive
//    passes follow each other without a gap.
//  * Result (r_*): one cycle after a pass's last accumulation its COLS
//    bfloat16 results, its output address and its overflow flag (ovf) are
//    copied into a result register and offered to the output bus until
//    r_ready. If the register is still occupied when the next pass ends,
//    the pipeline holds until it is free.
// Timing: with an idle bus, r_valid rises op_len + 5 cycles after the pass
// is accepted (2 cycles first fetch, op_len issue cycles, SRAM read,
// accumulate, capture); passes queued back to back deliver their results
// op_len cycles apart. A kernel load is accepted only when the bank is idle.
// The sequencing, the pass queue, the handshakes and the side store for
// signs and exponents are this design's choices; the paper gives the data
// layout, the one input per cycle per bank and the decoder/SRAM/accumulator
// chain.
module daism_bank
  import daism_pkg::*;
#(
  parameter int unsigned COLS       = 16,
  parameter int unsigned ROW_GROUPS = 32,
  parameter int unsigned GRP        = 3,
  parameter bit          TRUNC      = 1'b1,
  parameter int unsigned RF_DEPTH   = 32,
  parameter int unsigned LANES      = 16,
  parameter int unsigned ACC_W      = 40,
  parameter int unsigned IN_AW      = 10,
  parameter int unsigned OUT_AW     = 10,
  localparam int unsigned TW        = $clog2(ROW_GROUPS),
  localparam int unsigned LW        = $clog2(ROW_GROUPS + 1),
  localparam int unsigned CW        = $clog2(COLS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // kernel element load
  input  logic                    wl_valid,
  output logic                    wl_ready,
  input  logic [CW-1:0]           wl_col,
  input  logic [TW-1:0]           wl_t,
  input  bf16_t                   wl_data,
  // operation issue
  input  logic                    op_valid,
  output logic                    op_ready,
  input  logic [IN_AW-1:0]        op_in_base,
  input  logic [LW-1:0]           op_len,
  input  logic [OUT_AW-1:0]       op_out_addr,
  input  logic [EXP_W:0]          op_ebase,
  // input bus
  output logic                    f_req,
  output logic [IN_AW-1:0]        f_addr,
  input  logic                    f_gnt,
  input  logic                    f_rvalid,
  input  bf16_t [LANES-1:0]       f_rdata,
  // result
  output logic                    r_valid,
  input  logic                    r_ready,
  output logic [OUT_AW-1:0]       r_addr,
  output bf16_t [COLS-1:0]        r_data,
  output logic                    ovf,
  // status / events
  output logic                    busy,
  output logic                    stall,
  output logic                    step,
  output logic [COLS-1:0]         bypass
);

  localparam int unsigned LINES = n_lines(GRP, TRUNC);
  localparam int unsigned ROWS  = ROW_GROUPS * LINES;
  localparam int unsigned BITS  = COLS * PROD_W;
  localparam int unsigned LIW   = $clog2(LINES);
  localparam int unsigned WPW   = $clog2((ROW_GROUPS + LANES - 1) / LANES + 1);

  typedef struct packed {
    logic [IN_AW-1:0]  in_base;
    logic [LW-1:0]     len;
    logic [OUT_AW-1:0] out_addr;
    logic [EXP_W:0]    ebase;
  } op_t;

  // ---------------- weight load ----------------
  logic                 loading;
  logic [CW-1:0]        ld_col;
  logic [TW-1:0]        ld_t;
  logic [MANT_W-1:0]    ld_mant;
  logic [LIW-1:0]       ld_line;
  logic [LINES-1:0][PROD_W-1:0] ld_lines;
  logic [COLS-1:0][EXP_W:0] wse [ROW_GROUPS];   // {sign, exp} per element

  pp_encoder #(.GRP(GRP), .TRUNC(TRUNC)) u_enc (.mant(ld_mant), .lines(ld_lines));

  logic                    sr_we;
  logic [$clog2(ROWS)-1:0] sr_waddr;
  logic [BITS-1:0]         sr_wdata, sr_wmask;

  always_comb begin
    sr_we    = loading;
    sr_waddr = ($clog2(ROWS))'(32'(ld_t) * LINES + 32'(ld_line));
    sr_wdata = '0;
    sr_wmask = '0;
    sr_wdata[32'(ld_col)*PROD_W +: PROD_W] = ld_lines[ld_line];
    sr_wmask[32'(ld_col)*PROD_W +: PROD_W] = '1;
  end

  // ---------------- operation queue (2 entries) ----------------
  op_t        opq [2];
  logic       q_head, q_tail, q_fptr;   // slot indices
  logic [1:0] q_count, q_unfetched;
  logic       op_go;

  // pipeline state
  logic               s1_v, s1_first, s1_last;
  bf16_t              s1_x;
  logic [COLS-1:0][EXP_W:0] s1_w;
  logic [EXP_W:0]     s1_ebase;
  logic [OUT_AW-1:0]  s1_addr;
  logic               s2_last;
  logic [OUT_AW-1:0]  s2_addr;
  logic               adv;

  logic idle;
  assign idle     = !loading && q_count == '0 && !s1_v && !s2_last;
  assign wl_ready = idle;
  assign op_ready = !loading && q_count != 2'd2 && !wl_valid;   // loads first
  assign op_go    = op_valid && op_ready;

  // ---------------- fetch engine ----------------
  logic               f_active, inflight;
  logic [IN_AW-1:0]   in_addr;
  logic [LW-1:0]      to_push;
  logic [WPW-1:0]     words_left;

  bf16_t                          rf_head;
  logic                           rf_empty;
  logic [$clog2(RF_DEPTH+1)-1:0]  rf_free;
  logic                           rf_rd;
  logic [$clog2(LANES+1)-1:0]     rf_wcnt;

  assign rf_wcnt = (32'(to_push) < LANES) ? ($clog2(LANES+1))'(to_push)
                                          : ($clog2(LANES+1))'(LANES);

  input_regfile #(.DEPTH(RF_DEPTH), .LANES(LANES)) u_rf (
    .clk, .rst_n, .flush(1'b0),
    .wr_en(f_rvalid), .wr_cnt(rf_wcnt), .wr_data(f_rdata),
    .rd_en(rf_rd), .rd_data(rf_head), .empty(rf_empty), .free_slots(rf_free)
  );

  assign f_req  = f_active && words_left != '0 && !inflight && 32'(rf_free) >= LANES;
  assign f_addr = in_addr;

  // fetch of the current op ends with the data of its last word
  logic f_done;
  assign f_done = f_active && f_rvalid && words_left == '0;

  // ---------------- issue engine ----------------
  op_t        cur;
  logic [LW-1:0] issued;
  logic       has_op;
  assign cur    = opq[q_head];
  assign has_op = q_count != '0;

  // a finished sum can only be captured if the result register is free
  assign adv    = !(s2_last && r_valid && !r_ready);
  assign rf_rd  = adv && has_op && !rf_empty;
  assign stall  = has_op && rf_empty;
  assign step   = rf_rd;

  // ---------------- decoder + PIM SRAM ----------------
  logic [ROWS-1:0] wl;
  logic [BITS-1:0] sr_rdata;

  pc_decoder #(.ROW_GROUPS(ROW_GROUPS), .GRP(GRP), .TRUNC(TRUNC)) u_dec (
    .en(rf_rd), .t(TW'(issued)), .mant(mant_of(rf_head)),
    .zero(is_zero(rf_head)), .wl
  );

  pim_sram #(.ROWS(ROWS), .BITS(BITS)) u_sram (
    .clk, .we(sr_we), .waddr(sr_waddr), .wdata(sr_wdata), .wmask(sr_wmask),
    .rd_en(rf_rd), .wl, .rdata(sr_rdata)
  );

  // ---------------- ACC units ----------------
  logic [COLS-1:0] col_ovf;
  bf16_t [COLS-1:0] col_res;

  for (genvar c = 0; c < COLS; c++) begin : g_acc
    logic signed [ACC_W-1:0] acc_val;
    acc_unit #(.ACC_W(ACC_W)) u_acc (
      .clk, .rst_n, .clear(1'b0), .valid(s1_v && adv), .first(s1_first),
      .prod_hi(sr_rdata[c*PROD_W + PROD_W - 1 -: MANT_W]),
      .x_sign(s1_x.sign), .x_exp(s1_x.exp),
      .w_sign(s1_w[c][EXP_W]), .w_exp(s1_w[c][EXP_W-1:0]),
      .ebase(s1_ebase), .acc(acc_val), .result(col_res[c]), .ovf(col_ovf[c]),
      .bypassed(bypass[c])
    );
  end

  assign busy = !idle || r_valid;

  // ---------------- sequencing ----------------
  always_ff @(posedge clk) begin
    if (wl_valid && wl_ready) wse[wl_t][wl_col] <= {wl_data.sign, wl_data.exp};
    if (op_go) opq[q_tail] <= '{in_base: op_in_base, len: op_len,
                                out_addr: op_out_addr, ebase: op_ebase};
    if (rf_rd) begin
      s1_x     <= rf_head;
      s1_w     <= wse[TW'(issued)];
      s1_first <= issued == '0;
      s1_last  <= issued + 1'b1 == cur.len;
      s1_ebase <= cur.ebase;
      s1_addr  <= cur.out_addr;
    end
    if (adv) s2_addr <= s1_addr;
    if (s2_last && adv) begin
      r_data <= col_res;
      r_addr <= s2_addr;
      ovf    <= |col_ovf;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      loading     <= 1'b0;
      ld_col      <= '0;
      ld_t        <= '0;
      ld_mant     <= '0;
      ld_line     <= '0;
      q_head      <= 1'b0;
      q_tail      <= 1'b0;
      q_fptr      <= 1'b0;
      q_count     <= '0;
      q_unfetched <= '0;
      f_active    <= 1'b0;
      inflight    <= 1'b0;
      in_addr     <= '0;
      to_push     <= '0;
      words_left  <= '0;
      issued      <= '0;
      s1_v        <= 1'b0;
      s2_last     <= 1'b0;
      r_valid     <= 1'b0;
    end else begin
      // kernel element load: LINES rows, one per cycle
      if (wl_valid && wl_ready) begin
        loading <= 1'b1;
        ld_col  <= wl_col;
        ld_t    <= wl_t;
        ld_mant <= mant_of(wl_data);
        ld_line <= '0;
      end else if (loading) begin
        ld_line <= ld_line + 1'b1;
        if (32'(ld_line) == LINES - 1) loading <= 1'b0;
      end

      // fetch engine: one op after the other, in queue order
      if (f_gnt) begin
        inflight   <= 1'b1;
        in_addr    <= in_addr + 1'b1;
        words_left <= words_left - 1'b1;
      end
      if (f_rvalid) begin
        inflight <= 1'b0;
        to_push  <= to_push - LW'(rf_wcnt);
      end
      begin
        automatic logic       start_new = 1'b0;
        automatic op_t        nxt = opq[q_fptr];
        automatic logic [1:0] unf = q_unfetched + (op_go ? 2'd1 : 2'd0);
        if ((!f_active || f_done) && unf != '0) begin
          start_new = 1'b1;
          if (q_unfetched == '0) nxt = '{in_base: op_in_base, len: op_len,
                                        out_addr: op_out_addr, ebase: op_ebase};
        end
        if (start_new) begin
          f_active    <= 1'b1;
          in_addr     <= nxt.in_base;
          to_push     <= nxt.len;
          words_left  <= WPW'((32'(nxt.len) + LANES - 1) / LANES);
          q_fptr      <= ~q_fptr;
          unf         = unf - 2'd1;
        end else if (f_done) begin
          f_active <= 1'b0;
        end
        q_unfetched <= unf;
      end

      // queue bookkeeping and issue
      begin
        automatic logic deq = rf_rd && (issued + 1'b1 == cur.len);
        if (op_go) q_tail <= ~q_tail;
        if (deq)   q_head <= ~q_head;
        q_count <= q_count + (op_go ? 2'd1 : 2'd0) - (deq ? 2'd1 : 2'd0);
        if (rf_rd) issued <= deq ? '0 : issued + 1'b1;
      end

      // pipeline
      if (adv) begin
        s1_v    <= rf_rd;
        s2_last <= s1_v && s1_last;
      end
      if (s2_last && adv) r_valid <= 1'b1;
      else if (r_ready)   r_valid <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   op_go |-> (op_len != '0 && 32'(op_len) <= ROW_GROUPS));
  assert property (@(posedge clk) disable iff (!rst_n)
                   f_rvalid |-> (f_active && inflight));

endmodule
