// tb_daism_top - end-to-end test of the whole accelerator at its default
// size (16 banks x 16 kernels x 32 steps, PC3_tr, bfloat16).
//
// 1. Kernel preload: every bank gets 16 random kernels of 32 elements
//    (some elements zero) through the load port.
// 2. Phase A, a convolution-like pass: 3 operations per bank of length 27
//    (a 3x3x3 kernel, as in the first layer of VGG), inputs with some zeros.
// 3. Phase B, throughput: 4 operations per bank of the full length 32,
//    issued back to back; the number of steps per cycle is checked against
//    the one-input-per-bank-per-cycle rate.
// 4. One operation with an exponent window too small for its products, to
//    saturate the accumulators.
// All results are read from the outputs scratchpad and compared with sums of
// reference approximate products formed in real arithmetic. The test counts
// how often each mechanism happened: element preloads, input-bus stalls,
// output-bus waits, zero bypasses, accumulator overflow and each of the four
// pre-computed PC3 lines (selected by the two multiplier bits below the
// hidden one); one that never happened is a failure.
module tb_daism_top;
  import daism_pkg::*;
  import tb_util_pkg::*;
  localparam int unsigned NB = 16, COLS = 16, RG = 32, LANES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_we, out_re, wl_valid, wl_ready, op_valid, op_ready;
  logic [9:0] in_waddr, out_raddr, op_in_base, op_out_addr;
  bf16_t [LANES-1:0] in_wdata;
  bf16_t [COLS-1:0] out_rdata;
  logic [3:0] wl_bank, wl_col, op_bank;
  logic [4:0] wl_t;
  bf16_t wl_data;
  logic [5:0] op_len;
  logic [8:0] op_ebase;
  logic [NB-1:0] bank_busy, ovf_flags, ev_step, ev_stall, ev_out_wait, ev_bypass;

  daism_top dut (.*);

  logic [15:0] kern [NB][RG][COLS];
  logic [15:0] inp  [1024][LANES];
  int op_bank_of [64], op_len_of [64], op_base_of [64];
  int checks = 0, failures = 0, cyc = 0;
  int n_load = 0, n_stall = 0, n_wait = 0, n_bypass = 0, n_steps = 0;
  int n_comb [4];
  int nops = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    n_steps  <= n_steps + $countones(ev_step);
    n_stall  <= n_stall + $countones(ev_stall);
    n_wait   <= n_wait + $countones(ev_out_wait);
    n_bypass <= n_bypass + $countones(ev_bypass);
  end

  function automatic logic [15:0] rnd_bf16(int zero_pct);
    logic [15:0] v;
    v = {1'($urandom), 8'(124 + $urandom % 8), 7'($urandom)};
    if (int'($urandom % 100) < zero_pct) v[14:7] = 0;
    return v;
  endfunction

  task automatic write_vec(int base, int k, int zero_pct, int exp_hi);
    for (int w = 0; w < (k + LANES - 1) / LANES; w++) begin
      for (int l = 0; l < LANES; l++) begin
        inp[base + w][l] = rnd_bf16(zero_pct);
        if (exp_hi != 0 && inp[base + w][l][14:7] != 0) inp[base + w][l][14:7] = 8'(exp_hi);
        if (w * LANES + l < k && inp[base + w][l][14:7] != 0)
          n_comb[inp[base + w][l][6:5]]++;
      end
      @(negedge clk);
      in_we = 1; in_waddr = 10'(base + w);
      for (int l = 0; l < LANES; l++) in_wdata[l] = inp[base + w][l];
      @(negedge clk);
      in_we = 0;
    end
  endtask

  task automatic issue(int bank, int base, int k, int ebase);
    @(negedge clk);
    op_valid = 1; op_bank = 4'(bank); op_in_base = 10'(base); op_len = 6'(k);
    op_out_addr = 10'(nops); op_ebase = 9'(ebase);
    #1;
    while (!op_ready) begin @(negedge clk); #1; end
    op_bank_of[nops] = bank; op_len_of[nops] = k; op_base_of[nops] = base;
    nops++;
    // op_valid stays high: the next issue changes the fields at the next
    // falling edge, so back-to-back issues take one cycle each
  endtask

  task automatic end_issue();
    @(negedge clk);
    op_valid = 0;
  endtask

  task automatic wait_idle();
    repeat (3) @(negedge clk);
    while (bank_busy != '0) @(negedge clk);
  endtask

  task automatic check_results(int first, int last);
    real sum;
    logic [15:0] expv;
    for (int j = first; j < last; j++) begin
      @(negedge clk);
      out_re = 1; out_raddr = 10'(j);
      @(negedge clk);
      out_re = 0;
      for (int c = 0; c < COLS; c++) begin
        sum = 0.0;
        for (int i = 0; i < op_len_of[j]; i++)
          sum += approx_prod(kern[op_bank_of[j]][i][c],
                             inp[op_base_of[j] + i / LANES][i % LANES]);
        expv = bf16_trunc(sum);
        checks++;
        if (out_rdata[c] !== expv) begin
          failures++;
          if (failures < 6) $display("op %0d col %0d: got %h expected %h", j, c, out_rdata[c], expv);
        end
      end
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, s0, s1;
    for (int i = 0; i < 4; i++) n_comb[i] = 0;
    in_we = 0; out_re = 0; wl_valid = 0; op_valid = 0;
    in_waddr = 0; out_raddr = 0; in_wdata = '0; wl_bank = 0; wl_col = 0; wl_t = 0;
    wl_data = '0; op_bank = 0; op_in_base = 0; op_len = 0; op_out_addr = 0; op_ebase = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1. kernel preload ----
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < RG; t++)
        for (int c = 0; c < COLS; c++) begin
          kern[b][t][c] = rnd_bf16(8);
          @(negedge clk);
          wl_valid = 1; wl_bank = 4'(b); wl_col = 4'(c); wl_t = 5'(t);
          wl_data = kern[b][t][c];
          #1;
          while (!wl_ready) begin @(negedge clk); #1; end
          n_load++;
          @(negedge clk);
          wl_valid = 0;
        end
    $display("preload done at cycle %0d", cyc);

    // ---- 2. phase A: length-27 passes ----
    for (int r = 0; r < 3; r++)
      for (int b = 0; b < NB; b++) write_vec(2 * (r * NB + b), 27, 10, 0);
    for (int r = 0; r < 3; r++)
      for (int b = 0; b < NB; b++) issue(b, 2 * (r * NB + b), 27, 248);
    end_issue();
    wait_idle();
    check_results(0, nops);
    checks++;
    if (ovf_flags != '0) failures++;

    // ---- 3. phase B: throughput with full-length passes ----
    for (int r = 0; r < 4; r++)
      for (int b = 0; b < NB; b++) write_vec(100 + 2 * (r * NB + b), 32, 0, 0);
    t0 = nops;
    s0 = n_steps; t1 = cyc;
    for (int r = 0; r < 4; r++)
      for (int b = 0; b < NB; b++) issue(b, 100 + 2 * (r * NB + b), 32, 248);
    end_issue();
    wait_idle();
    s1 = n_steps - s0; t1 = cyc - t1;
    $display("phase B: %0d steps (x%0d MACs) in %0d cycles: %0f MACs/cycle",
             s1, COLS, t1, real'(s1 * COLS) / real'(t1));
    checks++;
    if (s1 != 4 * NB * 32) failures++;
    // at least 80% of the peak of one input per bank per cycle over the
    // whole phase; passes follow each other without gaps, so the loss is
    // the start-up (first fetches of 16 banks over one bus) and the drain
    checks++;
    if (real'(s1) < 0.8 * real'(NB) * real'(t1)) begin
      failures++;
      $display("throughput below 80%% of peak");
    end
    check_results(t0, nops);

    // ---- 4. overflow ----
    write_vec(300, 32, 0, 250);
    issue(5, 300, 32, 200);
    end_issue();
    wait_idle();
    checks++;
    if (ovf_flags != 16'h0020) begin
      failures++;
      $display("ovf_flags %h", ovf_flags);
    end

    // ---- mechanism coverage ----
    $display("preloads=%0d stalls=%0d out_waits=%0d bypass=%0d ovf=%0d lines A=%0d A+C=%0d A+B=%0d A+B+C=%0d",
             n_load, n_stall, n_wait, n_bypass, $countones(ovf_flags),
             n_comb[0], n_comb[1], n_comb[2], n_comb[3]);
    checks++; if (n_load != NB * RG * COLS) failures++;
    checks++; if (n_stall == 0) failures++;
    checks++; if (n_wait == 0) failures++;
    checks++; if (n_bypass == 0) failures++;
    checks++; if (ovf_flags == '0) failures++;
    for (int i = 0; i < 4; i++) begin checks++; if (n_comb[i] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
