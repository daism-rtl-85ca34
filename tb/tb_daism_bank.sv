// tb_daism_bank - one bank at its default size (16 kernels x 32 steps,
// PC3_tr). The testbench plays the input bus (a scratchpad model with
// grants that are immediate or randomly delayed) and the output bus.
// It loads random bfloat16 kernels, with some zero elements, runs passes of
// random length over random inputs, with some zeros, and compares the 16
// results with sums of reference approximate products formed in real
// arithmetic. It also checks the kernel-load time (LINES + 1 = 9 cycles per
// element), the pass latency with an idle bus (K + 5 cycles from the
// accepted operation to the result), that stalls happen when the bus is
// slow, that a result is held until accepted, and that two queued passes
// run back to back (results exactly K cycles apart).
module tb_daism_bank;
  import daism_pkg::*;
  import tb_util_pkg::*;
  localparam int unsigned COLS = 16, RG = 32, LANES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wl_valid, wl_ready, op_valid, op_ready;
  logic [3:0] wl_col;
  logic [4:0] wl_t;
  bf16_t wl_data;
  logic [9:0] op_in_base, op_out_addr, r_addr, f_addr;
  logic [5:0] op_len;
  logic [8:0] op_ebase;
  logic f_req, f_gnt, f_rvalid, r_valid, r_ready, ovf, busy, stall, step;
  bf16_t [LANES-1:0] f_rdata;
  bf16_t [COLS-1:0] r_data;
  logic [COLS-1:0] bypass;

  daism_bank dut (.*);

  logic [15:0] kern [RG][COLS];
  logic [15:0] spad [64][LANES];
  bit slow_bus, slow_out;
  int checks = 0, failures = 0, nstall = 0, nbypass = 0, cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (stall) nstall++;
  always @(posedge clk) if (bypass != '0) nbypass++;

  // input bus model
  logic gnt_en;
  always @(negedge clk) gnt_en = slow_bus ? ($urandom % 4 == 0) : 1'b1;
  assign f_gnt = f_req && gnt_en;
  always_ff @(posedge clk) begin
    f_rvalid <= f_gnt;
    if (f_gnt) for (int l = 0; l < LANES; l++) f_rdata[l] <= spad[f_addr[5:0]][l];
  end
  always @(negedge clk) r_ready = slow_out ? ($urandom % 5 == 0) : 1'b1;

  function automatic logic [15:0] rnd_bf16(int zero_pct);
    logic [15:0] v;
    v = {1'($urandom), 8'(124 + $urandom % 8), 7'($urandom)};
    if (int'($urandom % 100) < zero_pct) v[14:7] = 0;
    return v;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, k, base;
    real sum;
    logic [15:0] expv;
    wl_valid = 0; op_valid = 0; wl_col = 0; wl_t = 0; wl_data = '0;
    op_in_base = 0; op_len = 0; op_out_addr = 0; op_ebase = 0;
    slow_bus = 0; slow_out = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- kernel load ----
    for (int t = 0; t < RG; t++) begin
      for (int c = 0; c < COLS; c++) begin
        kern[t][c] = rnd_bf16(10);
        @(negedge clk);
        wl_valid = 1; wl_col = 4'(c); wl_t = 5'(t); wl_data = kern[t][c];
        while (!wl_ready) @(negedge clk);
        t0 = cyc;
        @(negedge clk);
        wl_valid = 0;
        while (!wl_ready) @(negedge clk);
        if (t == 0 && c < 4) begin
          checks++;
          if (cyc - t0 != 9) begin
            failures++;
            $display("load took %0d cycles", cyc - t0);
          end
        end
      end
    end
    // ---- passes ----
    for (int run = 0; run < 60; run++) begin
      slow_bus = (run % 3 == 1);
      slow_out = (run % 4 == 2);
      k = (run < 4) ? (1 + run * 10) : 1 + ($urandom % RG);
      if (run == 4) k = RG;
      base = 2 * (run % 16);
      for (int i = 0; i < k; i++) spad[base + i / LANES][i % LANES] = rnd_bf16(10);
      @(negedge clk);
      op_valid = 1; op_in_base = 10'(base); op_len = 6'(k);
      op_out_addr = 10'(run); op_ebase = 9'd248;
      while (!op_ready) @(negedge clk);
      t0 = cyc;
      @(negedge clk);
      op_valid = 0;
      while (!r_valid) begin @(negedge clk); #1; end
      if (!slow_bus) begin
        checks++;
        if (cyc - t0 != k + 5) begin
          failures++;
          $display("run %0d: K=%0d took %0d cycles", run, k, cyc - t0);
        end
      end
      // result held until accepted
      #1;
      while (!r_ready) begin
        @(negedge clk);
        #1;
        checks++;
        if (!r_valid) failures++;
      end
      checks++;
      if (r_addr != 10'(run) || ovf) begin
        failures++;
        $display("run %0d: r_addr %0d ovf %0d", run, r_addr, ovf);
      end
      for (int c = 0; c < COLS; c++) begin
        sum = 0.0;
        for (int i = 0; i < k; i++)
          sum += approx_prod(kern[i][c], spad[base + i / LANES][i % LANES]);
        expv = bf16_trunc(sum);
        checks++;
        if (r_data[c] !== expv) begin
          failures++;
          if (failures < 6) $display("run %0d col %0d: got %h exp %h", run, c, r_data[c], expv);
        end
      end
      @(negedge clk);
    end
    // back-to-back passes: the second result follows the first after
    // exactly K = 32 cycles (no gap between passes)
    begin
      int ta, tb2;
      slow_bus = 0; slow_out = 0;
      for (int i = 0; i < 2 * RG; i++) spad[40 + i / LANES][i % LANES] = rnd_bf16(0);
      @(negedge clk);
      op_valid = 1; op_in_base = 10'd40; op_len = 6'(RG); op_out_addr = 10'd100; op_ebase = 9'd248;
      #1; while (!op_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      op_in_base = 10'd42; op_out_addr = 10'd101;
      #1; while (!op_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      op_valid = 0;
      #1; while (!r_valid) begin @(negedge clk); #1; end
      ta = cyc;
      checks++; if (r_addr != 10'd100) failures++;
      @(negedge clk); #1;
      while (!r_valid) begin @(negedge clk); #1; end
      tb2 = cyc;
      checks++; if (r_addr != 10'd101) failures++;
      checks++;
      if (tb2 - ta != RG) begin
        failures++;
        $display("back-to-back passes %0d cycles apart", tb2 - ta);
      end
      for (int c = 0; c < COLS; c++) begin
        sum = 0.0;
        for (int i = 0; i < RG; i++)
          sum += approx_prod(kern[i][c], spad[42 + i / LANES][i % LANES]);
        checks++;
        if (r_data[c] !== bf16_trunc(sum)) failures++;
      end
    end
    checks++; if (nstall == 0) failures++;
    checks++; if (nbypass == 0) failures++;
    $display("stalls=%0d bypass_steps=%0d", nstall, nbypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
