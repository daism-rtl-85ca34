// tb_acc_unit - accumulates random signed products and compares the
// accumulator, scaled by the block exponent, and its bfloat16 conversion with
// sums formed in real arithmetic. Also checks zero bypass, clear, restart
// with first (odd runs, whose previous sum is left in place), and
// saturation with the sticky overflow flag.
module tb_acc_unit;
  import daism_pkg::*;
  import tb_util_pkg::*;
  localparam int unsigned ACC_W = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, valid, first, x_sign, w_sign, ovf, bypassed;
  logic [7:0] prod_hi, x_exp, w_exp;
  logic [8:0] ebase;
  logic signed [ACC_W-1:0] acc;
  bf16_t result;
  real sum, p, scale;
  int checks = 0, failures = 0, nbyp = 0;
  logic nxt_first = 0;

  acc_unit #(.ACC_W(ACC_W)) dut (.*);

  task automatic drive(logic [7:0] ph, logic xs, logic [7:0] xe, logic ws, logic [7:0] we);
    @(negedge clk);
    valid = 1; prod_hi = ph; x_sign = xs; x_exp = xe; w_sign = ws; w_exp = we;
    first = nxt_first; nxt_first = 0;
    @(negedge clk);
    valid = 0; first = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; valid = 0; first = 0; prod_hi = 0; x_sign = 0; w_sign = 0; x_exp = 0; w_exp = 0;
    ebase = 9'd248;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 300; run++) begin
      // even runs restart with clear, odd runs with first on step 0
      @(negedge clk); clear = (run % 2 == 0); ebase = 9'(244 + ($urandom % 8));
      @(negedge clk); clear = 0;
      nxt_first = (run % 2 == 1);
      sum = 0.0;
      for (int s = 0; s < 32; s++) begin
        logic [7:0] ph, xe, we;
        logic xs, ws;
        ph = 8'($urandom) | 8'h40;
        xs = 1'($urandom); ws = 1'($urandom);
        xe = 8'(124 + ($urandom % 8)); we = 8'(124 + ($urandom % 8));
        if ($urandom % 10 == 0) xe = 0;
        if ($urandom % 10 == 0) we = 0;
        if (xe == 0 || we == 0) nbyp++;
        else begin
          p = real'(ph) * 256.0 * pow2(int'(xe) + int'(we) - 268);
          sum += (xs ^ ws) ? -p : p;
        end
        drive(ph, xs, xe, ws, we);
      end
      scale = pow2(int'(ebase) - 268);
      checks++;
      if (real'(acc) * scale != sum) begin
        failures++;
        if (failures < 5) $display("run %0d acc %0d sum %f", run, acc, sum / scale);
      end
      checks++;
      if (result !== bf16_trunc(sum)) begin
        failures++;
        if (failures < 5) $display("run %0d result %h exp %h", run, result, bf16_trunc(sum));
      end
      checks++;
      if (ovf) failures++;
    end
    // saturation: positive products with a large exponent
    @(negedge clk); clear = 1; ebase = 9'd200;
    @(negedge clk); clear = 0;
    for (int s = 0; s < 4; s++) drive(8'hFF, 0, 8'd111, 0, 8'd111);
    checks++; if (!ovf) failures++;
    checks++; if (acc !== ACC_W'((64'(1) << (ACC_W - 1)) - 1)) failures++;
    // negative saturation
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    checks++; if (ovf || acc !== 0) failures++;
    for (int s = 0; s < 40; s++) drive(8'hFF, 1, 8'd110, 0, 8'd110);
    checks++; if (!ovf) failures++;
    checks++; if (acc !== -ACC_W'((64'(1) << (ACC_W - 1)) - 1)) failures++;
    checks++; if (nbyp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
