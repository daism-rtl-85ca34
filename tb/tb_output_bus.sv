// tb_output_bus - banks offer result words at random and hold them until
// ready; checks one write per cycle, that the written address and data are
// the accepted bank's, that every offered word is written exactly once and
// fairness (no bank waits more than NB cycles).
module tb_output_bus;
  localparam int unsigned NB = 16, AW = 10, WIDTH = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NB-1:0] valid, ready;
  logic [NB-1:0][AW-1:0] addr;
  logic [NB-1:0][WIDTH-1:0] data;
  logic sp_we;
  logic [AW-1:0] sp_waddr;
  logic [WIDTH-1:0] sp_wdata;
  int wait_c [NB];
  logic [NB-1:0] taken;
  int offered = 0, written = 0, idx;
  int checks = 0, failures = 0;

  output_bus #(.NB(NB), .AW(AW), .WIDTH(WIDTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = '0; addr = '0; data = '0;
    for (int i = 0; i < NB; i++) wait_c[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      for (int i = 0; i < NB; i++) begin
        if (!valid[i] && ($urandom % 4 == 0) && k < 3900) begin
          valid[i] = 1; addr[i] = AW'($urandom);
          for (int j = 0; j < WIDTH / 32; j++) data[i][j*32 +: 32] = $urandom;
          offered++;
        end
      end
      #1;
      checks++;
      if (!$onehot0(ready) || (valid != '0 && ready == '0) || ((ready & ~valid) != '0)
          || sp_we !== (valid != '0)) begin
        failures++;
        if (failures < 4) $display("k=%0d valid %h ready %h", k, valid, ready);
      end
      if (ready != '0) begin
        idx = $clog2(ready);
        written++;
        checks++;
        if (sp_waddr !== addr[idx] || sp_wdata !== data[idx]) begin
          failures++;
          if (failures < 4) $display("k=%0d data mismatch idx %0d", k, idx);
        end
      end
      taken = ready;
      @(posedge clk);
      #1;
      for (int i = 0; i < NB; i++) begin
        if (taken[i]) begin valid[i] = 0; wait_c[i] = 0; end
        else if (valid[i]) begin
          wait_c[i]++;
          if (wait_c[i] > NB) begin failures++; if (failures < 4) $display("k=%0d wait %0d", k, i); wait_c[i] = 0; end
        end
      end
    end
    checks++;
    if (written != offered) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
