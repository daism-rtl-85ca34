// tb_scratchpad - random writes and reads against a model, with the
// one-cycle registered read and read-during-write returning old data.
module tb_scratchpad;
  localparam int unsigned DEPTH = 1024, WIDTH = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [9:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata, expv;
  logic [WIDTH-1:0] model [DEPTH];
  logic valid [DEPTH];
  int checks = 0, failures = 0;

  scratchpad #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) valid[i] = 0;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int k = 0; k < 6000; k++) begin
      @(negedge clk);
      we = ($urandom % 2) == 0;
      waddr = 10'($urandom % 64);
      for (int i = 0; i < WIDTH / 32; i++) wdata[i*32 +: 32] = $urandom;
      re = 1;
      raddr = (k % 3 == 0) ? waddr : 10'($urandom % 64);
      expv = model[raddr];
      @(posedge clk);
      #1;
      if (valid[raddr]) begin
        checks++;
        if (rdata !== expv) failures++;
      end
      if (we) begin model[waddr] = wdata; valid[waddr] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
