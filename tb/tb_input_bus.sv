// tb_input_bus - banks request scratchpad words at random; checks one grant
// per cycle, that the granted bank's address reaches the scratchpad, that the
// data returns to that bank exactly one cycle later, and that no requester
// waits more than NB cycles (round-robin fairness).
module tb_input_bus;
  localparam int unsigned NB = 16, AW = 10, WIDTH = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NB-1:0] req, gnt, rvalid, prev_gnt;
  logic [NB-1:0][AW-1:0] addr;
  logic [WIDTH-1:0] rdata, sp_rdata;
  logic sp_re;
  logic [AW-1:0] sp_raddr, prev_addr;
  int wait_c [NB];
  int checks = 0, failures = 0;

  input_bus #(.NB(NB), .AW(AW), .WIDTH(WIDTH)) dut (.*);

  // scratchpad model: registered read, data = f(address)
  always_ff @(posedge clk) if (sp_re) sp_rdata <= {8{22'h0, sp_raddr}};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; addr = '0; prev_gnt = '0; prev_addr = '0;
    for (int i = 0; i < NB; i++) wait_c[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      // results of the previous grant
      checks++;
      if (rvalid !== prev_gnt) begin failures++; if (failures < 4) $display("k=%0d rvalid %h exp %h", k, rvalid, prev_gnt); end
      if (prev_gnt != '0) begin
        checks++;
        if (rdata !== {8{22'h0, prev_addr}}) failures++;
      end
      // new requests: a requester keeps requesting until granted
      for (int i = 0; i < NB; i++) begin
        if (!req[i] && ($urandom % 3 == 0)) begin
          req[i] = 1; addr[i] = AW'($urandom);
        end
      end
      #1;
      checks++;
      if (!$onehot0(gnt) || (req != '0 && gnt == '0) || ((gnt & ~req) != '0)) failures++;
      if (gnt != '0) begin
        checks++;
        if (!sp_re || sp_raddr !== addr[$clog2(gnt)]) failures++;
      end
      prev_gnt = gnt;
      prev_addr = sp_raddr;
      @(posedge clk);
      #1;
      for (int i = 0; i < NB; i++) begin
        if (prev_gnt[i]) begin req[i] = 0; wait_c[i] = 0; end
        else if (req[i]) begin
          wait_c[i]++;
          if (wait_c[i] > NB) begin failures++; wait_c[i] = 0; end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
