// tb_input_regfile - random wide writes and single reads against a queue
// model: order, empty flag, free-slot count, simultaneous write and read,
// and flush.
module tb_input_regfile;
  import daism_pkg::*;
  localparam int unsigned DEPTH = 32, LANES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, wr_en, rd_en, empty;
  logic [4:0] wr_cnt;
  bf16_t [LANES-1:0] wr_data;
  bf16_t rd_data;
  logic [5:0] free_slots;
  logic [15:0] q[$];
  int checks = 0, failures = 0, nwr;

  input_regfile #(.DEPTH(DEPTH), .LANES(LANES)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flush = 0; wr_en = 0; rd_en = 0; wr_cnt = '0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      // check state
      checks++;
      if (empty !== (q.size() == 0)) failures++;
      checks++;
      if (32'(free_slots) != DEPTH - q.size()) failures++;
      if (q.size() > 0) begin
        checks++;
        if (rd_data !== q[0]) failures++;
      end
      // next stimulus
      flush = (k % 997 == 500);
      rd_en = ($urandom % 3) != 0;
      nwr = 1 + ($urandom % LANES);
      wr_en = ($urandom % 4 == 0) && (nwr <= DEPTH - q.size());
      wr_cnt = 5'(nwr);
      for (int l = 0; l < LANES; l++) wr_data[l] = 16'($urandom);
      @(posedge clk);
      #1;
      if (flush) q.delete();
      else begin
        if (rd_en && q.size() > 0) void'(q.pop_front());
        if (wr_en) for (int l = 0; l < nwr; l++) q.push_back(wr_data[l]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
