// rr_arbiter - round-robin arbiter used by the input and output buses.
//
// gnt is one-hot (or zero when no request) and combinational in req. The
// search starts just after the last granted requester, so every requester
// that keeps requesting is served within N grants. adv = 1 moves the
// priority on past the current grant at the clock edge.
module rr_arbiter #(
  parameter int unsigned N = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 adv,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx
);

  logic [$clog2(N)-1:0] last;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      automatic int unsigned i = (32'(last) + k) % N;
      if (gnt == '0 && req[i]) begin
        gnt[i]  = 1'b1;
        gnt_idx = ($clog2(N))'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) last <= ($clog2(N))'(N - 1);
    else if (adv && gnt != '0) last <= gnt_idx;
  end

  assert property (@(posedge clk) $onehot0(gnt));

endmodule
