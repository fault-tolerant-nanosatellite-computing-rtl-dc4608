// rr_arbiter: round-robin arbiter used by the crossbars.
//
// Combinational grant: among the asserted request bits, the first one at or
// after the position following the last winner is granted (one-hot). The
// last-winner pointer advances only when 'advance' is high, i.e. when the
// owner of the grant actually takes it. Every requester that keeps asking is
// therefore served within N grants. Helper module; the arbitration policy is
// this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;

  always_comb begin
    grant = '0;
    for (int k = 1; k <= N; k++) begin
      logic [IW:0] idx;
      idx = {1'b0, last} + (IW+1)'(k);
      if (int'(idx) >= N) idx = idx - (IW+1)'(N);
      if (grant == '0 && req[idx[IW-1:0]]) grant[idx[IW-1:0]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= IW'(N - 1);
    end else if (advance) begin
      for (int i = 0; i < N; i++)
        if (grant[i]) last <= IW'(i);
    end
  end

endmodule
