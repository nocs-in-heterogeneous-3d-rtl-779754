// rr_arbiter: round-robin arbiter, one per router output port.
//
// grant is a one-hot pick among req, combinational. The search starts at the
// requester after the last one granted, so every requester is served within
// N grants. The pointer moves only in a cycle where en (the layer's clock
// enable) and advance (the grant was used) are both high. Reset puts the
// pointer at requester 0. The paper names decentralised arbiters for its
// router but not their policy; round robin is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 7
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr_q;
  logic [IW-1:0] winner;
  logic          found;

  always_comb begin
    grant  = '0;
    winner = '0;
    found  = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned idx;
      idx = int'(ptr_q) + k;
      if (idx >= N) idx = idx - N;
      if (!found && req[idx]) begin
        found       = 1'b1;
        grant[idx]  = 1'b1;
        winner      = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        ptr_q <= '0;
    else if (en && advance && found)   ptr_q <= (int'(winner) == N - 1) ? '0 : winner + 1'b1;
  end

  // At most one grant, and only to a requester.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant) && ((grant & ~req) == '0));

endmodule
