// rr_arbiter: round-robin arbiter over N requesters.
//
// Combinational grant: the first requester at or after the priority pointer
// wins. When `advance` is high the pointer moves to one past the winner, so
// the winner becomes the lowest priority next time. Used by the wormhole
// switches of the exchanger and the crossbars; the round-robin policy is this
// design's choice (the arbitration policy of the machine is not described).
module rr_arbiter #(
  parameter int N = 4,
  localparam int IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          advance,
  output logic          any,
  output logic [IW-1:0] idx
);
  logic [IW-1:0] ptr;

  always_comb begin
    any = 1'b0;
    idx = '0;
    for (int k = 0; k < N; k++) begin
      int unsigned i;
      i = int'(ptr) + k;
      if (i >= N) i = i - N;
      if (!any && req[i]) begin
        any = 1'b1;
        idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              ptr <= '0;
    else if (advance && any) ptr <= (int'(idx) == N-1) ? '0 : idx + 1'b1;
  end
endmodule
