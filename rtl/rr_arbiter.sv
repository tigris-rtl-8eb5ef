// rr_arbiter: round-robin arbiter, one grant per cycle.
//
// Helper used wherever several units share one port (global-buffer
// partitions, the FE Query Queue, the Query Distribution Network). Grant is
// combinational from req; the priority pointer moves past the granted
// requester when adv (the grant was actually used) is high, so every
// requester is served within N grants. The paper does not describe its
// arbitration; round-robin is this design's choice.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         adv,
  output logic [N-1:0] gnt,
  output logic         any
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr, sel;

  always_comb begin
    gnt = '0;
    any = 1'b0;
    sel = ptr;
    for (int k = 0; k < N; k++) begin
      int unsigned j;
      j = (int'(ptr) + k) % N;
      if (!any && req[j]) begin
        any    = 1'b1;
        sel    = IW'(j);
        gnt[j] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          ptr <= '0;
    else if (adv && any) ptr <= (int'(sel) == N - 1) ? '0 : IW'(int'(sel) + 1);
  end
endmodule
