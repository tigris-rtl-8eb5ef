// query_dist_net: the Query Distribution Network between the front-end and
// the back-end. It carries a query whose top-tree search reached a leaf from
// its recursion unit to the BE Query Buffer of the search unit that owns the
// leaf.
//
// Following the paper, the mapping is hard-wired: the low-order log2(NSU)
// bits of the leaf id select the search unit. For every search unit a
// round-robin arbiter picks one of the recursion units that target it, so up
// to NSU transfers happen per cycle. in_ready[i] is high in the cycle
// recursion unit i's token is taken; out_valid[j]/out_token[j] is accepted
// when out_ready[j] is high. Purely combinational apart from the arbiters'
// priority pointers; the arbitration is this design's choice.
module query_dist_net
  import tigris_pkg::*;
#(
  parameter int NRU = 64,
  parameter int NSU = 32,
  localparam int SW = (NSU > 1) ? $clog2(NSU) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NRU-1:0]      in_valid,
  input  be_token_t [NRU-1:0] in_token,
  output logic [NRU-1:0]      in_ready,
  output logic [NSU-1:0]      out_valid,
  output be_token_t [NSU-1:0] out_token,
  input  logic [NSU-1:0]      out_ready
);
  logic [NSU-1:0][NRU-1:0] req, gnt;

  function automatic int unsigned target(input be_token_t t);
    return (NSU > 1) ? int'(t.leaf[SW-1:0]) : 0;
  endfunction

  always_comb begin
    for (int j = 0; j < NSU; j++)
      for (int i = 0; i < NRU; i++)
        req[j][i] = in_valid[i] && (target(in_token[i]) == j);
  end

  for (genvar j = 0; j < NSU; j++) begin : g_su
    logic any;
    rr_arbiter #(.N(NRU)) u_arb (.clk, .rst_n, .req(req[j]), .adv(out_ready[j]),
                                 .gnt(gnt[j]), .any(any));
    always_comb begin
      out_valid[j] = any;
      out_token[j] = '0;
      for (int i = 0; i < NRU; i++) if (gnt[j][i]) out_token[j] = in_token[i];
    end
  end

  always_comb begin
    in_ready = '0;
    for (int j = 0; j < NSU; j++)
      for (int i = 0; i < NRU; i++)
        if (gnt[j][i] && out_ready[j]) in_ready[i] = 1'b1;
  end
endmodule
