// fe_query_queue: the FE Query Queue (FQQ). It holds queries waiting for a
// recursion unit: new queries from the host and queries that a search unit
// has finished with a leaf node and sends back for further traversal.
//
// A single FIFO with DEPTH entries of fq_token_t. Pushes come from NPUSH
// sources through a round-robin arbiter (one push per cycle, push_ready[i] is
// the grant); pops go to NPOP recursion units through a second round-robin
// arbiter (one pop per cycle): a unit raises pop_req and receives the head in
// the cycle pop_gnt[i] is high, which also removes it. The paper sizes the FQQ
// to hold every query of a frame (1.5 MB for about 130,000 points), so it can
// never overflow while at most DEPTH queries are in flight; the single push
// and pop port per cycle is this design's choice.
module fe_query_queue
  import tigris_pkg::*;
#(
  parameter int NPUSH = 33,
  parameter int NPOP  = 64,
  parameter int DEPTH = 131072,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NPUSH-1:0]      push_valid,
  input  fq_token_t [NPUSH-1:0] push_token,
  output logic [NPUSH-1:0]      push_ready,
  input  logic [NPOP-1:0]       pop_req,
  output logic [NPOP-1:0]       pop_gnt,
  output fq_token_t             pop_token,
  output logic [AW:0]           count
);
  fq_token_t mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic push_any, pop_any, do_push, do_pop, full, empty;
  logic [NPUSH-1:0] pgnt;
  logic [NPOP-1:0]  ognt;
  fq_token_t in_tok;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);

  rr_arbiter #(.N(NPUSH)) u_push_arb (.clk, .rst_n, .req(push_valid & {NPUSH{!full}}),
                                     .adv(1'b1), .gnt(pgnt), .any(push_any));
  rr_arbiter #(.N(NPOP))  u_pop_arb  (.clk, .rst_n, .req(pop_req & {NPOP{!empty}}),
                                     .adv(1'b1), .gnt(ognt), .any(pop_any));

  assign push_ready = pgnt;
  assign pop_gnt    = ognt;
  assign do_push    = push_any;
  assign do_pop     = pop_any;
  assign pop_token  = mem[rd_ptr];

  always_comb begin
    in_tok = '0;
    for (int i = 0; i < NPUSH; i++) if (pgnt[i]) in_tok = push_token[i];
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= in_tok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (int'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (int'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(full && |push_ready));
endmodule
