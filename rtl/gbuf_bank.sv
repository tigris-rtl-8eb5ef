// gbuf_bank: one partition of the global buffer (Input Point Buffer, Query
// Buffer, Query Stack Buffer or Result Buffer) together with its slice of the
// on-chip bus.
//
// The paper shows a single global buffer reached by all recursion units and
// search units over a shared bus, but does not give ports, banking or
// arbitration. Here each partition is a single-ported SRAM (an array) with
// NREQ requesters and a round-robin arbiter: a requester raises req with we,
// addr and wdata and holds them until gnt. A granted read returns rdata one
// cycle later, flagged by rvalid[i] for that requester only; a granted write
// completes at the same clock edge. One access is served per cycle.
module gbuf_bank #(
  parameter int NREQ  = 97,
  parameter int DEPTH = 131072,
  parameter int WIDTH = 96,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NREQ-1:0]            req,
  input  logic [NREQ-1:0]            we,
  input  logic [NREQ-1:0][AW-1:0]    addr,
  input  logic [NREQ-1:0][WIDTH-1:0] wdata,
  output logic [NREQ-1:0]            gnt,
  output logic [NREQ-1:0]            rvalid,
  output logic [WIDTH-1:0]           rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic             any;
  logic [AW-1:0]    a;
  logic             w;
  logic [WIDTH-1:0] d;

  rr_arbiter #(.N(NREQ)) u_arb (
    .clk, .rst_n, .req, .adv(1'b1), .gnt, .any
  );

  always_comb begin
    a = '0;
    w = 1'b0;
    d = '0;
    for (int i = 0; i < NREQ; i++) begin
      if (gnt[i]) begin
        a = addr[i];
        w = we[i];
        d = wdata[i];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (any && w) mem[a] <= d;
    if (any && !w) rdata <= mem[a];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= '0;
    else        rvalid <= gnt & ~we;
  end

  // Exactly one requester is served per cycle.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
