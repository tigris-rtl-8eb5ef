// tb_mem_model: behavioural single-requester memory used by the unit
// testbenches in place of a global-buffer partition. It follows the same
// protocol as gbuf_bank (req held until gnt, read data one cycle after the
// grant with rvalid) and grants at once, or, with STALL set, only on about
// half of the cycles. The array is public so a testbench can preload and
// inspect it directly.
module tb_mem_model #(
  parameter int DEPTH = 64,
  parameter int WIDTH = 32,
  parameter bit STALL = 1'b0,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             req,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic             gnt,
  output logic             rvalid,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic coin = 1'b1;

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  initial rvalid = 1'b0;

  always @(posedge clk) coin <= STALL ? 1'($urandom) : 1'b1;
  assign gnt = req && coin;

  always @(posedge clk) begin
    rvalid <= gnt && !we;
    if (gnt && we)  mem[addr] <= wdata;
    if (gnt && !we) rdata <= mem[addr];
  end
endmodule
