// node_cache: the Node Cache of a search unit.
//
// It keeps recently streamed Node Sets so that queries of the same leaf that
// arrive in later batches need not read the Input Point Buffer again. As in
// the paper, the cache is a small set of entries, each holding the nodes of
// one Node Set; entries are looked up associatively by leaf id, and within an
// entry the nodes are written and read strictly in order, like a FIFO.
//
// Sizing and replacement are this design's choices: NC_ENTRIES entries of up
// to NC_SET_MAX points per search unit (2 x 128 points x 12 bytes = 3 KB, so
// 32 search units hold about 96 KB, within the paper's 128 KB), replaced
// first-in first-out. A Node Set larger than NC_SET_MAX is not cached.
//
// Interface: lookup is combinational (hit, hit_entry). rd_start selects an
// entry and rewinds its read pointer; rd_data is the node at the pointer and
// rd_next advances it. fill_start claims the next victim entry for leaf
// fill_leaf and invalidates it; each fill_we appends one node; fill_done
// marks the entry valid. flush invalidates every entry (new frame).
module node_cache
  import tigris_pkg::*;
#(
  parameter int NC_ENTRIES = 2,
  parameter int NC_SET_MAX = 128,
  localparam int ENW = (NC_ENTRIES > 1) ? $clog2(NC_ENTRIES) : 1,
  localparam int PW  = $clog2(NC_SET_MAX)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           flush,
  input  leaf_t          lookup_leaf,
  output logic           hit,
  output logic [ENW-1:0] hit_entry,
  input  logic           rd_start,
  input  logic [ENW-1:0] rd_entry,
  input  logic           rd_next,
  output point_t         rd_data,
  input  logic           fill_start,
  input  leaf_t          fill_leaf,
  input  logic           fill_we,
  input  point_t         fill_data,
  input  logic           fill_done
);
  point_t         mem [NC_ENTRIES][NC_SET_MAX];
  leaf_t          tag [NC_ENTRIES];
  logic [NC_ENTRIES-1:0] vld;
  logic [ENW-1:0] victim, fe, re;
  logic [PW-1:0]  wp, rp;

  always_comb begin
    hit       = 1'b0;
    hit_entry = '0;
    for (int e = 0; e < NC_ENTRIES; e++)
      if (vld[e] && tag[e] == lookup_leaf && !hit) begin
        hit       = 1'b1;
        hit_entry = ENW'(e);
      end
    rd_data = mem[re][rp];
  end

  always_ff @(posedge clk) begin
    if (fill_we) mem[fe][wp] <= fill_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld    <= '0;
      victim <= '0;
      fe     <= '0;
      re     <= '0;
      wp     <= '0;
      rp     <= '0;
      for (int e = 0; e < NC_ENTRIES; e++) tag[e] <= '0;
    end else begin
      if (fill_start) begin
        fe          <= victim;
        tag[victim] <= fill_leaf;
        vld[victim] <= 1'b0;
        wp          <= '0;
        victim      <= (int'(victim) == NC_ENTRIES - 1) ? '0 : victim + 1'b1;
      end else if (fill_we) begin
        wp <= wp + 1'b1;
      end
      if (fill_done) vld[fe] <= 1'b1;
      if (flush)     vld     <= '0;
      if (rd_start) begin
        re <= rd_entry;
        rp <= '0;
      end else if (rd_next) begin
        rp <= rp + 1'b1;
      end
    end
  end
endmodule
