// leader_buffer: the Leader Buffer of a search unit (approximate search).
//
// For each leaf node it keeps up to LB_ENTRIES leader queries: the leader's
// query point and the nearest point its exact search of that leaf found.
// The paper caps the group at 16 leaders per leaf and simply stops adding
// once full; this module does the same and counts the dropped inserts.
//
// Organisation (this design's choice, the paper gives none): LB_SLOTS slots,
// each tagged with a leaf id and holding LB_ENTRIES entries. A leaf maps to
// slot (leaf / NSU) mod LB_SLOTS; a leaf that finds its slot tagged with a
// different leaf takes the slot over and starts an empty group. Reads are
// combinational (count and entry rd_idx of the slot of rd_leaf); an insert
// takes effect at the next clock edge. flush empties every group (new frame).
module leader_buffer
  import tigris_pkg::*;
#(
  parameter int NSU        = 32,
  parameter int LB_SLOTS   = 32,
  parameter int LB_ENTRIES = 16,
  localparam int SLW = (LB_SLOTS > 1) ? $clog2(LB_SLOTS) : 1,
  localparam int EW  = $clog2(LB_ENTRIES),
  localparam int SUW = (NSU > 1) ? $clog2(NSU) : 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flush,
  input  leaf_t         rd_leaf,
  input  logic [EW-1:0] rd_idx,
  output logic [EW:0]   rd_count,
  output leader_t       rd_entry,
  input  logic          ins_valid,
  input  leaf_t         ins_leaf,
  input  leader_t       ins_entry,
  output logic [31:0]   cnt_added,
  output logic [31:0]   cnt_dropped
);
  leader_t       mem   [LB_SLOTS][LB_ENTRIES];
  leaf_t         tag   [LB_SLOTS];
  logic [EW:0]   cnt   [LB_SLOTS];
  logic [SLW-1:0] rs, is;

  function automatic logic [SLW-1:0] slot_of(input leaf_t l);
    leaf_t s;
    s = l >> SUW;
    return SLW'(s % LB_SLOTS);
  endfunction

  always_comb begin
    rs       = slot_of(rd_leaf);
    is       = slot_of(ins_leaf);
    rd_count = (tag[rs] == rd_leaf) ? cnt[rs] : '0;
    rd_entry = mem[rs][rd_idx];
  end

  always_ff @(posedge clk) begin
    if (ins_valid && !flush) begin
      if (tag[is] != ins_leaf || cnt[is] == '0) mem[is][0] <= ins_entry;
      else if (int'(cnt[is]) < LB_ENTRIES)       mem[is][EW'(cnt[is])] <= ins_entry;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LB_SLOTS; s++) begin
        tag[s] <= '0;
        cnt[s] <= '0;
      end
      cnt_added   <= '0;
      cnt_dropped <= '0;
    end else if (flush) begin
      for (int s = 0; s < LB_SLOTS; s++) cnt[s] <= '0;
    end else if (ins_valid) begin
      if (tag[is] != ins_leaf) begin
        tag[is]   <= ins_leaf;
        cnt[is]   <= (EW+1)'(1);
        cnt_added <= cnt_added + 1;
      end else if (int'(cnt[is]) < LB_ENTRIES) begin
        cnt[is]   <= cnt[is] + 1'b1;
        cnt_added <= cnt_added + 1;
      end else begin
        cnt_dropped <= cnt_dropped + 1;
      end
    end
  end
endmodule
