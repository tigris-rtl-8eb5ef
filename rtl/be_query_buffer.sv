// be_query_buffer: the BE Query Buffer (BQB) of a search unit together with
// its Query Issue Logic.
//
// The BQB holds DEPTH queries (128 in the paper: 1 KB per search unit) that
// the front-end sent to this search unit. The issue logic forms batches for
// the Multiple-Query-Single-NodeSet (MQSN) back-end: it takes the first query
// in the buffer as the key and searches the remaining entries, GROUP (32 in
// the paper) at a time, for queries of the same leaf node, stopping once it
// has NPE of them or has covered the whole buffer. The batch is then offered
// on batch_*; batch_ack removes its queries from the buffer.
//
// Details that are this design's choices: the buffer is a slot array (a
// query is written to the lowest free slot, one per cycle, push_ready =
// not full); "first query" is the first occupied slot at or after a rotating
// head pointer, which moves past the key after every batch so no leaf
// starves; a scan takes DEPTH/GROUP cycles at most, and queries written
// during a scan may join a later batch.
module be_query_buffer
  import tigris_pkg::*;
#(
  parameter int DEPTH = 128,
  parameter int NPE   = 32,
  parameter int GROUP = 32,
  localparam int AW   = $clog2(DEPTH),
  localparam int NG   = (DEPTH + GROUP - 1) / GROUP,
  localparam int CW   = $clog2(NPE + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  push_valid,
  input  be_token_t             push_token,
  output logic                  push_ready,
  output logic                  batch_valid,
  output be_token_t [NPE-1:0]   batch_tok,
  output logic [NPE-1:0]        batch_mask,
  output leaf_t                 batch_leaf,
  input  logic                  batch_ack,
  output logic [AW:0]           occupancy
);
  typedef enum logic [1:0] { B_IDLE, B_SCAN, B_READY } bstate_e;

  be_token_t      mem [DEPTH];
  logic [DEPTH-1:0] vld, sel;
  bstate_e        st;
  logic [AW-1:0]  head, key_slot, free_slot, first_slot;
  logic           have_free, have_any;
  leaf_t          key_leaf;
  int unsigned    grp;
  logic [CW-1:0]  nfound;

  // lowest free slot, first occupied slot at or after head
  always_comb begin
    have_free = 1'b0;
    free_slot = '0;
    for (int i = DEPTH - 1; i >= 0; i--)
      if (!vld[i]) begin
        have_free = 1'b1;
        free_slot = AW'(i);
      end
    have_any   = 1'b0;
    first_slot = '0;
    for (int k = 0; k < DEPTH; k++) begin
      int unsigned j;
      j = (int'(head) + k) % DEPTH;
      if (!have_any && vld[j]) begin
        have_any   = 1'b1;
        first_slot = AW'(j);
      end
    end
    occupancy = '0;
    for (int i = 0; i < DEPTH; i++) occupancy = occupancy + (AW+1)'(vld[i]);
  end

  assign push_ready  = have_free;
  assign batch_valid = (st == B_READY);
  assign batch_leaf  = key_leaf;

  always_ff @(posedge clk) begin
    if (push_valid && have_free) mem[free_slot] <= push_token;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld        <= '0;
      sel        <= '0;
      st         <= B_IDLE;
      head       <= '0;
      key_slot   <= '0;
      key_leaf   <= '0;
      grp        <= 0;
      nfound     <= '0;
      batch_tok  <= '0;
      batch_mask <= '0;
    end else begin
      logic [DEPTH-1:0] v_next;
      v_next = vld;
      if (push_valid && have_free) v_next[free_slot] = 1'b1;

      unique case (st)
        B_IDLE: if (have_any) begin
          key_slot   <= first_slot;
          key_leaf   <= mem[first_slot].leaf;
          sel        <= '0;
          nfound     <= '0;
          batch_mask <= '0;
          grp        <= 0;
          st         <= B_SCAN;
        end
        B_SCAN: begin
          // associative search of one group of GROUP entries in parallel
          logic [CW-1:0]    n;
          logic [DEPTH-1:0] s;
          logic [NPE-1:0]   m;
          be_token_t [NPE-1:0] t;
          n = nfound;
          s = sel;
          m = batch_mask;
          t = batch_tok;
          for (int k = 0; k < GROUP; k++) begin
            int unsigned j;
            j = grp * GROUP + k;
            if (j < DEPTH && vld[j] && mem[j].leaf == key_leaf && int'(n) < NPE) begin
              s[j] = 1'b1;
              t[n] = mem[j];
              m[n] = 1'b1;
              n    = n + 1'b1;
            end
          end
          sel        <= s;
          nfound     <= n;
          batch_mask <= m;
          batch_tok  <= t;
          grp        <= grp + 1;
          if (int'(n) == NPE || grp == NG - 1) st <= B_READY;
        end
        B_READY: if (batch_ack) begin
          v_next = v_next & ~sel;
          head   <= (int'(key_slot) == DEPTH - 1) ? '0 : key_slot + 1'b1;
          st     <= B_IDLE;
        end
        default: st <= B_IDLE;
      endcase
      vld <= v_next;
    end
  end

  // The key query is always part of its own batch.
  assert property (@(posedge clk) disable iff (!rst_n) batch_valid |-> batch_mask[0]);
endmodule
