// search_unit: one Search Unit (SU) of the back-end. It searches the Node
// Sets of the top-tree leaves mapped to it exhaustively, for a batch of up to
// NPE queries of the same leaf at a time (MQSN: Multiple Query, Single Node
// Set).
//
// Structure (Fig. 17): the BE Query Buffer with the Query Issue Logic
// (be_query_buffer), Query Point Access, Leader Check Logic with the Leader
// Buffer (leader_buffer), Search Node Access with the Node Cache
// (node_cache), and NPE processing elements (su_pe) chained as a 1D systolic
// array. For every batch the control does:
//   1. Query Point Access: read each query's point (Query Buffer) and its
//      current nearest neighbour (Result Buffer) into its PE.
//   2. Leader check, only when approximate search is on: stream the leaf's
//      leaders through the PEs, then resolve which queries are followers. If
//      every query of the batch is a follower the Node Set is skipped.
//   3. Search Node Access: read the leaf's Node Set descriptor (first
//      address, count) from the Input Point Buffer, then stream the Node Set
//      into the first PE, one point per cycle, from the Node Cache on a hit or
//      from the Input Point Buffer on a miss (filling the cache).
//   4. After the array drains, write each query's result back to the Result
//      Buffer, record each non-follower as a new leader of the leaf, and send
//      the query back to the FE Query Queue so its top-tree search resumes.
// The steps follow the paper; their sequencing (one batch at a time, query
// loads one after the other through the shared buffer ports, the array
// drained between phases) is this design's choice. Leaders found within a
// batch only serve later batches.
module search_unit
  import tigris_pkg::*;
#(
  parameter int  NPE        = 32,
  parameter int  NSU        = 32,
  parameter int  QMAX       = 131072,
  parameter int  PBUF_DEPTH = 132096,
  parameter int  BQB_DEPTH  = 128,
  parameter int  BQB_GROUP  = 32,
  parameter int  LB_SLOTS   = 32,
  parameter int  LB_ENTRIES = 16,
  parameter int  NC_ENTRIES = 2,
  parameter int  NC_SET_MAX = 128,
  localparam int QAW = $clog2(QMAX),
  localparam int PAW = $clog2(PBUF_DEPTH),
  localparam int KW  = $clog2(NPE + 1),
  localparam int PIW = (NPE > 1) ? $clog2(NPE) : 1,
  localparam int EW  = $clog2(LB_ENTRIES),
  localparam int ENW = (NC_ENTRIES > 1) ? $clog2(NC_ENTRIES) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            flush,          // new frame: forget cached Node Sets and leaders
  input  logic            approx_en,
  input  dist_t           thd_sq,
  input  paddr_t          leaf_tab_base,
  // from the Query Distribution Network
  input  logic            in_valid,
  input  be_token_t       in_token,
  output logic            in_ready,
  // Query Buffer (read only)
  output logic            qb_req,
  output logic [QAW-1:0]  qb_addr,
  input  logic            qb_gnt,
  input  logic            qb_rvalid,
  input  point_t          qb_rdata,
  // Input Point Buffer (read only)
  output logic            pb_req,
  output logic [PAW-1:0]  pb_addr,
  input  logic            pb_gnt,
  input  logic            pb_rvalid,
  input  point_t          pb_rdata,
  // Result Buffer
  output logic            rb_req,
  output logic            rb_we,
  output logic [QAW-1:0]  rb_addr,
  output result_t         rb_wdata,
  input  logic            rb_gnt,
  input  logic            rb_rvalid,
  input  result_t         rb_rdata,
  // back to the FE Query Queue
  output logic            fq_valid,
  output fq_token_t       fq_token,
  input  logic            fq_ready,
  // statistics
  output logic [31:0]     cnt_batches,
  output logic [31:0]     cnt_batch_queries,
  output logic [31:0]     cnt_nodes_streamed,
  output logic [31:0]     cnt_nc_hit,
  output logic [31:0]     cnt_nc_miss,
  output logic [31:0]     cnt_followers,
  output logic [31:0]     cnt_set_skipped,
  output logic [31:0]     cnt_leaders_added,
  output logic [31:0]     cnt_leaders_dropped
);
  typedef enum logic [4:0] {
    S_IDLE, S_QL_Q, S_QL_QW, S_QL_R, S_QL_RW, S_LEAD, S_LEAD_DRAIN, S_RESOLVE,
    S_RESOLVE2, S_DESC, S_DESC_W, S_STREAM_C, S_STREAM_M, S_DRAIN, S_WB_R,
    S_WB_F
  } state_e;

  state_e               st;
  be_token_t [NPE-1:0]  btok;
  logic [NPE-1:0]       bmask;
  leaf_t                bleaf;
  logic [KW-1:0]        k;
  logic [31:0]          i_cnt, r_cnt, drain;
  paddr_t               set_base;
  logic [31:0]          set_count;
  logic                 filling;

  // BQB and issue logic
  logic                 b_valid;
  be_token_t [NPE-1:0]  b_tok;
  logic [NPE-1:0]       b_mask;
  leaf_t                b_leaf;
  logic                 b_ack;
  logic [$clog2(BQB_DEPTH):0] b_occ;

  be_query_buffer #(.DEPTH(BQB_DEPTH), .NPE(NPE), .GROUP(BQB_GROUP)) u_bqb (
    .clk, .rst_n, .push_valid(in_valid), .push_token(in_token), .push_ready(in_ready),
    .batch_valid(b_valid), .batch_tok(b_tok), .batch_mask(b_mask), .batch_leaf(b_leaf),
    .batch_ack(b_ack), .occupancy(b_occ)
  );

  // Leader Buffer
  logic [EW:0]   lb_count;
  leader_t       lb_entry;
  logic          lb_ins;
  leader_t       lb_ins_entry;

  leader_buffer #(.NSU(NSU), .LB_SLOTS(LB_SLOTS), .LB_ENTRIES(LB_ENTRIES)) u_lb (
    .clk, .rst_n, .flush, .rd_leaf(bleaf), .rd_idx(EW'(i_cnt)), .rd_count(lb_count), .rd_entry(lb_entry),
    .ins_valid(lb_ins), .ins_leaf(bleaf), .ins_entry(lb_ins_entry),
    .cnt_added(cnt_leaders_added), .cnt_dropped(cnt_leaders_dropped)
  );

  // Node Cache
  logic           nc_hit;
  logic [ENW-1:0] nc_hit_entry;
  logic           nc_rd_start, nc_rd_next, nc_fill_start, nc_fill_we, nc_fill_done;
  point_t         nc_rd_data;

  node_cache #(.NC_ENTRIES(NC_ENTRIES), .NC_SET_MAX(NC_SET_MAX)) u_nc (
    .clk, .rst_n, .flush, .lookup_leaf(bleaf), .hit(nc_hit), .hit_entry(nc_hit_entry),
    .rd_start(nc_rd_start), .rd_entry(nc_hit_entry), .rd_next(nc_rd_next), .rd_data(nc_rd_data),
    .fill_start(nc_fill_start), .fill_leaf(bleaf), .fill_we(nc_fill_we), .fill_data(pb_rdata),
    .fill_done(nc_fill_done)
  );

  point_t [NPE-1:0] qpts;

  // PE array
  stream_t  [NPE:0]   chain;
  result_t  [NPE-1:0] pe_best, pe_lbest;
  point_t   [NPE-1:0] pe_lbest_pt;
  logic     [NPE-1:0] pe_follower, pe_active;
  logic               pe_clear, pe_resolve;
  logic     [NPE-1:0] pe_ld_q, pe_ld_best;
  stream_t            s_feed;

  assign chain[0] = s_feed;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    su_pe u_pe (
      .clk, .rst_n, .clear(pe_clear), .active(b_mask[p]),
      .ld_q(pe_ld_q[p]), .q_in(qb_rdata), .ld_best(pe_ld_best[p]), .best_in(rb_rdata),
      .resolve(pe_resolve), .thd_sq, .s_in(chain[p]), .s_out(chain[p+1]),
      .best(pe_best[p]), .follower(pe_follower[p]), .leaf_best(pe_lbest[p]),
      .leaf_best_pt(pe_lbest_pt[p]), .is_active(pe_active[p])
    );
  end

  wire [NPE-1:0] all_follow = pe_follower | ~bmask;

  // ---------------- combinational control ----------------
  always_comb begin
    b_ack         = (st == S_IDLE) && b_valid;
    pe_clear      = b_ack;
    pe_resolve    = (st == S_RESOLVE);
    pe_ld_q       = '0;
    pe_ld_best    = '0;
    if (st == S_QL_QW && qb_rvalid) pe_ld_q[PIW'(k)]    = 1'b1;
    if (st == S_QL_RW && rb_rvalid) pe_ld_best[PIW'(k)] = 1'b1;

    qb_req   = (st == S_QL_Q);
    qb_addr  = QAW'(btok[k].qid);
    rb_req   = (st == S_QL_R) || (st == S_WB_R);
    rb_we    = (st == S_WB_R);
    rb_addr  = QAW'(btok[k].qid);
    rb_wdata = pe_best[k];

    pb_req   = (st == S_DESC) || (st == S_STREAM_M && i_cnt < set_count);
    pb_addr  = (st == S_DESC) ? PAW'(leaf_tab_base + paddr_t'(bleaf)) : PAW'(set_base + paddr_t'(i_cnt));

    fq_valid = (st == S_WB_F);
    fq_token = '{qid: btok[k].qid, sp: btok[k].sp, started: 1'b1};

    nc_rd_start   = (st == S_DESC_W) && pb_rvalid && nc_hit;
    nc_rd_next    = (st == S_STREAM_C);
    nc_fill_start = (st == S_DESC_W) && pb_rvalid && !nc_hit && (pb_rdata.y <= NC_SET_MAX);
    nc_fill_we    = (st == S_STREAM_M) && filling && pb_rvalid;
    nc_fill_done  = (st == S_STREAM_M) && filling && (r_cnt == set_count);

    lb_ins        = (st == S_WB_R) && rb_gnt && approx_en && !pe_follower[PIW'(k)] && pe_lbest[PIW'(k)].found;
    lb_ins_entry  = '{qpt: qpts[k], res_idx: pe_lbest[k].idx, res_pt: pe_lbest_pt[k]};

    s_feed = '0;
    unique case (st)
      S_LEAD: if (i_cnt < 32'(lb_count)) begin
        s_feed = '{valid: 1'b1, kind: EL_LEADER, idx: lb_entry.res_idx, pt: lb_entry.qpt,
                   aux_pt: lb_entry.res_pt};
      end
      S_STREAM_C: s_feed = '{valid: 1'b1, kind: EL_NODE, idx: set_base + paddr_t'(i_cnt),
                             pt: nc_rd_data, aux_pt: '0};
      S_STREAM_M: if (pb_rvalid) s_feed = '{valid: 1'b1, kind: EL_NODE,
                             idx: set_base + paddr_t'(r_cnt), pt: pb_rdata, aux_pt: '0};
      default: ;
    endcase
  end


  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st                 <= S_IDLE;
      btok               <= '0;
      bmask              <= '0;
      bleaf              <= '0;
      k                  <= '0;
      i_cnt              <= '0;
      r_cnt              <= '0;
      drain              <= '0;
      set_base           <= '0;
      set_count          <= '0;
      filling            <= 1'b0;
      qpts               <= '0;
      cnt_batches        <= '0;
      cnt_batch_queries  <= '0;
      cnt_nodes_streamed <= '0;
      cnt_nc_hit         <= '0;
      cnt_nc_miss        <= '0;
      cnt_followers      <= '0;
      cnt_set_skipped    <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (b_valid) begin
          btok              <= b_tok;
          bmask             <= b_mask;
          bleaf             <= b_leaf;
          k                 <= '0;
          cnt_batches       <= cnt_batches + 1;
          cnt_batch_queries <= cnt_batch_queries + 32'($countones(b_mask));
          st                <= S_QL_Q;
        end
        // 1. Query Point Access
        S_QL_Q:  if (qb_gnt) st <= S_QL_QW;
        S_QL_QW: if (qb_rvalid) begin
          qpts[k] <= qb_rdata;
          st      <= S_QL_R;
        end
        S_QL_R:  if (rb_gnt) st <= S_QL_RW;
        S_QL_RW: if (rb_rvalid) begin
          if (int'(k) == NPE - 1 || !bmask[PIW'(k + 1'b1)]) begin
            i_cnt <= '0;
            st    <= approx_en ? S_LEAD : S_DESC;
          end else begin
            k  <= k + 1'b1;
            st <= S_QL_Q;
          end
        end
        // 2. leader check
        S_LEAD: begin
          if (i_cnt < 32'(lb_count)) i_cnt <= i_cnt + 1;
          else begin
            drain <= '0;
            st    <= S_LEAD_DRAIN;
          end
        end
        S_LEAD_DRAIN: begin
          drain <= drain + 1;
          if (drain == 32'(NPE + 3)) st <= S_RESOLVE;
        end
        S_RESOLVE:  st <= S_RESOLVE2;
        S_RESOLVE2: begin
          cnt_followers <= cnt_followers + 32'($countones(pe_follower & bmask));
          if (&all_follow) begin
            cnt_set_skipped <= cnt_set_skipped + 1;
            k  <= '0;
            st <= S_WB_R;
          end else st <= S_DESC;
        end
        // 3. Search Node Access
        S_DESC:   if (pb_gnt) st <= S_DESC_W;
        S_DESC_W: if (pb_rvalid) begin
          set_base  <= paddr_t'(pb_rdata.x);
          set_count <= 32'(pb_rdata.y);
          i_cnt     <= '0;
          r_cnt     <= '0;
          if (nc_hit) begin
            cnt_nc_hit <= cnt_nc_hit + 1;
            st         <= S_STREAM_C;
          end else begin
            cnt_nc_miss <= cnt_nc_miss + 1;
            filling     <= (pb_rdata.y <= NC_SET_MAX);
            st          <= S_STREAM_M;
          end
          if (pb_rdata.y == 0) begin
            drain <= '0;
            st    <= S_DRAIN;
          end
        end
        S_STREAM_C: begin
          i_cnt              <= i_cnt + 1;
          cnt_nodes_streamed <= cnt_nodes_streamed + 1;
          if (i_cnt + 1 == set_count) begin
            drain <= '0;
            st    <= S_DRAIN;
          end
        end
        S_STREAM_M: begin
          if (pb_gnt) i_cnt <= i_cnt + 1;
          if (pb_rvalid) begin
            r_cnt              <= r_cnt + 1;
            cnt_nodes_streamed <= cnt_nodes_streamed + 1;
          end
          if (r_cnt == set_count) begin
            filling <= 1'b0;
            drain   <= '0;
            st      <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          drain <= drain + 1;
          if (drain == 32'(NPE + 3)) begin
            k  <= '0;
            st <= S_WB_R;
          end
        end
        // 4. write back, record leaders, return the queries to the front-end
        S_WB_R: if (rb_gnt) st <= S_WB_F;
        S_WB_F: if (fq_ready) begin
          if (int'(k) == NPE - 1 || !bmask[PIW'(k + 1'b1)]) st <= S_IDLE;
          else begin
            k  <= k + 1'b1;
            st <= S_WB_R;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
