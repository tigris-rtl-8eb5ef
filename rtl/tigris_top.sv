// tigris_top: the KD-tree search accelerator (front-end, back-end and global
// buffer) for nearest-neighbour search on a two-stage KD-tree.
//
// A frame is processed as follows. The host writes the query points into the
// Query Buffer and the two-stage KD-tree into the Input Point Buffer (top-tree
// nodes in heap order from address 0, a Node Set descriptor per leaf at
// leaf_tab_base, the Node Sets themselves anywhere else), sets htop, and
// pulses start. The accelerator then enqueues queries 0 .. num_queries-1 into
// the FE Query Queue. NRU recursion units take queries from it and walk the
// top-tree; at each top-tree leaf a query crosses the Query Distribution
// Network to the search unit selected by the low-order bits of the leaf id,
// whose PEs search the leaf's Node Set and send the query back to the FE
// Query Queue to continue its depth-first walk. When every query has emptied
// its stack, done rises and the Result Buffer holds, per query, the address of
// its nearest point and the squared distance (exact when approx_en = 0).
// With approx_en = 1 the search units apply the leader/follower approximate
// search with threshold thd_sq (a squared distance).
//
// Host access (one request at a time, held until host_gnt): host_sel 0 =
// Query Buffer, 1 = Input Point Buffer (both written with host_wdata), 2 =
// Result Buffer (read; host_rdata valid with host_rvalid). The host has its
// own requester slot on each partition's arbiter.
//
// The organisation (FQQ, RUs, QDN, BQBs, SUs with PEs, global buffer) and the
// default sizes (64 RUs, 32 SUs, 32 PEs per SU, a 128-entry BQB per SU, 16
// leaders per leaf, stacks of 18 entries, 131072 queries and points) are the
// paper's. The bus between units and global buffer is modelled as one
// arbitrated port per partition, which is this design's choice; the paper
// does not describe it. The DRAM interface of the Result Buffer is not part of
// this design: results are read through the host port.
module tigris_top
  import tigris_pkg::*;
#(
  parameter int NRU            = 64,
  parameter int NSU            = 32,
  parameter int NPE            = 32,
  parameter int QMAX           = 131072,
  parameter int PBUF_DEPTH     = 132096,
  parameter int BQB_DEPTH      = 128,
  parameter int BQB_GROUP      = 32,
  parameter int LB_SLOTS       = 32,
  parameter int LB_ENTRIES     = 16,
  parameter int NC_ENTRIES     = 2,
  parameter int NC_SET_MAX     = 128,
  parameter bit ENABLE_BYPASS  = 1'b1,
  parameter bit ENABLE_FORWARD = 1'b1,
  localparam int QAW = $clog2(QMAX),
  localparam int PAW = $clog2(PBUF_DEPTH),
  localparam int SAW = $clog2(QMAX * HTOP_MAX)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration, held stable while busy
  input  logic [DEPTH_W-1:0] htop,
  input  logic               approx_en,
  input  dist_t              thd_sq,
  input  paddr_t             leaf_tab_base,
  input  logic [QAW:0]       num_queries,
  // control
  input  logic               start,
  output logic               busy,
  output logic               done,
  // host access to the global buffer
  input  logic               host_req,
  input  logic               host_we,
  input  logic [1:0]         host_sel,
  input  logic [31:0]        host_addr,
  input  point_t             host_wdata,
  output logic               host_gnt,
  output logic               host_rvalid,
  output result_t            host_rdata,
  // event counters
  output stats_t             stats
);
  localparam int NQ = 1 + NRU + NSU;   // requesters on Query, Point and Result Buffer

  // ---------------- global buffer partitions ----------------
  logic [NQ-1:0]                 qb_req, qb_gnt, qb_rv;
  logic [NQ-1:0][QAW-1:0]        qb_addr;
  logic [NQ-1:0][$bits(point_t)-1:0] qb_wd;
  logic [NQ-1:0]                 qb_we;
  point_t                        qb_rd;

  logic [NQ-1:0]                 pb_req, pb_gnt, pb_rv;
  logic [NQ-1:0][PAW-1:0]        pb_addr;
  logic [NQ-1:0][$bits(point_t)-1:0] pb_wd;
  logic [NQ-1:0]                 pb_we;
  point_t                        pb_rd;

  logic [NQ-1:0]                 rb_req, rb_gnt, rb_rv, rb_we;
  logic [NQ-1:0][QAW-1:0]        rb_addr;
  logic [NQ-1:0][$bits(result_t)-1:0] rb_wd;
  result_t                       rb_rd;

  logic [NRU-1:0]                sb_req, sb_gnt, sb_rv, sb_we;
  logic [NRU-1:0][SAW-1:0]       sb_addr;
  logic [NRU-1:0][$bits(stack_entry_t)-1:0] sb_wd;
  stack_entry_t                  sb_rd;

  gbuf_bank #(.NREQ(NQ), .DEPTH(QMAX), .WIDTH($bits(point_t))) u_query_buf (
    .clk, .rst_n, .req(qb_req), .we(qb_we), .addr(qb_addr), .wdata(qb_wd),
    .gnt(qb_gnt), .rvalid(qb_rv), .rdata(qb_rd));
  gbuf_bank #(.NREQ(NQ), .DEPTH(PBUF_DEPTH), .WIDTH($bits(point_t))) u_point_buf (
    .clk, .rst_n, .req(pb_req), .we(pb_we), .addr(pb_addr), .wdata(pb_wd),
    .gnt(pb_gnt), .rvalid(pb_rv), .rdata(pb_rd));
  gbuf_bank #(.NREQ(NQ), .DEPTH(QMAX), .WIDTH($bits(result_t))) u_result_buf (
    .clk, .rst_n, .req(rb_req), .we(rb_we), .addr(rb_addr), .wdata(rb_wd),
    .gnt(rb_gnt), .rvalid(rb_rv), .rdata(rb_rd));
  gbuf_bank #(.NREQ(NRU), .DEPTH(QMAX * HTOP_MAX), .WIDTH($bits(stack_entry_t))) u_stack_buf (
    .clk, .rst_n, .req(sb_req), .we(sb_we), .addr(sb_addr), .wdata(sb_wd),
    .gnt(sb_gnt), .rvalid(sb_rv), .rdata(sb_rd));

  // host = requester 0
  always_comb begin
    qb_req[0]  = host_req && host_sel == 2'd0;
    qb_we[0]   = host_we;
    qb_addr[0] = QAW'(host_addr);
    qb_wd[0]   = host_wdata;
    pb_req[0]  = host_req && host_sel == 2'd1;
    pb_we[0]   = host_we;
    pb_addr[0] = PAW'(host_addr);
    pb_wd[0]   = host_wdata;
    rb_req[0]  = host_req && host_sel == 2'd2;
    rb_we[0]   = 1'b0;
    rb_addr[0] = QAW'(host_addr);
    rb_wd[0]   = '0;
    host_gnt    = qb_gnt[0] | pb_gnt[0] | rb_gnt[0];
    host_rvalid = rb_rv[0];
    host_rdata  = rb_rd;
  end

  // ---------------- FE Query Queue ----------------
  logic [NSU:0]          fq_push_v, fq_push_r;
  fq_token_t [NSU:0]     fq_push_t;
  logic [NRU-1:0]        fq_pop_req, fq_pop_gnt;
  fq_token_t             fq_pop_t;
  logic [QAW:0]          fq_count;

  fe_query_queue #(.NPUSH(NSU + 1), .NPOP(NRU), .DEPTH(QMAX)) u_fqq (
    .clk, .rst_n, .push_valid(fq_push_v), .push_token(fq_push_t), .push_ready(fq_push_r),
    .pop_req(fq_pop_req), .pop_gnt(fq_pop_gnt), .pop_token(fq_pop_t), .count(fq_count));

  // query loader: pushes every query of the frame once
  logic [QAW:0] load_next, n_done;
  logic         loading;
  always_comb begin
    fq_push_v[0] = loading;
    fq_push_t[0] = '{qid: qid_t'(load_next), sp: '0, started: 1'b0};
  end

  // ---------------- front-end: recursion units ----------------
  logic [NRU-1:0]        ru_be_v, ru_be_r, ru_done;
  be_token_t [NRU-1:0]   ru_be_t;
  logic [NRU-1:0][31:0]  ru_nodes, ru_byp, ru_fwd, ru_iss;

  for (genvar r = 0; r < NRU; r++) begin : g_ru
    qid_t dq;
    stack_entry_t sb_wd_s;
    result_t      rb_wd_s;
    logic [QAW-1:0] ru_rb_addr;
    assign sb_wd[r]          = sb_wd_s;
    assign rb_wd[1 + r]      = rb_wd_s;
    assign qb_we[1 + r]      = 1'b0;
    assign qb_wd[1 + r]      = '0;
    assign pb_we[1 + r]      = 1'b0;
    assign pb_wd[1 + r]      = '0;
    assign rb_addr[1 + r]    = ru_rb_addr;
    recursion_unit #(.QMAX(QMAX), .PBUF_DEPTH(PBUF_DEPTH),
                     .ENABLE_BYPASS(ENABLE_BYPASS), .ENABLE_FORWARD(ENABLE_FORWARD)) u_ru (
      .clk, .rst_n, .htop,
      .fqq_req(fq_pop_req[r]), .fqq_gnt(fq_pop_gnt[r]), .fqq_token(fq_pop_t),
      .qb_req(qb_req[1 + r]), .qb_addr(qb_addr[1 + r]), .qb_gnt(qb_gnt[1 + r]),
      .qb_rvalid(qb_rv[1 + r]), .qb_rdata(qb_rd),
      .pb_req(pb_req[1 + r]), .pb_addr(pb_addr[1 + r]), .pb_gnt(pb_gnt[1 + r]),
      .pb_rvalid(pb_rv[1 + r]), .pb_rdata(pb_rd),
      .sb_req(sb_req[r]), .sb_we(sb_we[r]), .sb_addr(sb_addr[r]), .sb_wdata(sb_wd_s),
      .sb_gnt(sb_gnt[r]), .sb_rvalid(sb_rv[r]), .sb_rdata(sb_rd),
      .rb_req(rb_req[1 + r]), .rb_we(rb_we[1 + r]), .rb_addr(ru_rb_addr), .rb_wdata(rb_wd_s),
      .rb_gnt(rb_gnt[1 + r]), .rb_rvalid(rb_rv[1 + r]), .rb_rdata(rb_rd),
      .be_valid(ru_be_v[r]), .be_token(ru_be_t[r]), .be_ready(ru_be_r[r]),
      .done(ru_done[r]), .done_qid(dq),
      .cnt_nodes(ru_nodes[r]), .cnt_bypass(ru_byp[r]), .cnt_forward(ru_fwd[r]),
      .cnt_leaf_issue(ru_iss[r]));
  end

  // ---------------- Query Distribution Network ----------------
  logic [NSU-1:0]        su_in_v, su_in_r;
  be_token_t [NSU-1:0]   su_in_t;

  query_dist_net #(.NRU(NRU), .NSU(NSU)) u_qdn (
    .clk, .rst_n, .in_valid(ru_be_v), .in_token(ru_be_t), .in_ready(ru_be_r),
    .out_valid(su_in_v), .out_token(su_in_t), .out_ready(su_in_r));

  // ---------------- back-end: search units ----------------
  logic [NSU-1:0][31:0] su_bat, su_bq, su_nodes, su_hit, su_miss, su_fol, su_skip, su_ladd, su_ldrop;

  for (genvar u = 0; u < NSU; u++) begin : g_su
    localparam int R = 1 + NRU + u;
    result_t rb_wd_s;
    logic [QAW-1:0] su_rb_addr;
    assign rb_wd[R]   = rb_wd_s;
    assign rb_addr[R] = su_rb_addr;
    assign qb_we[R]   = 1'b0;
    assign qb_wd[R]   = '0;
    assign pb_we[R]   = 1'b0;
    assign pb_wd[R]   = '0;
    search_unit #(.NPE(NPE), .NSU(NSU), .QMAX(QMAX), .PBUF_DEPTH(PBUF_DEPTH),
                  .BQB_DEPTH(BQB_DEPTH), .BQB_GROUP(BQB_GROUP), .LB_SLOTS(LB_SLOTS),
                  .LB_ENTRIES(LB_ENTRIES), .NC_ENTRIES(NC_ENTRIES), .NC_SET_MAX(NC_SET_MAX)) u_su (
      .clk, .rst_n, .flush(start), .approx_en, .thd_sq, .leaf_tab_base,
      .in_valid(su_in_v[u]), .in_token(su_in_t[u]), .in_ready(su_in_r[u]),
      .qb_req(qb_req[R]), .qb_addr(qb_addr[R]), .qb_gnt(qb_gnt[R]), .qb_rvalid(qb_rv[R]),
      .qb_rdata(qb_rd),
      .pb_req(pb_req[R]), .pb_addr(pb_addr[R]), .pb_gnt(pb_gnt[R]), .pb_rvalid(pb_rv[R]),
      .pb_rdata(pb_rd),
      .rb_req(rb_req[R]), .rb_we(rb_we[R]), .rb_addr(su_rb_addr), .rb_wdata(rb_wd_s),
      .rb_gnt(rb_gnt[R]), .rb_rvalid(rb_rv[R]), .rb_rdata(rb_rd),
      .fq_valid(fq_push_v[1 + u]), .fq_token(fq_push_t[1 + u]), .fq_ready(fq_push_r[1 + u]),
      .cnt_batches(su_bat[u]), .cnt_batch_queries(su_bq[u]), .cnt_nodes_streamed(su_nodes[u]),
      .cnt_nc_hit(su_hit[u]), .cnt_nc_miss(su_miss[u]), .cnt_followers(su_fol[u]),
      .cnt_set_skipped(su_skip[u]), .cnt_leaders_added(su_ladd[u]),
      .cnt_leaders_dropped(su_ldrop[u]));
  end

  // ---------------- frame control ----------------
  logic [31:0] qdn_conf;
  logic [$clog2(NRU+1)-1:0] n_done_now;

  always_comb begin
    n_done_now = '0;
    for (int r = 0; r < NRU; r++) n_done_now = n_done_now + ($clog2(NRU+1))'(ru_done[r]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      loading   <= 1'b0;
      load_next <= '0;
      n_done    <= '0;
      qdn_conf  <= '0;
    end else begin
      if (start) begin
        busy      <= (num_queries != '0);
        done      <= (num_queries == '0);
        loading   <= (num_queries != '0);
        load_next <= '0;
        n_done    <= '0;
      end else begin
        if (loading && fq_push_r[0]) begin
          load_next <= load_next + 1'b1;
          if (load_next + 1'b1 == num_queries) loading <= 1'b0;
        end
        n_done <= n_done + (QAW+1)'(n_done_now);
        if (busy && n_done + (QAW+1)'(n_done_now) == num_queries) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        qdn_conf <= qdn_conf + 32'($countones(ru_be_v & ~ru_be_r));
      end
    end
  end

  always_comb begin
    stats = '0;
    stats.queries_done  = 32'(n_done);
    stats.qdn_conflicts = qdn_conf;
    for (int r = 0; r < NRU; r++) begin
      stats.ru_nodes    += ru_nodes[r];
      stats.ru_bypass   += ru_byp[r];
      stats.ru_forward  += ru_fwd[r];
      stats.leaf_issues += ru_iss[r];
    end
    for (int u = 0; u < NSU; u++) begin
      stats.su_batches       += su_bat[u];
      stats.su_batch_queries += su_bq[u];
      stats.su_nodes         += su_nodes[u];
      stats.nc_hit           += su_hit[u];
      stats.nc_miss          += su_miss[u];
      stats.followers        += su_fol[u];
      stats.sets_skipped     += su_skip[u];
      stats.leaders_added    += su_ladd[u];
      stats.leaders_dropped  += su_ldrop[u];
    end
  end
endmodule
