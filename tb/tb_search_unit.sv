// tb_search_unit: one Search Unit (4 PEs, 16-entry BE Query Buffer, Node
// Cache of 2 x 20 points) on behavioural memories. Eight leaves have Node
// Sets of 0..20 points (leaf 1 is empty); the set descriptors sit at
// LEAF_TAB in the point memory. The FE Query Queue side is randomly
// back-pressured.
//   Exact phase: 48 queries, some with a current best preloaded in the
//   Result Buffer. Each final result must equal min(preloaded best, nearest
//   point of the Node Set); every query must come back exactly once with its
//   stack pointer unchanged and started set. Batches of several queries and
//   both Node Cache hits and misses must occur.
//   Approximate phase (after a flush): 48 queries in tight clusters. Each
//   result must be a real point at its reported distance, no closer than the
//   exact answer; followers, new leaders and skipped Node Sets must occur.
module tb_search_unit;
  import tigris_pkg::*;
  localparam int NPE = 4, NSU = 2, QMAX = 64, PBUF_DEPTH = 512;
  localparam int NLEAF = 8, NQ = 48, LEAF_TAB = 500, SET_MAX = 20;
  localparam int QAW = 6, PAW = 9;

  logic clk = 0, rst_n = 0;
  logic flush = 0, approx_en = 0;
  dist_t thd_sq = '0;
  logic in_valid = 0, in_ready;
  be_token_t in_token = '0;
  logic qb_req, qb_gnt, qb_rvalid, pb_req, pb_gnt, pb_rvalid, rb_req, rb_we, rb_gnt, rb_rvalid;
  logic [QAW-1:0] qb_addr, rb_addr;
  logic [PAW-1:0] pb_addr;
  point_t qb_rdata, pb_rdata;
  result_t rb_wdata, rb_rdata;
  logic fq_valid, fq_ready = 0;
  fq_token_t fq_token;
  logic [31:0] cnt_batches, cnt_batch_queries, cnt_nodes_streamed, cnt_nc_hit, cnt_nc_miss;
  logic [31:0] cnt_followers, cnt_set_skipped, cnt_leaders_added, cnt_leaders_dropped;
  int checks = 0, failures = 0;

  search_unit #(.NPE(NPE), .NSU(NSU), .QMAX(QMAX), .PBUF_DEPTH(PBUF_DEPTH), .BQB_DEPTH(16),
                .BQB_GROUP(8), .LB_SLOTS(4), .NC_ENTRIES(2), .NC_SET_MAX(SET_MAX))
    dut (.*, .leaf_tab_base(paddr_t'(LEAF_TAB)));

  tb_mem_model #(.DEPTH(QMAX), .WIDTH($bits(point_t)), .STALL(1'b1)) m_qb (.clk, .req(qb_req),
    .we(1'b0), .addr(qb_addr), .wdata('0), .gnt(qb_gnt), .rvalid(qb_rvalid), .rdata(qb_rdata));
  tb_mem_model #(.DEPTH(PBUF_DEPTH), .WIDTH($bits(point_t)), .STALL(1'b1)) m_pb (.clk, .req(pb_req),
    .we(1'b0), .addr(pb_addr), .wdata('0), .gnt(pb_gnt), .rvalid(pb_rvalid), .rdata(pb_rdata));
  tb_mem_model #(.DEPTH(QMAX), .WIDTH($bits(result_t)), .STALL(1'b1)) m_rb (.clk, .req(rb_req),
    .we(rb_we), .addr(rb_addr), .wdata(rb_wdata), .gnt(rb_gnt), .rvalid(rb_rvalid), .rdata(rb_rdata));

  always #5 clk = ~clk;

  int set_base [NLEAF], set_cnt [NLEAF];
  point_t qs [NQ];
  result_t pre [NQ];
  int qleaf [NQ], qsp [NQ], nback [NQ];
  be_token_t inq [$];

  function automatic dist_t d2(point_t a, point_t b);
    longint dx, dy, dz;
    dx = longint'(a.x) - longint'(b.x); dy = longint'(a.y) - longint'(b.y); dz = longint'(a.z) - longint'(b.z);
    return dist_t'(dx * dx + dy * dy + dz * dz);
  endfunction

  function automatic point_t rnd_pt(int c, int spread);
    point_t p;
    p.x = coord_t'(c + int'($urandom % unsigned'(spread)));
    p.y = coord_t'(c + int'($urandom % unsigned'(spread)));
    p.z = coord_t'(c + int'($urandom % unsigned'(spread)));
    return p;
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  logic in_ready_q = 1'b0;

  // input side: tokens offered from a queue, changed at the falling edge
  always @(negedge clk) begin
    if (!(in_valid && !in_ready_q)) begin
      in_valid <= inq.size() > 0 && ($urandom % 4 != 0);
      in_token <= (inq.size() > 0) ? inq[0] : '0;
    end
    fq_ready <= ($urandom % 3 != 0);
  end
  always @(posedge clk) begin
    in_ready_q <= 1'b0;
    if (in_valid && in_ready) begin void'(inq.pop_front()); in_ready_q <= 1'b1; end
    if (rst_n && fq_valid && fq_ready) begin
      nback[fq_token.qid]++;
      chk(fq_token.started && int'(fq_token.sp) == qsp[fq_token.qid],
          $sformatf("returned token of query %0d: sp %0d started %0b", fq_token.qid, fq_token.sp, fq_token.started));
    end
  end

  function automatic dist_t exact(int q);
    dist_t b;
    b = pre[q].found ? pre[q].dsq : DIST_MAX;
    for (int j = 0; j < set_cnt[qleaf[q]]; j++) begin
      point_t p;
      p = m_pb.mem[set_base[qleaf[q]] + j];
      if (d2(qs[q], p) < b) b = d2(qs[q], p);
    end
    return b;
  endfunction

  task automatic run_phase(bit approx);
    int all;
    for (int q = 0; q < NQ; q++) begin
      nback[q] = 0;
      qsp[q] = int'($urandom % 8);
      if (approx) begin
        // three clusters over two leaves, so leaders get reused
        qleaf[q] = (q % 3 == 2) ? 3 : 5;
        qs[q] = rnd_pt(1000 + 3000 * (q % 3), 20);
        pre[q] = '{found: 1'b0, idx: '0, dsq: DIST_MAX};
      end else begin
        qleaf[q] = (q < 8) ? 1 : int'($urandom % NLEAF);
        qs[q] = rnd_pt(0, 4096);
        if ($urandom % 3 == 0 && set_cnt[0] > 0) begin
          pre[q].found = 1'b1;
          pre[q].idx = paddr_t'(set_base[0]);
          pre[q].dsq = d2(qs[q], m_pb.mem[set_base[0]]);
        end else pre[q] = '{found: 1'b0, idx: '0, dsq: DIST_MAX};
      end
      m_qb.mem[q] = qs[q];
      m_rb.mem[q] = pre[q];
    end
    for (int q = 0; q < NQ; q++)
      inq.push_back('{qid: qid_t'(q), leaf: leaf_t'(qleaf[q]), sp: SP_W'(qsp[q])});
    do begin
      @(posedge clk);
      all = 1;
      for (int q = 0; q < NQ; q++) if (nback[q] == 0) all = 0;
    end while (!all);
    repeat (20) @(posedge clk);
    for (int q = 0; q < NQ; q++) begin
      result_t r;
      dist_t e;
      r = m_rb.mem[q];
      e = exact(q);
      chk(nback[q] == 1, $sformatf("query %0d came back %0d times", q, nback[q]));
      if (!approx)
        chk(r.dsq == e && (r.found == (e != DIST_MAX)), $sformatf("exact query %0d: %0d expected %0d", q, r.dsq, e));
      else
        chk(r.found && r.dsq == d2(qs[q], m_pb.mem[r.idx]) && r.dsq >= e,
            $sformatf("approx query %0d: %0d (point %0d) exact %0d", q, r.dsq, r.idx, e));
    end
  endtask

  initial begin
    int base;
    base = 0;
    for (int l = 0; l < NLEAF; l++) begin
      set_base[l] = base;
      set_cnt[l] = (l == 1) ? 0 : (l == 3 || l == 5) ? SET_MAX : 1 + int'($urandom % SET_MAX);
      for (int j = 0; j < set_cnt[l]; j++) m_pb.mem[base + j] = rnd_pt(0, 8192);
      m_pb.mem[LEAF_TAB + l] = point_t'{x: coord_t'(base), y: coord_t'(set_cnt[l]), z: '0};
      base += set_cnt[l];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;

    run_phase(1'b0);
    chk(cnt_batch_queries > cnt_batches, "no batch held more than one query");
    chk(cnt_nc_hit > 0 && cnt_nc_miss > 0, $sformatf("node cache hits %0d misses %0d", cnt_nc_hit, cnt_nc_miss));
    chk(cnt_followers == 0, "followers with approximate search off");
    $display("exact: batches %0d queries %0d nodes %0d hits %0d misses %0d", cnt_batches,
             cnt_batch_queries, cnt_nodes_streamed, cnt_nc_hit, cnt_nc_miss);

    @(negedge clk); flush = 1; approx_en = 1; thd_sq = dist_t'(4000); @(negedge clk); flush = 0;
    run_phase(1'b1);
    chk(cnt_followers > 0, "no follower");
    chk(cnt_leaders_added > 0, "no leader recorded");
    chk(cnt_set_skipped > 0, "no Node Set skipped");
    $display("approx: followers %0d skipped %0d leaders added %0d dropped %0d", cnt_followers,
             cnt_set_skipped, cnt_leaders_added, cnt_leaders_dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
