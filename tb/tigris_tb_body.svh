// Shared body of the end-to-end testbenches of tigris_top. The including
// module defines the localparams HTOP, NPTS_MAX_LEAF, NQ, DUP, HOT, BOX_LOG,
// THD_SQ, WATCHDOG and instantiates the accelerator as "dut" with the signals
// declared here.
//
// The testbench builds a two-stage KD-tree whose splits are box midpoints:
// node i at depth d splits dimension d mod 3 of its box at the midpoint and
// its own point lies on that plane, so every node lies inside the box of its
// subtree and the pruning bound is exact. Leaf l receives a random number of
// points inside its box. Queries are random; the last DUP queries are copies
// of earlier ones moved by one unit, so that approximate search finds leaders
// to follow, and the first HOT queries fall into one small cube so that one
// leaf sees more leaders than its group can hold. Run 1 (exact) checks every result against a brute-force search
// over all points; run 2 (approximate) checks that every returned distance is
// the true distance of the returned point and never below the exact one.

  logic               clk = 1'b0;
  logic               rst_n = 1'b0;
  logic [DEPTH_W-1:0] htop;
  logic               approx_en;
  dist_t              thd_sq;
  paddr_t             leaf_tab_base;
  logic [16:0]        num_queries;
  logic               start;
  logic               busy, done;
  logic               host_req, host_we, host_gnt, host_rvalid;
  logic [1:0]         host_sel;
  logic [31:0]        host_addr;
  point_t             host_wdata;
  result_t            host_rdata;
  stats_t             stats;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  localparam int NLEAF = 1 << HTOP;
  localparam int NTOP  = (1 << (HTOP + 1)) - 1;

  point_t pts[int];            // address -> point, every point of the cloud
  point_t qs[NQ];
  dist_t  exact_d[NQ];

  function automatic dist_t d2(point_t a, point_t b);
    longint dx, dy, dz;
    dx = longint'(a.x) - longint'(b.x);
    dy = longint'(a.y) - longint'(b.y);
    dz = longint'(a.z) - longint'(b.z);
    return dist_t'(dx * dx) + dist_t'(dy * dy) + dist_t'(dz * dz);
  endfunction

  function automatic coord_t rnd_in(int lo, int hi);
    return coord_t'(lo + int'($urandom % unsigned'(hi - lo)));
  endfunction

  // Host requests are driven on the falling edge; the grant seen then is
  // consumed by the next rising edge.
  task automatic host_write(input logic [1:0] sel, input int addr, input point_t p);
    @(negedge clk);
    host_req   = 1'b1;
    host_we    = 1'b1;
    host_sel   = sel;
    host_addr  = 32'(addr);
    host_wdata = p;
    #1;
    while (!host_gnt) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 host_req = 1'b0;
  endtask

  task automatic host_read_result(input int addr, output result_t r);
    @(negedge clk);
    host_req  = 1'b1;
    host_we   = 1'b0;
    host_sel  = 2'd2;
    host_addr = 32'(addr);
    #1;
    while (!host_gnt) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 host_req = 1'b0;
    @(negedge clk);
    while (!host_rvalid) @(negedge clk);
    r = host_rdata;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // build the tree and the queries, load them into the accelerator
  task automatic build_and_load();
    int lo[NTOP][3], hi[NTOP][3];
    int next_addr;
    for (int k = 0; k < 3; k++) begin
      lo[0][k] = 0;
      hi[0][k] = 1 << BOX_LOG;
    end
    for (int i = 0; i < NTOP; i++) begin
      int d, dim, mid;
      point_t p;
      d = $clog2(i + 2) - 1;
      dim = d % 3;
      mid = (lo[i][dim] + hi[i][dim]) / 2;
      p.x = (dim == 0) ? coord_t'(mid) : rnd_in(lo[i][0], hi[i][0]);
      p.y = (dim == 1) ? coord_t'(mid) : rnd_in(lo[i][1], hi[i][1]);
      p.z = (dim == 2) ? coord_t'(mid) : rnd_in(lo[i][2], hi[i][2]);
      pts[i] = p;
      if (d < HTOP) begin
        for (int k = 0; k < 3; k++) begin
          lo[2*i+1][k] = lo[i][k]; hi[2*i+1][k] = hi[i][k];
          lo[2*i+2][k] = lo[i][k]; hi[2*i+2][k] = hi[i][k];
        end
        hi[2*i+1][dim] = mid;
        lo[2*i+2][dim] = mid;
      end
    end
    leaf_tab_base = paddr_t'(NTOP + 1);
    next_addr = NTOP + 1 + NLEAF;
    for (int l = 0; l < NLEAF; l++) begin
      int n, node;
      point_t desc;
      node = NLEAF - 1 + l;
      n = (l == 1) ? 0 : 1 + int'($urandom % NPTS_MAX_LEAF);   // leaf 1 has an empty Node Set
      desc = '{x: coord_t'(next_addr), y: coord_t'(n), z: '0};
      host_write(2'd1, NTOP + 1 + l, desc);
      for (int j = 0; j < n; j++) begin
        point_t p;
        p.x = rnd_in(lo[node][0], hi[node][0]);
        p.y = rnd_in(lo[node][1], hi[node][1]);
        p.z = rnd_in(lo[node][2], hi[node][2]);
        pts[next_addr] = p;
        host_write(2'd1, next_addr, p);
        next_addr++;
      end
    end
    for (int i = 0; i < NTOP; i++) host_write(2'd1, i, pts[i]);
    for (int q = 0; q < NQ; q++) begin
      if (q >= NQ - DUP) begin
        qs[q] = qs[q - (NQ - DUP)];
        qs[q].x = qs[q].x + 1;
      end else if (q < HOT) begin
        // a cluster inside one leaf: more leaders than a leader group holds
        qs[q].x = rnd_in(0, 1 << (BOX_LOG - 3));
        qs[q].y = rnd_in(0, 1 << (BOX_LOG - 3));
        qs[q].z = rnd_in(0, 1 << (BOX_LOG - 3));
      end else begin
        qs[q].x = rnd_in(0, 1 << BOX_LOG);
        qs[q].y = rnd_in(0, 1 << BOX_LOG);
        qs[q].z = rnd_in(0, 1 << BOX_LOG);
      end
      host_write(2'd0, q, qs[q]);
    end
    // brute-force reference
    for (int q = 0; q < NQ; q++) begin
      exact_d[q] = DIST_MAX;
      foreach (pts[a]) if (d2(qs[q], pts[a]) < exact_d[q]) exact_d[q] = d2(qs[q], pts[a]);
    end
  endtask

  task automatic run_frame(input bit approx, output longint unsigned ncyc);
    longint unsigned t0;
    @(negedge clk);
    approx_en = approx;
    start     = 1'b1;
    @(negedge clk);
    start     = 1'b0;
    t0 = cycles;
    while (!done) @(posedge clk);
    ncyc = cycles - t0;
  endtask

  task automatic check_results(input bit approx);
    int n_exact = 0;
    for (int q = 0; q < NQ; q++) begin
      result_t r;
      host_read_result(q, r);
      check(r.found, $sformatf("query %0d has no result", q));
      check(pts.exists(int'(r.idx)) && d2(qs[q], pts[int'(r.idx)]) == r.dsq,
            $sformatf("query %0d: reported distance is not the distance of point %0d", q, r.idx));
      if (!approx)
        check(r.dsq == exact_d[q], $sformatf("query %0d: got %0d, nearest is %0d", q, r.dsq, exact_d[q]));
      else begin
        check(r.dsq >= exact_d[q], $sformatf("query %0d: approximate result below the exact one", q));
        if (r.dsq == exact_d[q]) n_exact++;
      end
    end
    if (approx) $display("approximate run: %0d of %0d queries exact", n_exact, NQ);
  endtask

  task automatic mech(input string name, input longint unsigned n);
    $display("  %-28s %0d", name, n);
    check(n > 0, {"mechanism never happened: ", name});
  endtask

  initial begin
    longint unsigned c_exact, c_approx;
    stats_t s1;
    htop = DEPTH_W'(HTOP); approx_en = 0; thd_sq = dist_t'(THD_SQ); num_queries = 17'(NQ);
    start = 0; host_req = 0; host_we = 0; host_sel = 0; host_addr = 0; host_wdata = '0;
    leaf_tab_base = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    build_and_load();
    $display("loaded at cycle %0d", cycles);
    $display("tree: htop=%0d, %0d points, %0d queries", HTOP, pts.num(), NQ);

    run_frame(1'b0, c_exact);
    check_results(1'b0);
    s1 = stats;
    $display("exact run: %0d cycles", c_exact);
    mech("node bypass",              s1.ru_bypass);
    mech("node forwarding",          s1.ru_forward);
    mech("FE->BE->FE round trips",   s1.leaf_issues);
    mech("multi-query MQSN batches", longint'(s1.su_batch_queries) - longint'(s1.su_batches));
    mech("node cache hits",          s1.nc_hit);
    mech("node cache misses",        s1.nc_miss);
    $display("  %-28s %0d", "QDN contention cycles", s1.qdn_conflicts);
    check(s1.queries_done == NQ, "queries_done counter");
    check(s1.leaf_issues >= NQ, "every query visits at least one leaf");

    run_frame(1'b1, c_approx);
    check_results(1'b1);
    $display("approximate run: %0d cycles", c_approx);
    mech("followers",                stats.followers);
    mech("leaders recorded",         stats.leaders_added);
    mech("leader group full",        stats.leaders_dropped);
    mech("node sets skipped",        stats.sets_skipped);
    check(stats.su_nodes - s1.su_nodes < s1.su_nodes, "approximate search streams fewer nodes");
    $display("nodes streamed: exact %0d, approximate %0d", s1.su_nodes, stats.su_nodes - s1.su_nodes);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
