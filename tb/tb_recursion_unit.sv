// tb_recursion_unit: one recursion unit on behavioural memories, with the
// back-end replaced by a software model that searches the leaf's Node Set
// and returns the query to the FE Query Queue model. A top-tree of height 3
// (8 leaves) with box-midpoint splits is built; 40 random queries are
// searched. Checks: every final result equals a brute-force nearest
// neighbour over all points; each query reports done once; bypassing and
// forwarding occur; and, with forwarding and memories that grant at once,
// a new query reaches its first leaf exactly 4 + 4*(htop+1) cycles after it
// is taken from the queue (four cycles per top-tree node, no stall).
module tb_recursion_unit;
  import tigris_pkg::*;
  localparam int QMAX = 64, PBUF_DEPTH = 256, HTOP = 3, NQ = 40;
  localparam int QAW = 6, PAW = 8, SAW = $clog2(QMAX * HTOP_MAX);
  localparam int NTOP = (1 << (HTOP + 1)) - 1, NLEAF = 1 << HTOP;

  logic clk = 0, rst_n = 0;
  logic fqq_req, fqq_gnt;
  fq_token_t fqq_token;
  logic qb_req, qb_gnt, qb_rvalid, pb_req, pb_gnt, pb_rvalid;
  logic sb_req, sb_we, sb_gnt, sb_rvalid, rb_req, rb_we, rb_gnt, rb_rvalid;
  logic [QAW-1:0] qb_addr, rb_addr;
  logic [PAW-1:0] pb_addr;
  logic [SAW-1:0] sb_addr;
  point_t qb_rdata, pb_rdata;
  stack_entry_t sb_wdata, sb_rdata;
  result_t rb_wdata, rb_rdata;
  logic be_valid, be_ready, done;
  be_token_t be_token;
  qid_t done_qid;
  logic [31:0] cnt_nodes, cnt_bypass, cnt_forward, cnt_leaf_issue;
  int checks = 0, failures = 0;

  recursion_unit #(.QMAX(QMAX), .PBUF_DEPTH(PBUF_DEPTH)) dut (.*, .htop(DEPTH_W'(HTOP)));

  tb_mem_model #(.DEPTH(QMAX), .WIDTH($bits(point_t))) m_qb (.clk, .req(qb_req), .we(1'b0),
    .addr(qb_addr), .wdata('0), .gnt(qb_gnt), .rvalid(qb_rvalid), .rdata(qb_rdata));
  tb_mem_model #(.DEPTH(PBUF_DEPTH), .WIDTH($bits(point_t))) m_pb (.clk, .req(pb_req), .we(1'b0),
    .addr(pb_addr), .wdata('0), .gnt(pb_gnt), .rvalid(pb_rvalid), .rdata(pb_rdata));
  tb_mem_model #(.DEPTH(QMAX * HTOP_MAX), .WIDTH($bits(stack_entry_t))) m_sb (.clk, .req(sb_req),
    .we(sb_we), .addr(sb_addr), .wdata(sb_wdata), .gnt(sb_gnt), .rvalid(sb_rvalid), .rdata(sb_rdata));
  tb_mem_model #(.DEPTH(QMAX), .WIDTH($bits(result_t))) m_rb (.clk, .req(rb_req), .we(rb_we),
    .addr(rb_addr), .wdata(rb_wdata), .gnt(rb_gnt), .rvalid(rb_rvalid), .rdata(rb_rdata));

  always #5 clk = ~clk;

  point_t tree [NTOP];
  point_t sets [NLEAF][$];
  point_t qs [NQ];
  fq_token_t fqq [$];
  int ndone [NQ];

  function automatic dist_t d2(point_t a, point_t b);
    longint dx, dy, dz;
    dx = longint'(a.x) - longint'(b.x); dy = longint'(a.y) - longint'(b.y); dz = longint'(a.z) - longint'(b.z);
    return dist_t'(dx * dx + dy * dy + dz * dz);
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  // FE Query Queue model
  // (head registered at the falling edge so the model never races the DUT)
  logic fq_has = 1'b0;
  fq_token_t fq_head = '0;
  always @(negedge clk) begin
    fq_has  <= fqq.size() > 0;
    fq_head <= (fqq.size() > 0) ? fqq[0] : '0;
  end
  assign fqq_gnt   = fqq_req && fq_has;
  assign fqq_token = fq_head;

  // back-end model: exhaustive search of the leaf, then back to the queue
  assign be_ready = 1'b1;
  always @(posedge clk) begin
    if (fqq_gnt) void'(fqq.pop_front());
    if (be_valid) begin
      result_t r;
      int l;
      l = int'(be_token.leaf);
      r = m_rb.mem[be_token.qid];
      foreach (sets[l][j]) begin
        dist_t d;
        d = d2(qs[be_token.qid], sets[l][j]);
        if (!r.found || d < r.dsq) r = '{found: 1'b1, idx: paddr_t'(1000 + l * 32 + j), dsq: d};
      end
      m_rb.mem[be_token.qid] = r;
      fqq.push_back('{qid: be_token.qid, sp: be_token.sp, started: 1'b1});
    end
    if (rst_n && done) ndone[done_qid]++;
  end

  initial begin
    int lo[NTOP][3], hi[NTOP][3];
    for (int k = 0; k < 3; k++) begin lo[0][k] = 0; hi[0][k] = 4096; end
    for (int i = 0; i < NTOP; i++) begin
      int d, dim, mid;
      d = $clog2(i + 2) - 1; dim = d % 3;
      mid = (lo[i][dim] + hi[i][dim]) / 2;
      tree[i].x = (dim == 0) ? mid : lo[i][0] + int'($urandom % unsigned'(hi[i][0] - lo[i][0]));
      tree[i].y = (dim == 1) ? mid : lo[i][1] + int'($urandom % unsigned'(hi[i][1] - lo[i][1]));
      tree[i].z = (dim == 2) ? mid : lo[i][2] + int'($urandom % unsigned'(hi[i][2] - lo[i][2]));
      m_pb.mem[i] = tree[i];
      if (d < HTOP) begin
        for (int k = 0; k < 3; k++) begin
          lo[2*i+1][k] = lo[i][k]; hi[2*i+1][k] = hi[i][k];
          lo[2*i+2][k] = lo[i][k]; hi[2*i+2][k] = hi[i][k];
        end
        hi[2*i+1][dim] = mid; lo[2*i+2][dim] = mid;
      end else begin
        int n;
        n = 1 + int'($urandom % 10);
        for (int j = 0; j < n; j++)
          sets[i - (NLEAF - 1)].push_back('{x: coord_t'(lo[i][0] + int'($urandom % unsigned'(hi[i][0] - lo[i][0]))),
                                            y: coord_t'(lo[i][1] + int'($urandom % unsigned'(hi[i][1] - lo[i][1]))),
                                            z: coord_t'(lo[i][2] + int'($urandom % unsigned'(hi[i][2] - lo[i][2])))});
      end
    end
    for (int q = 0; q < NQ; q++) begin
      qs[q] = '{x: coord_t'($urandom % 4096), y: coord_t'($urandom % 4096), z: coord_t'($urandom % 4096)};
      m_qb.mem[q] = qs[q];
      ndone[q] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // latency of the first descent
    begin
      int t;
      fqq.push_back('{qid: '0, sp: '0, started: 1'b0});
      t = 0;
      @(posedge clk);
      while (!fqq_gnt) @(posedge clk);
      @(posedge clk);
      while (!be_valid) begin t++; @(posedge clk); end
      chk(t + 1 == 4 + 4 * (HTOP + 1), $sformatf("first leaf after %0d cycles, expected %0d", t + 1, 4 + 4 * (HTOP + 1)));
    end
    for (int q = 1; q < NQ; q++) fqq.push_back('{qid: qid_t'(q), sp: '0, started: 1'b0});
    fork
      begin
        int all;
        do begin
          @(posedge clk);
          all = 1;
          for (int q = 0; q < NQ; q++) if (ndone[q] == 0) all = 0;
        end while (!all);
      end
    join
    repeat (10) @(posedge clk);
    for (int q = 0; q < NQ; q++) begin
      dist_t best;
      result_t r;
      best = DIST_MAX;
      for (int i = 0; i < NTOP; i++) if (d2(qs[q], tree[i]) < best) best = d2(qs[q], tree[i]);
      for (int l = 0; l < NLEAF; l++) foreach (sets[l][j]) if (d2(qs[q], sets[l][j]) < best) best = d2(qs[q], sets[l][j]);
      r = m_rb.mem[q];
      chk(r.found && r.dsq == best, $sformatf("query %0d: %0d, nearest %0d", q, r.dsq, best));
      chk(ndone[q] == 1, $sformatf("query %0d done %0d times", q, ndone[q]));
    end
    chk(cnt_bypass > 0, "no node was bypassed");
    chk(cnt_forward > 0, "no node was forwarded");
    chk(cnt_leaf_issue >= NQ, "leaf issues");
    $display("nodes %0d bypassed %0d forwarded %0d leaf issues %0d", cnt_nodes, cnt_bypass, cnt_forward, cnt_leaf_issue);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog: state %0d, queue %0d, leaf issues %0d", dut.st, fqq.size(), cnt_leaf_issue);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
