// tb_su_pe: a chain of two PEs, as in a search unit, each holding its own
// query. Checks (1) exact search: after a Node Set has streamed through, each
// PE's result is the nearest streamed point (or its preloaded result, if
// nearer) and its leaf_best the nearest streamed point; (2) the three-stage
// latency: a point entering the chain updates PE k's result exactly k+3
// cycles later; (3) the leader check: a PE whose closest leader is nearer
// than the threshold becomes a follower, takes the leader's result and
// ignores the Node Set, while a PE with no close leader stays exact.
module tb_su_pe;
  import tigris_pkg::*;
  localparam int NPE = 2;
  logic clk = 0, rst_n = 0;
  logic clear, resolve;
  logic [NPE-1:0] active, ld_q, ld_best, follower, is_active;
  point_t q_in;
  result_t best_in;
  dist_t thd_sq;
  stream_t [NPE:0] chain;
  result_t [NPE-1:0] best, leaf_best;
  point_t [NPE-1:0] leaf_best_pt;
  int checks = 0, failures = 0;
  point_t qp [NPE];

  for (genvar p = 0; p < NPE; p++) begin : g
    su_pe u (.clk, .rst_n, .clear, .active(active[p]), .ld_q(ld_q[p]), .q_in, .ld_best(ld_best[p]),
             .best_in, .resolve, .thd_sq, .s_in(chain[p]), .s_out(chain[p+1]), .best(best[p]),
             .follower(follower[p]), .leaf_best(leaf_best[p]), .leaf_best_pt(leaf_best_pt[p]),
             .is_active(is_active[p]));
  end
  always #5 clk = ~clk;

  function automatic dist_t d2(point_t a, point_t b);
    longint dx, dy, dz;
    dx = longint'(a.x) - longint'(b.x); dy = longint'(a.y) - longint'(b.y); dz = longint'(a.z) - longint'(b.z);
    return dist_t'(dx * dx + dy * dy + dz * dz);
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  task automatic start_batch(input result_t b0);
    @(negedge clk);
    clear = 1; active = '1;
    @(negedge clk);
    clear = 0;
    for (int p = 0; p < NPE; p++) begin
      qp[p] = '{x: coord_t'($urandom % 1000), y: coord_t'($urandom % 1000), z: coord_t'($urandom % 1000)};
      ld_q = '0; ld_best = '0; ld_q[p] = 1; ld_best[p] = 1; q_in = qp[p]; best_in = b0;
      @(negedge clk);
    end
    ld_q = '0; ld_best = '0;
  endtask

  task automatic drain();
    chain[0] = '0;
    repeat (NPE + 4) @(negedge clk);
  endtask

  initial begin
    clear = 0; resolve = 0; active = '0; ld_q = '0; ld_best = '0; q_in = '0; best_in = '0;
    thd_sq = 100; chain[0] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // (1) exact search of a random Node Set
    for (int rep = 0; rep < 20; rep++) begin
      dist_t ref_best [NPE];
      point_t pts [16];
      start_batch('{found: 1'b0, idx: '0, dsq: DIST_MAX});
      for (int p = 0; p < NPE; p++) ref_best[p] = DIST_MAX;
      for (int i = 0; i < 16; i++) begin
        pts[i] = '{x: coord_t'($urandom % 1000), y: coord_t'($urandom % 1000), z: coord_t'($urandom % 1000)};
        chain[0] = '{valid: 1'b1, kind: EL_NODE, idx: paddr_t'(100 + i), pt: pts[i], aux_pt: '0};
        for (int p = 0; p < NPE; p++) if (d2(qp[p], pts[i]) < ref_best[p]) ref_best[p] = d2(qp[p], pts[i]);
        @(negedge clk);
      end
      drain();
      for (int p = 0; p < NPE; p++) begin
        chk(best[p].found && best[p].dsq == ref_best[p], $sformatf("PE%0d best %0d expected %0d", p, best[p].dsq, ref_best[p]));
        chk(d2(qp[p], pts[int'(best[p].idx) - 100]) == best[p].dsq, "best index does not match its distance");
        chk(leaf_best[p].dsq == ref_best[p] && leaf_best_pt[p] == pts[int'(leaf_best[p].idx) - 100], "leaf_best");
        chk(!follower[p], "follower without leaders");
      end
    end

    // (2) latency: one point, PE k commits k+3 cycles after it is presented
    start_batch('{found: 1'b0, idx: '0, dsq: DIST_MAX});
    chain[0] = '{valid: 1'b1, kind: EL_NODE, idx: paddr_t'(7), pt: qp[0], aux_pt: '0};
    @(negedge clk);
    chain[0] = '0;
    for (int c = 1; c <= NPE + 3; c++) begin
      for (int p = 0; p < NPE; p++)
        chk(best[p].found == (c >= p + 3), $sformatf("PE%0d result at cycle %0d", p, c));
      @(negedge clk);
    end

    // (3) leader check: leader next to PE0's query, far from PE1's
    start_batch('{found: 1'b1, idx: paddr_t'(1), dsq: dist_t'(64'd100000000)});
    begin
      point_t lq, lr;
      lq = qp[0]; lq.x = lq.x + 3;                       // 9 < thd_sq
      lr = '{x: qp[0].x + 20, y: qp[0].y, z: qp[0].z};   // the leader's result
      chain[0] = '{valid: 1'b1, kind: EL_LEADER, idx: paddr_t'(55), pt: lq, aux_pt: lr};
      @(negedge clk);
      chain[0] = '0;
      drain();
      resolve = 1;
      @(negedge clk);
      resolve = 0;
      @(negedge clk);
      chk(follower[0], "PE0 should follow the leader");
      chk(best[0].idx == 55 && best[0].dsq == 400, $sformatf("follower result %0d/%0d", best[0].idx, best[0].dsq));
      chk(!follower[1] || d2(qp[1], lq) < 100, "PE1 should not follow");
      // a Node Set point right on PE0's query must be ignored by the follower
      chain[0] = '{valid: 1'b1, kind: EL_NODE, idx: paddr_t'(9), pt: qp[0], aux_pt: '0};
      @(negedge clk);
      drain();
      chk(best[0].idx == 55, "follower searched the Node Set");
      chk(follower[1] || best[1].idx == 9 || d2(qp[1], qp[0]) >= best[1].dsq, "exact PE ignored the Node Set");
    end

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
