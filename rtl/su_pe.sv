// su_pe: one Processing Element (PE) of a search unit.
//
// A PE holds one query ("query stationary"): its query point, its current
// nearest neighbour and, for approximate search, its closest leader. Node-set
// points stream through the PEs of a search unit as a 1D systolic array: each
// element is registered in the PE's Search Node register (stage 1), which also
// feeds the next PE, its squared distance to the query is computed and
// registered as Current Dist (stage 2), and stage 3 inserts it into the result
// when it is nearer than the current nearest distance (the threshold). No
// element depends on another, so the pipeline never stalls. These three
// stages follow the paper (Fig. 17).
//
// Leader check (approximate search): the search unit first streams the
// leaders of the leaf node through the same array (kind EL_LEADER); stage 3
// then keeps the closest leader and that leader's result point. A one-cycle
// resolve pulse afterwards decides: if the closest leader is nearer than
// thd_sq the query becomes a follower, the distance to the leader's result
// is computed in the same datapath and inserted, and the PE ignores the node
// set that follows. Otherwise the query searches the node set exactly and
// also records its best point within this leaf (leaf_best), which the search
// unit stores as a new leader. The paper reuses the PEs for the leader check;
// the resolve step and leaf_best bookkeeping are this design's own.
//
// Interface: clear (with active) starts a batch; ld_q / ld_best load the
// query point and its stored nearest neighbour; s_in / s_out are the stream;
// best, follower and leaf_best are read by the search unit after the stream
// has drained (stage 3 commits 3 cycles after an element enters).
module su_pe
  import tigris_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    active,
  input  logic    ld_q,
  input  point_t  q_in,
  input  logic    ld_best,
  input  result_t best_in,
  input  logic    resolve,
  input  dist_t   thd_sq,
  input  stream_t s_in,
  output stream_t s_out,
  output result_t best,
  output logic    follower,
  output result_t leaf_best,
  output point_t  leaf_best_pt,
  output logic    is_active
);
  point_t  q;
  stream_t sn, sn2;         // stage 1 (Search Node) and stage 2 element
  dist_t   cd;              // stage 2 result (Current Dist.)
  dist_t   d_c;
  point_t  cmp_pt;
  logic    lead_found;
  dist_t   lead_d;
  paddr_t  lead_idx;
  point_t  lead_pt;
  logic    res_pend;

  logic    active_r;

  assign s_out     = sn;
  assign is_active = active_r;

  // stage 2 compute input: the streamed point, or the leader's result on resolve
  assign cmp_pt = resolve ? lead_pt : sn.pt;
  dist_unit u_dist (.a(q), .b(cmp_pt), .dsq(d_c));

  wire follow_now = active_r && lead_found && (lead_d < thd_sq);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q            <= '0;
      sn           <= '0;
      sn2          <= '0;
      cd           <= '0;
      best         <= '0;
      follower     <= 1'b0;
      leaf_best    <= '0;
      leaf_best_pt <= '0;
      lead_found   <= 1'b0;
      lead_d       <= '0;
      lead_idx     <= '0;
      lead_pt      <= '0;
      res_pend     <= 1'b0;
      active_r     <= 1'b0;
    end else begin
      // stage 1: Search Node register, also the link to the next PE
      sn  <= s_in;
      // stage 2: distance
      sn2 <= resolve ? '0 : sn;
      cd  <= d_c;
      res_pend <= 1'b0;

      if (clear) begin
        active_r   <= active;
        follower   <= 1'b0;
        lead_found <= 1'b0;
        lead_d     <= DIST_MAX;
        leaf_best  <= '{found: 1'b0, idx: '0, dsq: DIST_MAX};
      end
      if (ld_q)    q    <= q_in;
      if (ld_best) best <= best_in;

      if (resolve) begin
        follower <= follow_now;
        res_pend <= follow_now;
      end

      // stage 3: insert into the result
      if (res_pend) begin
        if (!best.found || cd < best.dsq) best <= '{found: 1'b1, idx: lead_idx, dsq: cd};
      end else if (sn2.valid && active_r) begin
        if (sn2.kind == EL_LEADER) begin
          if (!lead_found || cd < lead_d) begin
            lead_found <= 1'b1;
            lead_d     <= cd;
            lead_idx   <= sn2.idx;
            lead_pt    <= sn2.aux_pt;
          end
        end else if (!follower) begin
          if (!best.found || cd < best.dsq) best <= '{found: 1'b1, idx: sn2.idx, dsq: cd};
          if (!leaf_best.found || cd < leaf_best.dsq) begin
            leaf_best    <= '{found: 1'b1, idx: sn2.idx, dsq: cd};
            leaf_best_pt <= sn2.pt;
          end
        end
      end
    end
  end
endmodule
