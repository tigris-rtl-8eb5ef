// recursion_unit: one Recursion Unit (RU) of the front-end. It walks the
// top-tree depth-first for one query at a time and hands the query to the
// back-end whenever it reaches a top-tree leaf.
//
// Operation follows the six steps of the paper (Fig. 16):
//   FQ  take a token from the FE Query Queue, read the query point from the
//       Query Buffer and its current nearest neighbour from the Result Buffer;
//   RS  pop the top of the query's stack (Query Stack Buffer); the entry holds
//       the node address, its depth (idx) and xdist, the squared distance
//       from the query to the parent's splitting plane;
//   RN  read the node point from the Input Point Buffer;
//   CD  compute the distance to the node and the signed offset dx along the
//       node's split dimension, and pick the near and far child;
//   PI  insert the node into the result if it is closer, push the far child
//       with xdist = dx^2;
//   CL  at a top-tree leaf, write the result back and send the query, its leaf
//       id and its stack depth to the back-end; when the stack is empty the
//       query is finished.
// A query that returns from the back-end re-enters at FQ with started=1 and
// continues popping its stack, so backtracking uses the tighter distance the
// leaf search produced.
//
// Node forwarding (ENABLE_FORWARD): the near child, which would be pushed last
// and popped next, is passed straight from CD/PI to RN and never touches the
// stack. Node bypassing (ENABLE_BYPASS): a popped entry whose xdist is not
// smaller than the current nearest distance is discarded right after RS,
// without RN, CD or PI. With bypassing off the pruned node travels to PI and
// is dropped there. Both follow the paper; the paper's configuration has both
// on.
//
// Departures, all this design's choices: the stages of one RU run as a
// state machine, one query in flight per unit, with each memory access going
// through the shared global-buffer arbiters (req held until gnt, read data one
// cycle after the grant); with forwarding, PI's stack push and the next node's
// RN read are issued in the same cycle. The tree layout (heap order, split
// dimension = depth mod 3) is also this design's choice. Without forwarding a
// query may need htop+1 stack entries, so that variant requires
// htop < HTOP_MAX.
module recursion_unit
  import tigris_pkg::*;
#(
  parameter int  QMAX           = 131072,
  parameter int  PBUF_DEPTH     = 132096,
  parameter bit  ENABLE_BYPASS  = 1'b1,
  parameter bit  ENABLE_FORWARD = 1'b1,
  localparam int QAW = $clog2(QMAX),
  localparam int SAW = $clog2(QMAX * HTOP_MAX),
  localparam int PAW = $clog2(PBUF_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [DEPTH_W-1:0] htop,          // top-tree leaves are at this depth
  // FE Query Queue
  output logic               fqq_req,
  input  logic               fqq_gnt,
  input  fq_token_t          fqq_token,
  // Query Buffer (read only)
  output logic               qb_req,
  output logic [QAW-1:0]     qb_addr,
  input  logic               qb_gnt,
  input  logic               qb_rvalid,
  input  point_t             qb_rdata,
  // Input Point Buffer (read only)
  output logic               pb_req,
  output logic [PAW-1:0]     pb_addr,
  input  logic               pb_gnt,
  input  logic               pb_rvalid,
  input  point_t             pb_rdata,
  // Query Stack Buffer
  output logic               sb_req,
  output logic               sb_we,
  output logic [SAW-1:0]     sb_addr,
  output stack_entry_t       sb_wdata,
  input  logic               sb_gnt,
  input  logic               sb_rvalid,
  input  stack_entry_t       sb_rdata,
  // Result Buffer
  output logic               rb_req,
  output logic               rb_we,
  output logic [QAW-1:0]     rb_addr,
  output result_t            rb_wdata,
  input  logic               rb_gnt,
  input  logic               rb_rvalid,
  input  result_t            rb_rdata,
  // to the Query Distribution Network
  output logic               be_valid,
  output be_token_t          be_token,
  input  logic               be_ready,
  // status
  output logic               done,          // one-cycle pulse: a query finished
  output qid_t               done_qid,
  output logic [31:0]        cnt_nodes,     // nodes that went through CD
  output logic [31:0]        cnt_bypass,
  output logic [31:0]        cnt_forward,
  output logic [31:0]        cnt_leaf_issue
);
  typedef enum logic [3:0] {
    S_IDLE, S_FQ_Q, S_FQ_QW, S_FQ_R, S_FQ_RW, S_RS, S_RS_W, S_RN, S_RN_W,
    S_CD, S_PI, S_PI_NEAR, S_CL_W, S_CL, S_FIN_W
  } state_e;

  state_e        st;
  fq_token_t     tok;
  point_t        qpt, npt;
  result_t       best;
  stack_entry_t  cur;
  dist_t         dist_r, dx2_r;
  paddr_t        near_r, far_r;
  dist_t         dist_c;
  logic signed [COORD_W:0]     dx_c;
  logic signed [2*COORD_W+1:0] dx2_c;
  logic [1:0]    dim;
  paddr_t        leaf_first;

  dist_unit u_dist (.a(qpt), .b(npt), .dsq(dist_c));

  always_comb begin
    dim = 2'(cur.depth % 3);
    unique case (dim)
      2'd0:    dx_c = $signed({qpt.x[COORD_W-1], qpt.x}) - $signed({npt.x[COORD_W-1], npt.x});
      2'd1:    dx_c = $signed({qpt.y[COORD_W-1], qpt.y}) - $signed({npt.y[COORD_W-1], npt.y});
      default: dx_c = $signed({qpt.z[COORD_W-1], qpt.z}) - $signed({npt.z[COORD_W-1], npt.z});
    endcase
    dx2_c      = dx_c * dx_c;
    leaf_first = paddr_t'((32'd1 << htop) - 1);
  end

  function automatic logic pruned(input dist_t xdist, input result_t b);
    return b.found && (xdist >= b.dsq);
  endfunction

  wire is_leaf = (cur.depth == htop);
  wire better  = !best.found || (dist_r < best.dsq);

  // ---------------- memory requests ----------------
  always_comb begin
    fqq_req  = (st == S_IDLE);
    qb_req   = (st == S_FQ_Q);
    qb_addr  = QAW'(tok.qid);
    pb_req   = (st == S_RN);
    pb_addr  = PAW'(cur.node);
    sb_req   = 1'b0;
    sb_we    = 1'b0;
    sb_addr  = SAW'(int'(tok.qid) * HTOP_MAX + int'(tok.sp));
    sb_wdata = '0;
    rb_req   = (st == S_FQ_R) || (st == S_CL_W) || (st == S_FIN_W);
    rb_we    = (st != S_FQ_R);
    rb_addr  = QAW'(tok.qid);
    rb_wdata = best;
    be_valid = (st == S_CL);
    be_token = '{qid: tok.qid, leaf: leaf_t'(cur.node - leaf_first), sp: tok.sp};
    unique case (st)
      S_RS: begin
        sb_req  = (tok.sp != '0);
        sb_addr = SAW'(int'(tok.qid) * HTOP_MAX + int'(tok.sp) - 1);
      end
      S_PI: if (!is_leaf && !(ENABLE_BYPASS == 1'b0 && pruned(cur.xdist, best))) begin
        sb_req   = 1'b1;
        sb_we    = 1'b1;
        sb_wdata = '{node: far_r, depth: cur.depth + 1'b1, xdist: dx2_r};
      end
      S_PI_NEAR: begin
        sb_req   = 1'b1;
        sb_we    = 1'b1;
        sb_wdata = '{node: near_r, depth: cur.depth + 1'b1, xdist: '0};
      end
      default: ;
    endcase
  end

  // ---------------- state machine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st             <= S_IDLE;
      tok            <= '0;
      qpt            <= '0;
      npt            <= '0;
      best           <= '0;
      cur            <= '0;
      dist_r         <= '0;
      dx2_r          <= '0;
      near_r         <= '0;
      far_r          <= '0;
      done           <= 1'b0;
      done_qid       <= '0;
      cnt_nodes      <= '0;
      cnt_bypass     <= '0;
      cnt_forward    <= '0;
      cnt_leaf_issue <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (fqq_gnt) begin
          tok <= fqq_token;
          st  <= S_FQ_Q;
        end
        S_FQ_Q:  if (qb_gnt) st <= S_FQ_QW;
        S_FQ_QW: if (qb_rvalid) begin
          qpt <= qb_rdata;
          if (tok.started) st <= S_FQ_R;
          else begin
            // a new query starts at the root with an empty stack
            best        <= '{found: 1'b0, idx: '0, dsq: DIST_MAX};
            cur         <= '{node: '0, depth: '0, xdist: '0};
            tok.started <= 1'b1;
            tok.sp      <= '0;
            st          <= S_RN;
          end
        end
        S_FQ_R:  if (rb_gnt) st <= S_FQ_RW;
        S_FQ_RW: if (rb_rvalid) begin
          best <= rb_rdata;
          st   <= S_RS;
        end
        S_RS: begin
          if (tok.sp == '0) st <= S_FIN_W;
          else if (sb_gnt) begin
            tok.sp <= tok.sp - 1'b1;
            st     <= S_RS_W;
          end
        end
        S_RS_W: if (sb_rvalid) begin
          if (ENABLE_BYPASS && pruned(sb_rdata.xdist, best)) begin
            cnt_bypass <= cnt_bypass + 1;
            st         <= S_RS;
          end else begin
            cur <= sb_rdata;
            st  <= S_RN;
          end
        end
        S_RN:   if (pb_gnt) st <= S_RN_W;
        S_RN_W: if (pb_rvalid) begin
          npt <= pb_rdata;
          st  <= S_CD;
        end
        S_CD: begin
          dist_r    <= dist_c;
          dx2_r     <= dist_t'(unsigned'(dx2_c));
          near_r    <= (dx_c < 0) ? paddr_t'(2 * cur.node + 1) : paddr_t'(2 * cur.node + 2);
          far_r     <= (dx_c < 0) ? paddr_t'(2 * cur.node + 2) : paddr_t'(2 * cur.node + 1);
          cnt_nodes <= cnt_nodes + 1;
          st        <= S_PI;
        end
        S_PI: begin
          if (!ENABLE_BYPASS && pruned(cur.xdist, best)) begin
            st <= S_RS;                        // pruned node dropped at PI
          end else if (is_leaf) begin
            if (better) best <= '{found: 1'b1, idx: cur.node, dsq: dist_r};
            st <= S_CL_W;
          end else if (sb_gnt) begin
            if (better) best <= '{found: 1'b1, idx: cur.node, dsq: dist_r};
            tok.sp <= tok.sp + 1'b1;
            if (ENABLE_FORWARD) begin
              // near child goes straight to RN; its xdist is zero by definition
              cur         <= '{node: near_r, depth: cur.depth + 1'b1, xdist: '0};
              cnt_forward <= cnt_forward + 1;
              st          <= S_RN;
            end else begin
              st <= S_PI_NEAR;
            end
          end
        end
        S_PI_NEAR: if (sb_gnt) begin
          tok.sp <= tok.sp + 1'b1;
          st     <= S_RS;
        end
        S_CL_W: if (rb_gnt) st <= S_CL;
        S_CL:   if (be_ready) begin
          cnt_leaf_issue <= cnt_leaf_issue + 1;
          st             <= S_IDLE;
        end
        S_FIN_W: if (rb_gnt) begin
          done     <= 1'b1;
          done_qid <= tok.qid;
          st       <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (st == S_PI && sb_gnt) |-> (tok.sp < SP_W'(HTOP_MAX)));
endmodule
