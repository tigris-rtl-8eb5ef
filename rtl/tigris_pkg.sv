// tigris_pkg: types and constants shared by the KD-tree search accelerator.
//
// A point is three signed 32-bit coordinates. Distances are squared Euclidean
// distances, kept at full precision (68 bits) so that no comparison is ever
// rounded. The paper computes distances in 32-bit floating point; this design
// uses fixed-point integer coordinates instead, which makes every result
// exactly reproducible (see the README for the consequences).
//
// The top-tree is stored in heap order in the Input Point Buffer: node i has
// children 2i+1 and 2i+2, splits on dimension (depth mod 3), and the nodes at
// depth htop are the top-tree leaves. Leaf l (0 .. 2^htop-1) is node
// 2^htop-1+l. Each leaf owns a Node Set whose descriptor sits at
// leaf_tab_base+l in the Input Point Buffer (x = first address, y = count).
package tigris_pkg;

  localparam int COORD_W  = 32;
  localparam int DIST_W   = 2 * (COORD_W + 1) + 2;   // 3 squares of 33-bit differences
  localparam int QID_W    = 17;                      // up to 131072 queries
  localparam int PADDR_W  = 19;                      // Input Point Buffer word address
  localparam int LEAF_W   = 18;                      // up to 2^18 top-tree leaves
  localparam int HTOP_MAX = 18;                      // deepest top-tree the stack holds
  localparam int DEPTH_W  = 5;                       // 0 .. HTOP_MAX
  localparam int SP_W     = 5;                       // stack pointer 0 .. HTOP_MAX

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic [DIST_W-1:0]         dist_t;
  typedef logic [QID_W-1:0]          qid_t;
  typedef logic [PADDR_W-1:0]        paddr_t;
  typedef logic [LEAF_W-1:0]         leaf_t;

  localparam dist_t DIST_MAX = '1;

  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t z;
  } point_t;

  // Token circulating through the FE Query Queue. started=0 marks a query that
  // has not yet entered the top-tree; sp is its saved recursion-stack depth.
  typedef struct packed {
    qid_t          qid;
    logic [SP_W-1:0] sp;
    logic          started;
  } fq_token_t;

  // Token sent from a recursion unit to a search unit.
  typedef struct packed {
    qid_t          qid;
    leaf_t         leaf;
    logic [SP_W-1:0] sp;
  } be_token_t;

  // One Query Stack Buffer entry (Fig. 16: Node Addr., idx, xdist).
  typedef struct packed {
    paddr_t             node;    // heap index of the node to visit
    logic [DEPTH_W-1:0] depth;   // idx: depth of that node
    dist_t              xdist;   // squared distance from the query to the parent's split plane
  } stack_entry_t;

  // One Result Buffer entry: the current nearest neighbour of a query.
  typedef struct packed {
    logic   found;
    paddr_t idx;
    dist_t  dsq;
  } result_t;

  // Element streamed through the systolic PE array of a search unit.
  typedef enum logic [0:0] { EL_NODE = 1'b0, EL_LEADER = 1'b1 } el_kind_e;

  typedef struct packed {
    logic     valid;
    el_kind_e kind;
    paddr_t   idx;        // node: point address; leader: address of the leader's result
    point_t   pt;         // node point, or the leader's query point
    point_t   aux_pt;     // leader only: the leader's nearest point
  } stream_t;

  // Leader Buffer entry: a leader query and the result of its exact leaf search.
  typedef struct packed {
    point_t qpt;
    paddr_t res_idx;
    point_t res_pt;
  } leader_t;

  // Event counters of the whole accelerator, summed over all units.
  typedef struct packed {
    logic [31:0] queries_done;
    logic [31:0] ru_nodes;         // top-tree nodes that reached CD
    logic [31:0] ru_bypass;        // stack entries pruned right after RS
    logic [31:0] ru_forward;       // near children forwarded to RN
    logic [31:0] leaf_issues;      // queries sent from the front-end to the back-end
    logic [31:0] su_batches;       // MQSN batches issued
    logic [31:0] su_batch_queries; // queries in those batches
    logic [31:0] su_nodes;         // Node Set points streamed into PE arrays
    logic [31:0] nc_hit;
    logic [31:0] nc_miss;
    logic [31:0] followers;        // queries answered from a leader's result
    logic [31:0] sets_skipped;     // batches made only of followers
    logic [31:0] leaders_added;
    logic [31:0] leaders_dropped;  // inserts refused by a full leader group
    logic [31:0] qdn_conflicts;    // cycles a leaf-ready RU waited for the network
  } stats_t;

endpackage
