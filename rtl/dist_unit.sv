// dist_unit: the "Compute Logic" of a recursion unit and of a processing
// element. It returns the squared Euclidean distance between two points.
//
// The square root is never taken: nearest-neighbour comparisons and the
// pruning test only need the ordering of distances, so squared values are
// compared throughout the design. Each coordinate difference is 33 bits wide
// and its square 66 bits; the sum of three squares fits DIST_W = 68 bits, so
// the result is exact. The paper uses 32-bit floating point here; integer
// arithmetic is this design's choice. Purely combinational; callers register
// the result in their own pipeline stage.
module dist_unit
  import tigris_pkg::*;
(
  input  point_t a,
  input  point_t b,
  output dist_t  dsq
);
  logic signed [COORD_W:0]     dx, dy, dz;
  logic signed [2*COORD_W+1:0] sx, sy, sz;

  always_comb begin
    dx = $signed({a.x[COORD_W-1], a.x}) - $signed({b.x[COORD_W-1], b.x});
    dy = $signed({a.y[COORD_W-1], a.y}) - $signed({b.y[COORD_W-1], b.y});
    dz = $signed({a.z[COORD_W-1], a.z}) - $signed({b.z[COORD_W-1], b.z});
    sx = dx * dx;   // operands widened to 66 bits by the assignment context
    sy = dy * dy;
    sz = dz * dz;
    dsq = DIST_W'(unsigned'(sx)) + DIST_W'(unsigned'(sy)) + DIST_W'(unsigned'(sz));
  end
endmodule
