// distance_calc -- squared Euclidean distance between two 3-D points.
//
// The front-end's single distance unit. The mapping unit (farthest point
// sampling and neighbour search) and the order generator take turns on it.
// d = (ax-bx)^2 + (ay-by)^2 + (az-bz)^2, exact, unsigned. The square root
// is left out because only comparisons of distances are ever needed.
// Purely combinational: the result is valid in the same cycle as the
// operands. The metric and the single-cycle timing are this design's
// choices; the source architecture only names the unit.
module distance_calc
  import pointer_pkg::*;
(
  input  coord_t a_x, a_y, a_z,
  input  coord_t b_x, b_y, b_z,
  output dist_t  d
);
  logic signed [DIST_W-1:0] dx, dy, dz;
  logic signed [DIST_W-1:0] sx, sy, sz;

  always_comb begin
    dx = DIST_W'(a_x) - DIST_W'(b_x);   // sign-extending casts
    dy = DIST_W'(a_y) - DIST_W'(b_y);
    dz = DIST_W'(a_z) - DIST_W'(b_z);
    sx = dx * dx;
    sy = dy * dy;
    sz = dz * dz;
    d  = $unsigned(sx + sy + sz);
  end
endmodule
