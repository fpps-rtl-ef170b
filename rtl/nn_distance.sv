// nn_distance: the "Distance" unit inside a processing element.
//
// Computes the squared Euclidean distance between a source point p and a
// target point q in two registered stages: the three coordinate differences
// (33 bits each) are registered in the first cycle, their squares summed and
// registered in the second. d2 therefore belongs to the inputs applied two
// cycles earlier. The square root is never taken: ordering by squared distance
// gives the same nearest neighbour, and the maximum correspondence distance is
// squared once instead. The squared form and the pipelining are this design's
// choices.
module nn_distance
  import fpps_pkg::*;
(
  input  logic   clk,
  input  point_t p,
  input  point_t q,
  output dist_t  d2
);
  typedef logic signed [COORD_W:0] diff_t;

  diff_t dx, dy, dz;

  always_ff @(posedge clk) begin
    dx <= diff_t'(q.x) - diff_t'(p.x);
    dy <= diff_t'(q.y) - diff_t'(p.y);
    dz <= diff_t'(q.z) - diff_t'(p.z);
  end

  always_ff @(posedge clk) begin
    d2 <= dist_t'(dx * dx) + dist_t'(dy * dy) + dist_t'(dz * dz);
  end
endmodule
