// obstacle_check: the Check unit of the collision checker. It reports whether
// a point lies inside one axis-aligned obstacle bounding box.
//
// Obstacles are modelled as rectangles given by their minimum and maximum
// corners; a point collides when every coordinate lies between the two
// corners. Points on the boundary count as colliding (this design's
// choice), and an entry with valid low never collides. Combinational.
module obstacle_check
  import p3net_pkg::*;
#(
  parameter int D = 2
) (
  input  logic          valid,
  input  fx_t [D-1:0]   pt,
  input  fx_t [D-1:0]   box_min,
  input  fx_t [D-1:0]   box_max,
  output logic          hit
);

  always_comb begin
    hit = valid;
    for (int k = 0; k < D; k++)
      if (pt[k] < box_min[k] || pt[k] > box_max[k]) hit = 1'b0;
  end

endmodule
