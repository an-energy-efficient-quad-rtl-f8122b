// search_region: strip-shaped stereo search region test.
//
// A right-image feature is a candidate for a left-image feature when both
// come from the same pyramid level, their rows differ by at most ROW_TOL
// (rectified cameras: the epipolar line is the image row) and the
// disparity xl - xr lies in 0..MAX_DISP. The paper specifies a strip-like
// region decided from the coordinates; ROW_TOL and MAX_DISP are this
// design's values. Combinational.
module search_region
  import vf_pkg::*;
#(
  parameter int unsigned ROW_TOL  = 2,
  parameter int unsigned MAX_DISP = 128
) (
  input  feat_t left,
  input  feat_t right,
  output logic  in_region
);
  logic signed [YW:0] dy;
  logic signed [XW:0] dx;
  always_comb begin
    dy = signed'({1'b0, left.y}) - signed'({1'b0, right.y});
    dx = signed'({1'b0, left.x}) - signed'({1'b0, right.x});
    in_region = (left.level == right.level)
             && (dy <= signed'((YW+1)'(ROW_TOL))) && (dy >= -signed'((YW+1)'(ROW_TOL)))
             && (dx >= 0) && (dx <= signed'((XW+1)'(MAX_DISP)));
  end
endmodule
