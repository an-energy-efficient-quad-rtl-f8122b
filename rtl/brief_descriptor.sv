// brief_descriptor: rotated BRIEF descriptor of a smoothed 31x31 patch.
//
// Bit i of the 256-bit descriptor is 1 when p(A_i) < p(B_i), Eq. (2), for
// the i-th test pair of vf_pkg::BRIEF_PAT after rotating both points by
// the orientation bin (theta_bin * 11.25 degrees). Only the test points are
// rotated, never the patch. The rotated offsets of all 32 bins are
// constants computed at elaboration, so the hardware is, per pair and per
// point, a 32-way selection of a patch pixel followed by one comparator.
// The descriptor length (32 x 8 bits) and the rotate-the-pairs scheme are
// the paper's; the pattern and the 32 bins are this design's.
// Combinational.
module brief_descriptor
  import vf_pkg::*;
(
  input  logic [7:0]  win [31][31],
  input  theta_t      theta_bin,
  output desc_t       desc
);
  for (genvar i = 0; i < DESC_W; i++) begin : g_pair
    logic [7:0] pa [NBINS];
    logic [7:0] pb [NBINS];
    for (genvar b = 0; b < NBINS; b++) begin : g_bin
      localparam int AX = rot_x(sx6(BRIEF_PAT[i][0]), sx6(BRIEF_PAT[i][1]), b);
      localparam int AY = rot_y(sx6(BRIEF_PAT[i][0]), sx6(BRIEF_PAT[i][1]), b);
      localparam int BX = rot_x(sx6(BRIEF_PAT[i][2]), sx6(BRIEF_PAT[i][3]), b);
      localparam int BY = rot_y(sx6(BRIEF_PAT[i][2]), sx6(BRIEF_PAT[i][3]), b);
      assign pa[b] = win[15 + AY][15 + AX];
      assign pb[b] = win[15 + BY][15 + BX];
    end
    assign desc[i] = pa[theta_bin] < pb[theta_bin];
  end
endmodule
