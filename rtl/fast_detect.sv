// fast_detect: FAST segment test and intensity moments of a 31x31 patch.
//
// The centre pixel c = win[15][15] is a corner when at least ARC contiguous
// pixels of the 16-pixel Bresenham circle of radius 3 are all brighter than
// c + THRESH or all darker than c - THRESH (FAST-9 with the defaults). The
// same patch gives the moments of Eq. (1) over the circular patch of radius
// 15: m10 = sum(dx * I), m01 = sum(dy * I), with dx to the right and dy
// downwards from the centre. The 31x31 patch and the moment definition are
// the paper's; the circle, ARC and THRESH are this design's choices (the
// common ORB settings). Combinational; the caller registers the outputs.
module fast_detect #(
  parameter int unsigned THRESH = 20,
  parameter int unsigned ARC    = 9
) (
  input  logic [7:0]         win [31][31],
  output logic               is_corner,
  output logic signed [21:0] m10,
  output logic signed [21:0] m01
);
  localparam int CX[16] = '{0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3, -3, -3, -2, -1};
  localparam int CY[16] = '{-3, -3, -2, -1, 0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3};

  logic [9:0]  c, hi, lo;
  logic [31:0] bright, dark;

  always_comb begin
    c  = 10'(win[15][15]);
    hi = c + 10'(THRESH);
    lo = c - 10'(THRESH);   // may wrap below 0: handled by the sign check below
    bright = '0;
    dark   = '0;
    for (int i = 0; i < 16; i++) begin
      bright[i] = 10'(win[15 + CY[i]][15 + CX[i]]) > hi;
      dark[i]   = (c >= 10'(THRESH)) && (10'(win[15 + CY[i]][15 + CX[i]]) < lo);
      bright[i + 16] = bright[i];
      dark[i + 16]   = dark[i];
    end
    is_corner = 1'b0;
    for (int s = 0; s < 16; s++) begin
      if (&bright[s +: ARC]) is_corner = 1'b1;
      if (&dark[s +: ARC])   is_corner = 1'b1;
    end
  end

  always_comb begin
    m10 = '0;
    m01 = '0;
    for (int dy = -15; dy <= 15; dy++)
      for (int dx = -15; dx <= 15; dx++)
        if (dx * dx + dy * dy <= 225) begin
          m10 += 22'(dx) * signed'({14'd0, win[15 + dy][15 + dx]});
          m01 += 22'(dy) * signed'({14'd0, win[15 + dy][15 + dx]});
        end
  end
endmodule
