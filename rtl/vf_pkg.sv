// vf_pkg: types and constants shared by the quad-camera ORB visual front end.
//
// Image geometry follows the two pyramid levels of the design: level 0 is
// the 1280x720 camera image, level 1 the 1067x600 image obtained by a
// bilinear 1/1.2 resize. A feature carries its pixel position in the level
// it was found in, the level, a 5-bit orientation bin (32 bins of 11.25
// degrees) and a 256-bit rotated-BRIEF descriptor. The BRIEF test pattern is
// generated here by a constant function (see gen_brief_pattern) so that no
// table file is needed. The 256-bit descriptor length and the image sizes
// are the paper's; the bin count, the pattern and all widths are this
// design's own choices.
package vf_pkg;

  localparam int unsigned IMG_W   = 1280;
  localparam int unsigned IMG_H   = 720;
  localparam int unsigned IMG1_W  = 1067;
  localparam int unsigned IMG1_H  = 600;
  localparam int unsigned XW      = 11;   // x coordinate width
  localparam int unsigned YW      = 10;   // y coordinate width
  localparam int unsigned DESC_W  = 256;  // 32 x 8 bits
  localparam int unsigned NBINS   = 32;   // orientation bins
  localparam int unsigned TAG_W   = 32;   // unified time tag
  localparam int unsigned PATCH   = 31;   // FAST / BRIEF patch
  localparam int unsigned HALF    = 15;   // PATCH/2

  typedef logic [7:0]        pix_t;
  typedef logic [XW-1:0]     xcoord_t;
  typedef logic [YW-1:0]     ycoord_t;
  typedef logic [4:0]        theta_t;
  typedef logic [DESC_W-1:0] desc_t;
  typedef logic [TAG_W-1:0]  tag_t;

  typedef struct packed {
    xcoord_t x;
    ycoord_t y;
    logic    level;
    theta_t  theta;
    desc_t   desc;
  } feat_t;

  // One stereo correspondence after SAD rectification, in level-0 pixels.
  typedef struct packed {
    xcoord_t     xl;        // left x (level 0 scale)
    ycoord_t     yl;        // left y (level 0 scale)
    logic        level;     // pyramid level it was matched in
    logic [8:0]  ham;       // Hamming distance of the pre-match
    logic [10:0] disp;      // rectified disparity, level 0 pixels
    logic [15:0] depth;     // FB / disparity, 0 when disparity is 0
  } disp_t;

  // Quarter-wave tables, Q7 (x128), for 11.25-degree steps k = 0..8.
  function automatic int cos_q7(input int k);
    int t[9] = '{128, 126, 118, 106, 91, 71, 49, 25, 0};
    int kk = ((k % 32) + 32) % 32;
    if (kk <= 8)       return  t[kk];
    else if (kk <= 16) return -t[16 - kk];
    else if (kk <= 24) return -t[kk - 16];
    else               return  t[32 - kk];
  endfunction

  function automatic int sin_q7(input int k);
    return cos_q7(k - 8);
  endfunction

  // Rounded division by 128 (symmetric about zero).
  function automatic int rdiv128(input int v);
    if (v >= 0) return (v + 64) / 128;
    else        return -((-v + 64) / 128);
  endfunction

  // Rotate point (x,y) by bin b: (x cos - y sin, x sin + y cos).
  function automatic int rot_x(input int x, input int y, input int b);
    return rdiv128(x * cos_q7(b) - y * sin_q7(b));
  endfunction
  function automatic int rot_y(input int x, input int y, input int b);
    return rdiv128(x * sin_q7(b) + y * cos_q7(b));
  endfunction

  // BRIEF test pattern: 256 pairs (ax, ay, bx, by), each coordinate offset
  // in [-13, 13] stored as 6-bit two's complement. Coordinates are sums of
  // three uniform draws in [-6, 6] from a 32-bit Galois LFSR (approximately
  // Gaussian, sigma ~ 6.5); points outside radius 13 are redrawn so that
  // any rotation stays inside the 31x31 patch.
  typedef logic [DESC_W-1:0][3:0][5:0] brief_pat_t;

  function automatic brief_pat_t gen_brief_pattern();
    brief_pat_t p;
    logic [31:0] s;
    int v[2];
    s = 32'h1234_5678;
    for (int i = 0; i < DESC_W; i++) begin
      for (int q = 0; q < 2; q++) begin
        for (int tries = 0; tries < 64; tries++) begin
          for (int c = 0; c < 2; c++) begin
            v[c] = 0;
            for (int u = 0; u < 3; u++) begin
              for (int st = 0; st < 8; st++)
                s = s[0] ? ((s >> 1) ^ 32'hA300_0000) : (s >> 1);
              v[c] += (int'(s[7:0]) % 13) - 6;
            end
          end
          if (v[0] * v[0] + v[1] * v[1] <= 169) break;
        end
        if (v[0] * v[0] + v[1] * v[1] > 169) begin
          v[0] = 0; v[1] = 0;
        end
        p[i][2*q]   = 6'(v[0]);
        p[i][2*q+1] = 6'(v[1]);
      end
    end
    return p;
  endfunction

  localparam brief_pat_t BRIEF_PAT = gen_brief_pattern();

  function automatic int sx6(input logic [5:0] v);
    return int'(signed'(v));
  endfunction

endpackage
