// orient_compute: orientation of a patch, theta = atan2(m01, m10), quantised.
//
// Word-length optimisation: both moments are shifted right by the same
// amount until they fit in 8-bit signed numbers (|v| <= 127), which keeps
// their ratio, and so the angle, while the remaining arithmetic works on
// 8 bits. The vector is folded into the first quadrant (quadrant q) and
// compared, by the sign of a cross product, against the 8 bin boundaries
// at 5.625 + 11.25*i degrees (Q7 cosines/sines); the number j of boundaries
// passed gives theta_bin = (8q + j) mod 32, i.e. bins of 11.25 degrees
// centred on multiples of 11.25 degrees. No division or square root is
// needed. The 8-bit word length is the paper's; the folding, the boundary
// test and the 32 bins are this design's. A zero vector gives bin 0.
// Combinational.
module orient_compute #(
  parameter int unsigned IN_W = 22
) (
  input  logic signed [IN_W-1:0] m10,
  input  logic signed [IN_W-1:0] m01,
  output logic [4:0]             theta_bin
);
  localparam int BC[8] = '{127, 122, 113, 99, 81, 60, 37, 13};  // cos of boundaries, x128

  logic [IN_W-1:0] ax, ay, mx;
  logic signed [IN_W-1:0] sx, sy;
  logic signed [7:0] x8, y8;
  logic signed [8:0] fx, fy;
  logic [1:0] q;
  logic [3:0] j;
  logic signed [17:0] xprod;

  always_comb begin
    ax = m10[IN_W-1] ? IN_W'(-m10) : IN_W'(m10);
    ay = m01[IN_W-1] ? IN_W'(-m01) : IN_W'(m01);
    mx = (ax > ay) ? ax : ay;
    sx = m10;
    sy = m01;
    for (int s = 0; s < IN_W; s++)
      if (mx > IN_W'(127)) begin
        mx = mx >> 1;
        sx = sx >>> 1;
        sy = sy >>> 1;
      end
    // Arithmetic shift rounds towards minus infinity; a value can end at -128.
    x8 = (sx < -127) ? -8'sd127 : 8'(sx);
    y8 = (sy < -127) ? -8'sd127 : 8'(sy);

    if (x8 > 0 && y8 >= 0)       begin q = 2'd0; fx =  9'(x8); fy =  9'(y8); end
    else if (x8 <= 0 && y8 > 0)  begin q = 2'd1; fx =  9'(y8); fy = -9'(x8); end
    else if (x8 < 0 && y8 <= 0)  begin q = 2'd2; fx = -9'(x8); fy = -9'(y8); end
    else                         begin q = 2'd3; fx = -9'(y8); fy =  9'(x8); end

    j = '0;
    for (int i = 0; i < 8; i++) begin
      xprod = 18'(fy) * 18'(BC[i]) - 18'(fx) * 18'(BC[7 - i]);
      if (xprod >= 0) j = j + 1'b1;
    end
    theta_bin = (x8 == 0 && y8 == 0) ? 5'd0 : 5'({q, 3'b000} + {1'b0, j});
  end
endmodule
