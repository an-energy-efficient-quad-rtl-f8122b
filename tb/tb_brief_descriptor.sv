// tb_brief_descriptor: random smoothed patches and all 32 orientation
// bins. The reference rotates every test pair of the pattern in floating
// point (cos/sin of bin * 11.25 degrees) and rounds to the nearest pixel;
// bits whose rotated point falls within 0.06 pixel of a rounding boundary
// are skipped (the design uses a 7-bit trigonometric table there). For
// bin 0 the pairs are used unrotated, so every bit is checked.
module tb_brief_descriptor;
  import vf_pkg::*;
  logic [7:0] win [31][31];
  theta_t th;
  desc_t desc;
  int checks = 0, failures = 0;
  brief_descriptor dut (.win, .theta_bin(th), .desc);
  localparam real PI = 3.14159265358979;
  function automatic bit near_half(real v);
    real f = v - $floor(v);
    return (f > 0.44 && f < 0.56);
  endfunction
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real a, c, s, ax, ay, bx, by;
    int iax, iay, ibx, iby, skipped = 0, ones = 0;
    logic e;
    for (int t = 0; t < 96; t++) begin
      for (int r = 0; r < 31; r++) for (int cc = 0; cc < 31; cc++) win[r][cc] = 8'($urandom);
      th = 5'(t % 32);
      #1;
      a = real'(th) * 11.25 * PI / 180.0; c = $cos(a); s = $sin(a);
      for (int i = 0; i < DESC_W; i++) begin
        ax = sx6(BRIEF_PAT[i][0]) * c - sx6(BRIEF_PAT[i][1]) * s;
        ay = sx6(BRIEF_PAT[i][0]) * s + sx6(BRIEF_PAT[i][1]) * c;
        bx = sx6(BRIEF_PAT[i][2]) * c - sx6(BRIEF_PAT[i][3]) * s;
        by = sx6(BRIEF_PAT[i][2]) * s + sx6(BRIEF_PAT[i][3]) * c;
        if (near_half(ax) || near_half(ay) || near_half(bx) || near_half(by)) begin skipped++; continue; end
        iax = int'($floor(ax + 0.5)); iay = int'($floor(ay + 0.5));
        ibx = int'($floor(bx + 0.5)); iby = int'($floor(by + 0.5));
        e = win[15 + iay][15 + iax] < win[15 + iby][15 + ibx];
        ones += int'(desc[i]);
        checks++;
        if (desc[i] != e) begin failures++; if (failures < 10) $display("bin %0d bit %0d got %0d", th, i, desc[i]); end
      end
    end
    $display("skipped near-boundary bits: %0d, ones: %0d", skipped, ones);
    checks++; if (ones < 96 * 256 / 4) begin failures++; $display("descriptor bits nearly all zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
