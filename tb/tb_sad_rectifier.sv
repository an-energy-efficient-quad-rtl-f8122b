// tb_sad_rectifier: random-texture left images (64x48 level 0, 54x40
// level 1); the right images are the left ones shifted by a true
// disparity (7 at level 0, 5 at level 1). Pre-matches are given with the
// right x wrong by -4..+4 pixels; the rectifier must move the right point
// to the true position, report disparity 7 (level 0) or round(5*1.2) = 6
// (level 1, scaled back to level 0), depth = 84000/disparity, the left
// coordinates scaled to level 0, count the corrected pairs, and finish
// each pair within the cycle budget of its read schedule.
module tb_sad_rectifier;
  import vf_pkg::*;
  localparam int W = 64, H = 48, W1 = 54, H1 = 40, D0 = 7, D1 = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready;
  feat_t in_l = '0, in_r = '0;
  logic [8:0] in_ham = 0;
  logic pix_rd_side, pix_rd_level;
  logic [11:0] pix_rd_addr;
  logic [7:0] pix_rd_data;
  logic out_valid;
  disp_t out;
  logic [15:0] corrected;
  logic [7:0] img [2][2][W*H];   // [level][side]
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always @(posedge clk) pix_rd_data <= img[pix_rd_level][pix_rd_side][pix_rd_addr];
  sad_rectifier #(.W(W), .H(H), .W1(W1), .WIN(11), .SAD_R(5), .FB(84000)) dut (.*);
  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int xl, yl, e, lv, w, cyc, ncorr = 0, d, ex;
    for (int l = 0; l < 2; l++) begin
      w = l ? W1 : W;
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[l][0][y*w + x] = 8'($urandom);
      for (int y = 0; y < H; y++) for (int x = 0; x < w; x++)
        img[l][1][y*w + x] = (x + (l ? D1 : D0) < w) ? img[l][0][y*w + x + (l ? D1 : D0)] : 8'd0;
    end
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int t = 0; t < 24; t++) begin
      lv = t % 2; w = lv ? W1 : W;
      xl = 24 + $urandom % (w - 24 - 12); yl = 8 + $urandom % (lv ? H1 - 16 : H - 16);
      e = int'($urandom % 9) - 4;
      if (t == 0) e = 0;
      in_l = '0; in_r = '0;
      in_l.x = 11'(xl); in_l.y = 10'(yl); in_l.level = 1'(lv);
      in_r.x = 11'(xl - (lv ? D1 : D0) + e); in_r.y = 10'(yl); in_r.level = 1'(lv);
      in_ham = 9'(t);
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; if (cyc > 2000) break; end
      if (e != 0) ncorr++;
      d = lv ? (D1 * 6 + 2) / 5 : D0;
      ex = lv ? (xl * 6 + 2) / 5 : xl;
      checks++;
      if (int'(out.disp) != d || int'(out.depth) != 84000 / d || int'(out.xl) != ex || out.level != 1'(lv) || int'(out.ham) != t) begin
        failures++; $display("t=%0d lv=%0d e=%0d disp=%0d exp %0d depth=%0d x=%0d exp %0d", t, lv, e, out.disp, d, out.depth, out.xl, ex);
      end
      checks++; if (cyc > 121 + 11 * 21 + 11 + 6) begin failures++; $display("pair took %0d cycles", cyc); end
    end
    @(negedge clk);
    checks++; if (int'(corrected) != ncorr) begin failures++; $display("corrected %0d exp %0d", corrected, ncorr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
