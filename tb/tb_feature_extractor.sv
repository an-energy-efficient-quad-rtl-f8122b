// tb_feature_extractor: a 96x64 synthetic image (bright and dark squares
// and a triangle on a noisy background) streamed twice, the second time
// with idle cycles between pixels. An independent reference computes, for
// every pixel at least 19 from the border, the FAST-9 test, the moments
// over the radius-15 disc, the orientation (atan2, accepted one bin off
// only next to a bin boundary), the 7x7 binomial-smoothed image and the
// rotated BRIEF bits (rotated test points from vf_pkg's rotation helpers).
// The extractor must emit exactly the reference features, in raster order,
// with identical descriptors, and signal done 5 cycles after the last pixel
// when streaming without gaps.
module tb_feature_extractor;
  import vf_pkg::*;
  localparam int W = 96, H = 64, EDGE = 19;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, in_sof = 0;
  logic [7:0] in_pix = 0;
  logic feat_valid, done;
  feat_t feat;
  logic [15:0] fifo_drop;
  logic [7:0] img [H][W];
  int sm [H][W];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  feature_extractor #(.MAX_W(W), .MAX_H(H), .EDGE(EDGE), .FIFO_DEPTH(64)) dut (
    .clk, .rst_n, .start, .level(1'b1), .img_w(11'(W)), .img_h(10'(H)),
    .in_valid, .in_sof, .in_pix, .feat_valid, .feat, .done, .fifo_drop);

  typedef struct { int x; int y; int bin; } rf_t;
  rf_t refq[$];
  feat_t got[$];
  always @(posedge clk) if (feat_valid) got.push_back(feat);

  localparam real PI = 3.14159265358979;
  int cx[16] = '{0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3, -3, -3, -2, -1};
  int cy[16] = '{-3, -3, -2, -1, 0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3};

  function automatic bit fast9(int x, int y);
    int c = img[y][x], b[32], d[32], run_b, run_d;
    for (int i = 0; i < 32; i++) begin
      int p = img[y + cy[i % 16]][x + cx[i % 16]];
      b[i] = p > c + 20; d[i] = p < c - 20;
    end
    for (int s = 0; s < 16; s++) begin
      run_b = 1; run_d = 1;
      for (int k = 0; k < 9; k++) begin run_b &= b[s + k]; run_d &= d[s + k]; end
      if (run_b || run_d) return 1;
    end
    return 0;
  endfunction

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int R15 = 15, K7 = 7;
  always @(posedge clk) if (dut.c_push && dbg) $display("dut push (%0d,%0d) m10=%0d m01=%0d bin=%0d", dut.xc, dut.yc, dut.m10, dut.m01, dut.theta);
  bit dbg = 0;
  initial begin
    int bino [7] = '{1, 6, 15, 20, 15, 6, 1};
    int m10, m01, rb, acc, near = 0, cyc, first;
    real a, dd, fr;
    // scene
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = 8'(60 + $urandom % 7);
    for (int y = 22; y < 34; y++) for (int x = 25; x < 37; x++) img[y][x] = 200;
    for (int y = 30; y < 41; y++) for (int x = 50; x < 58; x++) img[y][x] = 10;
    for (int y = 20; y < 45; y++) for (int x = 62; x < 62 + (y - 20) / 2; x++) img[y][x] = 160;
    for (int y = 38; y < 50; y++) for (int x = 30; x < 42; x++) img[y][x] = 8'(120 + 5 * (x - 30));
    // reference smoothing (valid 3 pixels inside the border)
    for (int y = 3; y < H - 3; y++) for (int x = 3; x < W - 3; x++) begin
      acc = 0;
      for (int r = 0; r < K7; r++) for (int c = 0; c < K7; c++) acc += bino[r] * bino[c] * img[y - 3 + r][x - 3 + c];
      sm[y][x] = (acc + 2048) / 4096;
    end
    // reference detections
    for (int y = EDGE; y < H - EDGE; y++) for (int x = EDGE; x < W - EDGE; x++) if (fast9(x, y)) begin
      m10 = 0; m01 = 0;
      for (int dy = -R15; dy <= R15; dy++) for (int dx = -R15; dx <= R15; dx++)
        if (dx * dx + dy * dy <= R15 * R15) begin m10 += dx * img[y + dy][x + dx]; m01 += dy * img[y + dy][x + dx]; end
      a = $atan2(real'(m01), real'(m10)); dd = a * 180.0 / PI; if (dd < 0) dd += 360.0;
      rb = int'($floor(dd / 11.25 + 0.5)) % 32;
      fr = dd / 11.25 + 0.5 - $floor(dd / 11.25 + 0.5);
      if (refq.size() < 3) $display("ref (%0d,%0d) m10=%0d m01=%0d", x, y, m10, m01);
      refq.push_back('{x: x, y: y, bin: (fr < 0.14 || fr > 0.86) ? -1 - rb : rb});
    end
    $display("reference features: %0d", refq.size());
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int pass = 0; pass < 2; pass++) begin
      got.delete();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0; first = 1;
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        in_valid = 1; in_sof = first; first = 0; in_pix = img[y][x];
        @(negedge clk); cyc++;
        in_valid = 0; in_sof = 0;
        if (pass == 1 && (x % 7) == 3) begin @(negedge clk); cyc++; end
      end
      while (!done) begin @(negedge clk); cyc++; if (cyc > 2 * W * H + 100) break; end
      if (pass == 0) begin checks++; if (cyc != W * H + 5) begin failures++; $display("done after %0d cycles, exp %0d", cyc, W * H + 5); end end
      @(negedge clk);
      checks++; if (got.size() != refq.size()) begin failures++; $display("pass %0d: %0d features, exp %0d", pass, got.size(), refq.size()); end
      for (int k = 0; k < got.size() && k < refq.size(); k++) begin
        automatic int rbin = refq[k].bin < 0 ? -1 - refq[k].bin : refq[k].bin;
        automatic int fb = int'(got[k].theta);
        checks++;
        if (int'(got[k].x) != refq[k].x || int'(got[k].y) != refq[k].y || got[k].level != 1'b1) begin
          failures++; $display("feature %0d at (%0d,%0d) exp (%0d,%0d)", k, got[k].x, got[k].y, refq[k].x, refq[k].y);
          continue;
        end
        checks++;
        if (fb != rbin) begin
          if (refq[k].bin < 0 && ((fb - rbin + 32) % 32 == 1 || (rbin - fb + 32) % 32 == 1)) near++;
          else begin failures++; $display("feature %0d bin %0d exp %0d", k, fb, rbin); end
        end
        for (int i = 0; i < DESC_W; i++) begin
          automatic int ax = rot_x(sx6(BRIEF_PAT[i][0]), sx6(BRIEF_PAT[i][1]), fb);
          automatic int ay = rot_y(sx6(BRIEF_PAT[i][0]), sx6(BRIEF_PAT[i][1]), fb);
          automatic int bx = rot_x(sx6(BRIEF_PAT[i][2]), sx6(BRIEF_PAT[i][3]), fb);
          automatic int by = rot_y(sx6(BRIEF_PAT[i][2]), sx6(BRIEF_PAT[i][3]), fb);
          automatic logic e = sm[refq[k].y + ay][refq[k].x + ax] < sm[refq[k].y + by][refq[k].x + bx];
          checks++;
          if (got[k].desc[i] != e) begin failures++; if (failures < 20) $display("feature %0d bit %0d", k, i); end
        end
      end
    end
    checks++; if (refq.size() < 10) begin failures++; $display("scene gives too few corners"); end
    checks++; if (fifo_drop != 0) begin failures++; $display("fifo drops %0d", fifo_drop); end
    $display("orientation one bin off at a boundary: %0d", near);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
