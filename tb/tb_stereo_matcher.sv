// tb_stereo_matcher: a 12-entry left list and a 14-entry right list in a
// feature-buffer model with one cycle of read latency. Right features are
// partly noisy copies of left ones (a few descriptor bits flipped, shifted
// by a disparity), partly distractors, some outside the strip or of the
// other level. A brute-force reference gives, for level 0 and then level 1,
// the expected sequence of (left, best right, distance); the matcher's
// output must equal it while match_ready is toggled at random. The cycle
// count of a run is checked against NL*(NR+3) plus the waiting cycles.
module tb_stereo_matcher;
  import vf_pkg::*;
  localparam int NL = 12, NR = 14;
  logic clk = 0, rst_n = 0, start = 0, slot = 0, level = 0;
  logic [4:0] count_l = NL, count_r = NR;
  logic fb_rd_slot, fb_rd_side;
  logic [3:0] fb_rd_idx;
  feat_t fb_rd_feat;
  logic match_valid, match_ready = 0, busy, done;
  feat_t match_l, match_r;
  logic [8:0] match_ham;
  feat_t L [16], R [16];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always @(posedge clk) fb_rd_feat <= fb_rd_side ? R[fb_rd_idx] : L[fb_rd_idx];
  stereo_matcher #(.MAX_FEAT(16), .HAM_TH(64)) dut (.*);

  typedef struct { int li; int ri; int h; } m_t;
  m_t expq[$];

  function automatic bit in_reg(feat_t a, feat_t b);
    int dy = int'(a.y) - int'(b.y), dx = int'(a.x) - int'(b.x);
    return a.level == b.level && dy <= 2 && dy >= -2 && dx >= 0 && dx <= 128;
  endfunction

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int best, bh, h, nmatch = 0, waits, cyc;
    for (int i = 0; i < 16; i++) begin L[i] = '0; R[i] = '0; end
    for (int i = 0; i < NL; i++) begin
      L[i].x = 11'(200 + $urandom % 400); L[i].y = 10'(100 + 4 * i); L[i].level = 1'(i % 3 == 2);
      for (int w = 0; w < 8; w++) L[i].desc[32*w +: 32] = $urandom;
    end
    for (int j = 0; j < NR; j++) begin
      for (int w = 0; w < 8; w++) R[j].desc[32*w +: 32] = $urandom;
      R[j].x = 11'(100 + $urandom % 600); R[j].y = 10'(100 + $urandom % 50); R[j].level = 1'($urandom);
      if (j < NL) begin
        automatic int li = (j * 5) % (NL / 2);   // two candidates per left feature
        automatic int nflip = $urandom % 50;
        R[j] = L[li];
        R[j].x = L[li].x - 11'($urandom % 100);
        R[j].y = L[li].y + 10'($urandom % 3) - 10'd1;
        for (int k = 0; k < nflip; k++) begin
          automatic int b = $urandom % 256;
          R[j].desc[b] = ~R[j].desc[b];
        end
      end
    end
    for (int lv = 0; lv < 2; lv++)
      for (int i = 0; i < NL; i++) begin
        if (int'(L[i].level) != lv) continue;
        best = -1; bh = 1000;
        for (int j = 0; j < NR; j++) if (in_reg(L[i], R[j])) begin
          h = $countones(L[i].desc ^ R[j].desc);
          if (h < bh) begin bh = h; best = j; end
        end
        if (best >= 0 && bh <= 64) expq.push_back('{li: i, ri: best, h: bh});
      end
    $display("expected matches: %0d", expq.size());
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int lv = 0; lv < 2; lv++) begin
      @(negedge clk); start = 1; level = 1'(lv); @(negedge clk); start = 0;
      waits = 0; cyc = 1;
      while (!done) begin
        match_ready = ($urandom % 3 == 0);
        #1;
        if (match_valid && !match_ready) waits++;
        if (match_valid && match_ready) begin
          m_t e;
          checks++;
          if (expq.size() == 0) begin failures++; $display("unexpected match"); end
          else begin
            e = expq.pop_front();
            if (match_l != L[e.li] || match_r != R[e.ri] || int'(match_ham) != e.h) begin
              failures++; $display("match: got x=%0d/%0d h=%0d exp L%0d R%0d h=%0d", match_l.x, match_r.x, match_ham, e.li, e.ri, e.h);
            end
          end
          nmatch++;
        end
        @(negedge clk); cyc++;
      end
      $display("level %0d: %0d cycles, %0d waiting", lv, cyc, waits);
      checks++; if (cyc > NL * (NR + 4) + waits + 2) begin failures++; $display("too slow"); end
    end
    checks++; if (expq.size() != 0) begin failures++; $display("%0d matches missing", expq.size()); end
    checks++; if (nmatch < 3) begin failures++; $display("too few matches %0d", nmatch); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
