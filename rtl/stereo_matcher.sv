// stereo_matcher: brute-force pre-match of left and right features of one level.
//
// For every left feature of the requested pyramid level, the right list is
// read from the feature buffer one entry per cycle. search_region keeps only
// right features of the same level inside the strip (rows within ROW_TOL,
// disparity 0..MAX_DISP); hamming_dist gives their descriptor distance and
// the comparator keeps the smallest (the first one on a tie). If the best
// distance is at most HAM_TH the pair is offered on match_valid and held
// until match_ready. The order region decision -> distance computing ->
// distance compare is the paper's; the thresholds and the one-per-cycle
// scan are this design's.
// Interface: start with slot and level; done pulses when all left features
// are processed. Timing: about NL * (NR + 3) cycles plus the time spent
// waiting on match_ready, where NL and NR are the list lengths.
module stereo_matcher
  import vf_pkg::*;
#(
  parameter int unsigned MAX_FEAT = 2048,
  parameter int unsigned HAM_TH   = 64,
  parameter int unsigned ROW_TOL  = 2,
  parameter int unsigned MAX_DISP = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          slot,
  input  logic                          level,
  input  logic [$clog2(MAX_FEAT+1)-1:0] count_l,
  input  logic [$clog2(MAX_FEAT+1)-1:0] count_r,
  output logic                          fb_rd_slot,
  output logic                          fb_rd_side,
  output logic [$clog2(MAX_FEAT)-1:0]   fb_rd_idx,
  input  feat_t                         fb_rd_feat,
  output logic                          match_valid,
  input  logic                          match_ready,
  output feat_t                         match_l,
  output feat_t                         match_r,
  output logic [8:0]                    match_ham,
  output logic                          busy,
  output logic                          done
);
  localparam int unsigned IW = $clog2(MAX_FEAT);
  localparam int unsigned CW = $clog2(MAX_FEAT + 1);

  typedef enum logic [2:0] {S_IDLE, S_LREAD, S_LWAIT, S_SCAN, S_DRAIN, S_EMIT} state_t;
  state_t st;

  logic slot_q, level_q;
  logic [CW-1:0] i, j;
  logic rv;                 // fb_rd_feat holds right feature of the previous cycle
  feat_t left_q, best_r;
  logic [8:0] best_h;
  logic found;

  logic in_region;
  logic [8:0] hd;
  search_region #(.ROW_TOL(ROW_TOL), .MAX_DISP(MAX_DISP)) u_region (.left(left_q), .right(fb_rd_feat), .in_region);
  hamming_dist #(.NBITS(DESC_W)) u_ham (.a(left_q.desc), .b(fb_rd_feat.desc), .hdist(hd));

  logic better;
  assign better = rv && in_region && (!found || hd < best_h);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; slot_q <= 1'b0; level_q <= 1'b0; i <= '0; j <= '0; rv <= 1'b0;
      left_q <= '0; best_r <= '0; best_h <= '0; found <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      rv <= 1'b0;
      if (better) begin best_h <= hd; best_r <= fb_rd_feat; found <= 1'b1; end
      unique case (st)
        S_IDLE: if (start) begin slot_q <= slot; level_q <= level; i <= '0; st <= S_LREAD; end
        S_LREAD: begin
          if (i == count_l) begin st <= S_IDLE; done <= 1'b1; end
          else st <= S_LWAIT;
        end
        S_LWAIT: begin
          left_q <= fb_rd_feat;
          found <= 1'b0;
          j <= '0;
          if (fb_rd_feat.level != level_q || count_r == '0) begin i <= i + 1'b1; st <= S_LREAD; end
          else st <= S_SCAN;
        end
        S_SCAN: begin
          rv <= 1'b1;
          if (j == count_r - 1'b1) st <= S_DRAIN;
          j <= j + 1'b1;
        end
        S_DRAIN: if (!rv) st <= S_EMIT;
        S_EMIT: begin
          if (!found || best_h > 9'(HAM_TH) || match_ready) begin
            i <= i + 1'b1;
            st <= S_LREAD;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign fb_rd_slot = slot_q;
  assign fb_rd_side = (st == S_SCAN);
  assign fb_rd_idx  = (st == S_SCAN) ? IW'(j) : IW'(i);
  assign match_valid = (st == S_EMIT) && found && (best_h <= 9'(HAM_TH));
  assign match_l = left_q;
  assign match_r = best_r;
  assign match_ham = best_h;
  assign busy = (st != S_IDLE);
endmodule
