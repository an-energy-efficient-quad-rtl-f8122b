// feature_matcher: stereo matcher followed by SAD rectifier, pyramid-multiplexed.
//
// One matcher serves both pyramid levels: on start it runs stereo_matcher
// over the level-0 features of the frame slot, then over the level-1
// features. Every pair the stereo matcher accepts is handed to
// sad_rectifier (the matcher waits while the rectifier is busy), which
// reads pixels of the matching level through pix_rd_* and emits one
// disparity record per pair on out_valid/out. done pulses when both levels
// are finished and the last record has left. Sharing one matcher between
// the two pyramid levels is the paper's technique; the strictly sequential
// hand-over is this design's choice.
module feature_matcher
  import vf_pkg::*;
#(
  parameter int unsigned W        = 1280,
  parameter int unsigned H        = 720,
  parameter int unsigned W1       = 1067,
  parameter int unsigned MAX_FEAT = 2048
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          slot,
  input  logic [$clog2(MAX_FEAT+1)-1:0] count_l,
  input  logic [$clog2(MAX_FEAT+1)-1:0] count_r,
  output logic                          fb_rd_slot,
  output logic                          fb_rd_side,
  output logic [$clog2(MAX_FEAT)-1:0]   fb_rd_idx,
  input  feat_t                         fb_rd_feat,
  output logic                          pix_rd_side,
  output logic                          pix_rd_level,
  output logic [$clog2(W*H)-1:0]        pix_rd_addr,
  input  logic [7:0]                    pix_rd_data,
  output logic                          out_valid,
  output disp_t                         out,
  output logic                          busy,
  output logic                          done,
  output logic [15:0]                   n_corrected,
  output logic [15:0]                   n_level1
);
  typedef enum logic [1:0] {S_IDLE, S_L0, S_L1, S_FLUSH} state_t;
  state_t st;

  logic sm_start, sm_level, sm_busy, sm_done;
  logic m_valid, m_ready;
  feat_t m_l, m_r;
  logic [8:0] m_ham;
  logic slot_q;

  stereo_matcher #(.MAX_FEAT(MAX_FEAT)) u_sm (
    .clk, .rst_n, .start(sm_start), .slot(slot_q), .level(sm_level),
    .count_l, .count_r, .fb_rd_slot, .fb_rd_side, .fb_rd_idx, .fb_rd_feat,
    .match_valid(m_valid), .match_ready(m_ready), .match_l(m_l), .match_r(m_r),
    .match_ham(m_ham), .busy(sm_busy), .done(sm_done));

  logic sad_ready;
  sad_rectifier #(.W(W), .H(H), .W1(W1)) u_sad (
    .clk, .rst_n, .in_valid(m_valid), .in_ready(sad_ready), .in_l(m_l), .in_r(m_r), .in_ham(m_ham),
    .pix_rd_side, .pix_rd_level, .pix_rd_addr, .pix_rd_data,
    .out_valid, .out, .corrected(n_corrected));
  assign m_ready = sad_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; slot_q <= 1'b0; done <= 1'b0; n_level1 <= '0;
    end else begin
      done <= 1'b0;
      if (out_valid && out.level) n_level1 <= n_level1 + 1'b1;
      unique case (st)
        S_IDLE:  if (start) begin slot_q <= slot; st <= S_L0; end
        S_L0:    if (sm_done) st <= S_L1;
        S_L1:    if (sm_done) st <= S_FLUSH;
        S_FLUSH: if (sad_ready && !out_valid) begin st <= S_IDLE; done <= 1'b1; end
        default: st <= S_IDLE;
      endcase
    end
  end

  // start the stereo matcher for level 0 one cycle after start, level 1 after level 0
  logic l0_go, l1_go;
  always_ff @(posedge clk) begin
    if (!rst_n) begin l0_go <= 1'b0; l1_go <= 1'b0; end
    else begin
      l0_go <= (st == S_IDLE) && start;
      l1_go <= (st == S_L0) && sm_done;
    end
  end
  assign sm_start = l0_go || l1_go;
  assign sm_level = l1_go;
  assign busy = (st != S_IDLE);
endmodule
