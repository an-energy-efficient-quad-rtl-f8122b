// frame_mux_ctrl: frame-multiplexed scheduler of one stereo pair.
//
// One feature extractor (FE) serves both cameras of the pair and one
// feature matcher (FM) follows it, pipelined over frames:
//     frame N:   FE(L) FE(R) FM
//     frame N+1:             FE(L) FE(R) FM
// A frame is ready when both cameras have finished writing it. If the two
// time tags differ (a frame was lost on one side) the older image is
// released and counted in sync_err (an image still waiting when a newer
// one of the same camera completes is replaced by it); otherwise the controller starts FE on
// the left image, then on the right image (this selects the mux in front of
// the extractor), and hands the frame to FM as soon as FM is idle; FE is
// then free for the next frame while FM works. If FM is still busy when FE
// has finished, FE waits (fm_stall counts those cycles). Image-buffer banks
// are held from the camera's claim until FM has finished with the frame
// (FM reads level-0 pixels for SAD); the frame slot of the feature buffer
// and pyramid RAM likewise. The schedule is the paper's (FE(L), FE(R),
// then FM while FE moves to the next frame); the tag check, the bank and
// slot bookkeeping and the stall rule are this design's.
module frame_mux_ctrl
  import vf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // camera interfaces
  input  logic        claim_l,
  input  logic        claim_bank_l,
  input  logic        claim_r,
  input  logic        claim_bank_r,
  input  logic        done_l,
  input  logic        bank_l,
  input  tag_t        tag_l,
  input  logic        done_r,
  input  logic        bank_r,
  input  tag_t        tag_r,
  output logic [1:0]  bank_free_l,
  output logic [1:0]  bank_free_r,
  // feature extractor
  output logic        fe_start,
  output logic        fe_side,
  output logic        fe_img_bank,
  output logic        fe_slot,
  input  logic        fe_done,
  // feature matcher
  output logic        fm_start,
  output logic        fm_slot,
  output logic        fm_bank_l,
  output logic        fm_bank_r,
  input  logic        fm_done,
  // statistics
  output logic [15:0] n_frames,
  output logic [15:0] n_sync_err,
  output logic [15:0] n_overlap,
  output logic [31:0] fm_stall
);
  typedef enum logic [2:0] {F_IDLE, F_LEFT, F_LWAIT, F_RIGHT, F_RWAIT, F_HAND} fstate_t;
  fstate_t fst;

  logic rdy_l, rdy_r, rb_l, rb_r;
  tag_t rt_l, rt_r;
  logic [1:0] busy_l, busy_r, slot_busy;
  logic job_bl, job_br, job_slot;
  logic fm_busy, fmj_bl, fmj_br, fmj_slot;

  assign bank_free_l = ~busy_l;
  assign bank_free_r = ~busy_r;

  logic free_slot_ok, free_slot;
  always_comb begin
    free_slot_ok = 1'b1;
    if (!slot_busy[0])      free_slot = 1'b0;
    else if (!slot_busy[1]) free_slot = 1'b1;
    else begin free_slot = 1'b0; free_slot_ok = 1'b0; end
  end

  logic take, mismatch;
  assign mismatch = rdy_l && rdy_r && (rt_l != rt_r);
  assign take     = (fst == F_IDLE) && rdy_l && rdy_r && !mismatch && free_slot_ok;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fst <= F_IDLE; rdy_l <= 1'b0; rdy_r <= 1'b0; rb_l <= 1'b0; rb_r <= 1'b0;
      rt_l <= '0; rt_r <= '0; busy_l <= '0; busy_r <= '0; slot_busy <= '0;
      job_bl <= 1'b0; job_br <= 1'b0; job_slot <= 1'b0;
      fm_busy <= 1'b0; fmj_bl <= 1'b0; fmj_br <= 1'b0; fmj_slot <= 1'b0;
      fe_start <= 1'b0; fe_side <= 1'b0; fe_img_bank <= 1'b0; fe_slot <= 1'b0;
      fm_start <= 1'b0; fm_slot <= 1'b0; fm_bank_l <= 1'b0; fm_bank_r <= 1'b0;
      n_frames <= '0; n_sync_err <= '0; n_overlap <= '0; fm_stall <= '0;
    end else begin
      fe_start <= 1'b0;
      fm_start <= 1'b0;

      // bank claims by the cameras
      if (claim_l) busy_l[claim_bank_l] <= 1'b1;
      if (claim_r) busy_r[claim_bank_r] <= 1'b1;

      // finished camera frames
      // (an image still waiting is replaced by the newer one and its bank freed)
      if (done_l) begin
        rdy_l <= 1'b1; rb_l <= bank_l; rt_l <= tag_l;
        if (rdy_l && rb_l != bank_l) busy_l[rb_l] <= 1'b0;
      end
      if (done_r) begin
        rdy_r <= 1'b1; rb_r <= bank_r; rt_r <= tag_r;
        if (rdy_r && rb_r != bank_r) busy_r[rb_r] <= 1'b0;
      end

      // tag mismatch: drop the older image
      if (mismatch && !done_l && !done_r) begin
        n_sync_err <= n_sync_err + 1'b1;
        if ($signed(rt_l - rt_r) < 0) begin rdy_l <= 1'b0; busy_l[rb_l] <= 1'b0; end
        else                          begin rdy_r <= 1'b0; busy_r[rb_r] <= 1'b0; end
      end

      // FM completion frees the frame's banks and slot
      if (fm_done) begin
        fm_busy <= 1'b0;
        busy_l[fmj_bl] <= 1'b0;
        busy_r[fmj_br] <= 1'b0;
        slot_busy[fmj_slot] <= 1'b0;
      end

      unique case (fst)
        F_IDLE: if (take && !done_l && !done_r) begin
          rdy_l <= 1'b0; rdy_r <= 1'b0;
          job_bl <= rb_l; job_br <= rb_r; job_slot <= free_slot;
          slot_busy[free_slot] <= 1'b1;
          fst <= F_LEFT;
        end
        F_LEFT: begin
          fe_start <= 1'b1; fe_side <= 1'b0; fe_img_bank <= job_bl; fe_slot <= job_slot;
          if (fm_busy) n_overlap <= n_overlap + 1'b1;
          fst <= F_LWAIT;
        end
        F_LWAIT: if (fe_done) fst <= F_RIGHT;
        F_RIGHT: begin
          fe_start <= 1'b1; fe_side <= 1'b1; fe_img_bank <= job_br; fe_slot <= job_slot;
          fst <= F_RWAIT;
        end
        F_RWAIT: if (fe_done) fst <= F_HAND;
        F_HAND: begin
          if (!fm_busy || fm_done) begin
            fm_start <= 1'b1; fm_slot <= job_slot; fm_bank_l <= job_bl; fm_bank_r <= job_br;
            fm_busy <= 1'b1; fmj_bl <= job_bl; fmj_br <= job_br; fmj_slot <= job_slot;
            n_frames <= n_frames + 1'b1;
            fst <= F_IDLE;
          end else fm_stall <= fm_stall + 1'b1;
        end
        default: fst <= F_IDLE;
      endcase
    end
  end
endmodule
