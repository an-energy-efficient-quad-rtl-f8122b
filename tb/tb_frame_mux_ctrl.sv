// tb_frame_mux_ctrl: camera frames arrive every 130 cycles; the extractor
// model takes 50 cycles per image and the matcher model 260 cycles per
// frame, so FM is the bottleneck. Checks, for every frame: FE runs on the
// left image then on the right image with the banks the cameras used; FM
// starts only after both and only when idle, with the same frame slot;
// banks are freed when FM is done. Frame 3 carries mismatched tags and must
// be discarded. Also counts, and requires, an FE/FM overlap (FE of frame
// N+1 while FM works on N), an FE stall waiting for FM, and a camera frame
// dropped because no bank was free.
module tb_frame_mux_ctrl;
  import vf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic claim_l = 0, claim_bank_l = 0, claim_r = 0, claim_bank_r = 0;
  logic done_l = 0, bank_l = 0, done_r = 0, bank_r = 0;
  tag_t tag_l = 0, tag_r = 0;
  logic [1:0] bank_free_l, bank_free_r;
  logic fe_start, fe_side, fe_img_bank, fe_slot, fe_done = 0;
  logic fm_start, fm_slot, fm_bank_l, fm_bank_r, fm_done = 0;
  logic [15:0] n_frames, n_sync_err, n_overlap;
  logic [31:0] fm_stall;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  frame_mux_ctrl dut (.*);

  // extractor and matcher models
  int fe_cnt = -1, fm_cnt = -1;
  int fe_images = 0, fm_frames = 0;
  always @(posedge clk) begin
    fe_done <= 0; fm_done <= 0;
    if (fe_start) fe_cnt <= 50; else if (fe_cnt > 0) fe_cnt <= fe_cnt - 1; else if (fe_cnt == 0) begin fe_done <= 1; fe_cnt <= -1; end
    if (fm_start) fm_cnt <= 260; else if (fm_cnt > 0) fm_cnt <= fm_cnt - 1; else if (fm_cnt == 0) begin fm_done <= 1; fm_cnt <= -1; end
  end

  typedef struct { logic bl; logic br; int id; } job_t;
  job_t jobs[$];
  job_t cur;
  logic cur_valid = 0, expect_side = 0;
  logic cur_slot;
  logic fm_busy_model = 0;
  int overlap_seen = 0, dropped = 0, fmj_bl = 0, fmj_br = 0;
  logic [1:0] fe_finished = 0;

  always @(posedge clk) if (rst_n) begin
    if (fe_start) begin
      checks++;
      if (jobs.size() == 0 && !cur_valid) begin failures++; $display("FE start without a frame"); end
      else begin
        if (fe_side == 0) begin
          cur = jobs.pop_front(); cur_valid = 1; cur_slot = fe_slot;
          if (fm_busy_model) overlap_seen++;
        end
        if (fe_side != expect_side || fe_img_bank != (fe_side ? cur.br : cur.bl) || fe_slot != cur_slot) begin
          failures++; $display("frame %0d: FE side %0d bank %0d", cur.id, fe_side, fe_img_bank);
        end
        expect_side = ~expect_side;
      end
    end
    if (fe_done) fe_images++;
    if (fm_start) begin
      checks++;
      if (fm_busy_model || fe_images % 2 != 0 || !cur_valid || fm_slot != cur_slot || fm_bank_l != cur.bl || fm_bank_r != cur.br) begin
        failures++; $display("bad FM start for frame %0d", cur.id);
      end
      fm_busy_model = 1; cur_valid = 0; fmj_bl = cur.bl; fmj_br = cur.br;
    end
    if (fm_done) begin fm_busy_model = 0; fm_frames++; end
  end

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic bl, br;
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int f = 0; f < 14; f++) begin
      repeat (130) @(negedge clk);
      // camera start of frame: claim a free bank on each side
      if (!(bank_free_l[0] || bank_free_l[1]) || !(bank_free_r[0] || bank_free_r[1])) begin dropped++; continue; end
      bl = bank_free_l[1] ? 1 : 0; br = bank_free_r[1] ? 1 : 0;
      claim_l = 1; claim_bank_l = bl; claim_r = 1; claim_bank_r = br;
      @(negedge clk); claim_l = 0; claim_r = 0;
      checks++; if (bank_free_l[bl] || bank_free_r[br]) begin failures++; $display("claimed bank still free"); end
      repeat (20) @(negedge clk);
      done_l = 1; bank_l = bl; tag_l = tag_t'(1000 * f);
      done_r = 1; bank_r = br; tag_r = tag_t'(1000 * f + (f == 3 ? 7 : 0));
      if (f != 3) jobs.push_back('{bl: bl, br: br, id: f});
      @(negedge clk); done_l = 0; done_r = 0;
    end
    repeat (3000) @(negedge clk);
    checks++; if (n_sync_err != 1) begin failures++; $display("sync_err %0d", n_sync_err); end
    checks++; if (int'(n_frames) != fm_frames || fm_frames != 13 - dropped) begin failures++; $display("frames %0d fm %0d dropped %0d", n_frames, fm_frames, dropped); end
    checks++; if (overlap_seen == 0 || n_overlap == 0) begin failures++; $display("no FE/FM overlap"); end
    checks++; if (fm_stall == 0) begin failures++; $display("no FE stall"); end
    checks++; if (dropped == 0) begin failures++; $display("no dropped frame"); end
    checks++; if (bank_free_l != 2'b11 || bank_free_r != 2'b11) begin failures++; $display("banks not released %b %b", bank_free_l, bank_free_r); end
    $display("frames %0d overlap %0d stall %0d dropped %0d", n_frames, n_overlap, fm_stall, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
