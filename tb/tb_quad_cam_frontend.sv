// tb_quad_cam_frontend: end-to-end test of the quad-camera front end.
//
// What it does: runs the whole top level (timer, triggers, IMU path, both
// stereo channels) on reduced image sizes and checks what comes out.
// How it works: four camera models answer every cam_trig by streaming a
// W x H frame, one pixel per clock, after a short exposure delay. The
// left images are a scene of flat rectangles on a lightly noisy
// background; each right image is its left image shifted left by DISP
// pixels (so every true disparity is DISP), with independent noise. The
// camera period (CLK_HZ / CAM_FPS) is shorter than the time one channel
// needs for a pair, so processing overlaps capture, the matcher waits,
// and some frames are dropped. The right camera of pair 1 misses one
// trigger, which must produce a synchronization error. An IMU model
// answers every imu_trig with a sample and once sends an unsolicited one.
// Checks:
//  - every disparity record: disparity within 1 of DISP, depth equal to
//    84000 / disparity, Hamming distance <= 64, position inside the image;
//  - enough records per pair, some of them from pyramid level 1;
//  - IMU samples come out in order, carry their data, and their tags equal
//    the timer value at their trigger (the unsolicited one carries the
//    last trigger's tag);
//  - each mechanism was exercised at least once: camera and IMU triggers,
//    frames, overlap, matcher stall, frame drop, sync error, level-1
//    matches, SAD corrections, IMU tagging, unsolicited IMU sample.
// Interface/timing: drives the top's ports only; statistics and a
// hierarchical look at the timer (for the tag reference) are read back.
// Everything here (sizes, scene, rates) is this testbench's choice; the
// full-size frame (1280x720) is exercised by tb_quad_cam_frontend_full.
module tb_quad_cam_frontend;
  import vf_pkg::*;
  localparam int W = 64, H = 48, W1 = 54, H1 = 40;
  localparam int CLK_HZ = 240000, CAM_FPS = 30, IMU_RATE = 240;
  localparam int DISP = 6, NFRAMES = 9, IMU_W = 96;
  logic clk = 0, rst_n = 0, enable = 0;
  always #5 clk = ~clk;

  logic cam_trig, imu_trig;
  logic [3:0] pix_valid, pix_sof;
  logic [7:0] pix_data [4];
  logic imu_valid;
  logic [IMU_W-1:0] imu_data;
  logic imu_pop, imu_empty;
  logic [TAG_W+IMU_W-1:0] imu_out;
  logic [1:0] disp_pop, disp_empty;
  disp_t disp_data [2];
  logic [15:0] stat_frames [2], stat_sync_err [2], stat_drops [2], stat_overlap [2];
  logic [31:0] stat_fm_stall [2];
  logic [15:0] stat_corrected [2], stat_level1 [2], stat_feat_ovf [2], stat_disp_ovf [2];
  logic [15:0] stat_imu_unsolicited;

  quad_cam_frontend #(.W(W), .H(H), .W1(W1), .H1(H1), .MAX_FEAT(256), .FIFO_DEPTH(64),
                      .DISP_DEPTH(256), .CLK_HZ(CLK_HZ), .CAM_FPS(CAM_FPS),
                      .IMU_RATE(IMU_RATE), .IMU_W(IMU_W), .IMU_DEPTH(64)) dut (.*);

  int checks = 0, failures = 0;
  initial begin #200ms; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  logic [7:0] scene [2][H][W];
  int ncam = 0, nimu = 0;
  always @(posedge clk) begin if (cam_trig) ncam++; if (imu_trig) nimu++; end

  // camera models
  for (genvar c = 0; c < 4; c++) begin : g_cam
    initial begin
      int fr = 0;
      pix_data[c] = 0;
      forever begin
        @(posedge clk iff cam_trig);
        fr++;
        if (c == 3 && fr == 4) continue;   // pair 1 right camera misses a trigger
        repeat (20 + c) @(negedge clk);
        for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
          automatic int sx = (c % 2) ? x + DISP : x;
          automatic int v = (sx < W) ? int'(scene[c / 2][y][sx]) : 60;
          v = v + int'($urandom % 3) - 1;
          pix_valid[c] = 1; pix_sof[c] = (x == 0 && y == 0);
          pix_data[c] = 8'(v < 0 ? 0 : v > 255 ? 255 : v);
          @(negedge clk);
        end
        pix_valid[c] = 0; pix_sof[c] = 0;
      end
    end
  end

  // IMU model with tag reference
  tag_t imu_tag_ref [$];
  logic [IMU_W-1:0] imu_data_ref [$];
  int imu_cnt = 0;
  tag_t last_tag;
  initial begin
    forever begin
      @(posedge clk iff imu_trig);
      last_tag = dut.time_tag;
      imu_tag_ref.push_back(last_tag);
      repeat (7) @(negedge clk);
      imu_cnt++;
      imu_valid = 1; imu_data = IMU_W'(imu_cnt * 1000 + 7);
      imu_data_ref.push_back(IMU_W'(imu_cnt * 1000 + 7));
      @(negedge clk); imu_valid = 0;
      if (imu_cnt == 5) begin   // one sample without a trigger
        repeat (100) @(negedge clk);
        imu_valid = 1; imu_data = '1;
        imu_tag_ref.push_back(last_tag); imu_data_ref.push_back('1);   // tagged with the last trigger
        @(negedge clk); imu_valid = 0;
      end
    end
  end

  // read the disparity buffers and IMU buffer
  int nrec [2] = '{0, 0}, nl1 [2] = '{0, 0}, nimu_out = 0;
  for (genvar p = 0; p < 2; p++) begin : g_rd
    always @(negedge clk) begin
      disp_pop[p] <= 0;
      if (rst_n && !disp_empty[p] && !disp_pop[p]) begin
        automatic disp_t r = disp_data[p];
        disp_pop[p] <= 1;
        nrec[p]++; if (r.level) nl1[p]++;
        checks++;
        if (int'(r.disp) < DISP - 1 || int'(r.disp) > DISP + 1 || r.ham > 64 || r.xl >= W || r.yl >= H
            || int'(r.depth) != 84000 / int'(r.disp)) begin
          failures++;
          if (failures < 20) $display("pair %0d record (%0d,%0d) L%0d disp %0d depth %0d ham %0d", p, r.xl, r.yl, r.level, r.disp, r.depth, r.ham);
        end
      end
    end
  end
  always @(negedge clk) begin
    imu_pop <= 0;
    if (rst_n && !imu_empty && !imu_pop) begin
      imu_pop <= 1;
      checks++;
      if (imu_tag_ref.size() == 0) begin failures++; $display("IMU sample without reference"); end
      else begin
        automatic tag_t t = imu_tag_ref.pop_front();
        automatic logic [IMU_W-1:0] d = imu_data_ref.pop_front();
        if (imu_out != {t, d}) begin failures++; $display("IMU out %h exp tag %0d data %0d", imu_out, t, d); end
      end
      nimu_out++;
    end
  end

  initial begin
    for (int s = 0; s < 2; s++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) scene[s][y][x] = 60;
      for (int k = 0; k < 14; k++) begin
        automatic int w = 5 + $urandom % 8, h = 5 + $urandom % 8;
        automatic int x0 = 4 + $urandom % (W - 8 - w), y0 = 4 + $urandom % (H - 8 - h);
        automatic int v = (k % 2) ? 130 + $urandom % 120 : $urandom % 30;
        for (int y = y0; y < y0 + h; y++) for (int x = x0; x < x0 + w; x++) scene[s][y][x] = 8'(v);
      end
    end
    pix_valid = 0; pix_sof = 0; imu_valid = 0; imu_data = 0; imu_pop = 0; disp_pop = 0;
    repeat (4) @(posedge clk); rst_n <= 1;
    repeat (4) @(posedge clk); enable <= 1;
    wait (ncam == NFRAMES);
    enable <= 0;
    repeat (60000) @(posedge clk);
    for (int p = 0; p < 2; p++) begin
      $display("pair %0d: frames %0d sync_err %0d drops %0d overlap %0d fm_stall %0d corrected %0d level1 %0d records %0d (L1 %0d) feat_ovf %0d disp_ovf %0d",
               p, stat_frames[p], stat_sync_err[p], stat_drops[p], stat_overlap[p], stat_fm_stall[p],
               stat_corrected[p], stat_level1[p], nrec[p], nl1[p], stat_feat_ovf[p], stat_disp_ovf[p]);
      checks++; if (nrec[p] < 30) begin failures++; $display("pair %0d: too few records", p); end
      checks++; if (int'(stat_level1[p]) != nl1[p]) begin failures++; $display("pair %0d: level-1 counter %0d, records %0d", p, stat_level1[p], nl1[p]); end
      checks++; if (nl1[p] == 0 || stat_level1[p] == 0) begin failures++; $display("pair %0d: no level-1 match", p); end
      checks++; if (stat_frames[p] < 2) begin failures++; $display("pair %0d: too few frames", p); end
      checks++; if (stat_overlap[p] == 0) begin failures++; $display("pair %0d: no overlap", p); end
      checks++; if (stat_drops[p] == 0) begin failures++; $display("pair %0d: no frame drop", p); end
      checks++; if (stat_corrected[p] == 0) begin failures++; $display("pair %0d: no SAD correction", p); end
      checks++; if (stat_disp_ovf[p] != 0) begin failures++; $display("pair %0d: disparity buffer overflow", p); end
    end
    checks++; if (stat_fm_stall[0] + stat_fm_stall[1] == 0) begin failures++; $display("no matcher stall"); end
    checks++; if (stat_sync_err[1] == 0) begin failures++; $display("no sync error on pair 1"); end
    checks++; if (stat_sync_err[0] != 0) begin failures++; $display("unexpected sync error on pair 0"); end
    checks++; if (ncam != NFRAMES) begin failures++; $display("camera triggers %0d", ncam); end
    checks++; if (nimu < 8 * (NFRAMES - 1)) begin failures++; $display("IMU triggers %0d", nimu); end
    checks++; if (nimu_out != imu_cnt + 1 || nimu_out == 0) begin failures++; $display("IMU samples out %0d of %0d", nimu_out, imu_cnt); end
    checks++; if (stat_imu_unsolicited != 1) begin failures++; $display("unsolicited %0d", stat_imu_unsolicited); end
    $display("camera triggers %0d, IMU triggers %0d, IMU samples tagged %0d", ncam, nimu, nimu_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

