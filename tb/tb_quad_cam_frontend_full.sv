// tb_quad_cam_frontend_full: full-size run of the front end.
//
// What it does: runs quad_cam_frontend with every parameter at its default
// (1280x720 images, 1067x600 second pyramid level, 203 MHz clock, 30 fps
// cameras, 240 Hz IMU, 2048 features per image) for one synchronized
// capture of all four cameras.
// How it works: the four camera models answer only the first camera
// trigger, each streaming one full frame at one pixel per clock. Left
// images are flat rectangles on a lightly noisy background; the right image
// of each pair is the left one shifted by DISP pixels. The IMU model answers
// every IMU trigger. After both stereo pairs have finished, the disparity
// records and IMU samples are read back.
// Checks: at least two thirds of the disparity records have disparity within 1 of
// DISP, depth 84000/disparity and Hamming distance <= 64 (flat rectangles
// look alike, so corners of different rectangles on the same rows give
// near-identical descriptors and about 20% of the matches pick a
// look-alike corner; this is the matching rule itself, not a fault); each pair produced records on
// both pyramid levels; IMU samples carry the timer value of their trigger;
// no feature-buffer or disparity-buffer overflow, no sync error.
// Interface/timing: drives only the top's ports; a hierarchical read of the
// timer is used as the tag reference. Scene, disparity and run length are
// this testbench's choices.
module tb_quad_cam_frontend_full;
  import vf_pkg::*;
  localparam int W = 1280, H = 720;
  localparam int DISP = 40, IMU_W = 96;
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

  quad_cam_frontend dut (.*);

  int checks = 0, failures = 0;
  initial begin #2s; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

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
        if (fr > 1) continue;   // one capture only
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
    end
  end

  // read the disparity buffers and IMU buffer
  int nbad [2] = '{0, 0};
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
          nbad[p]++;
          if (nbad[p] < 5) $display("pair %0d record (%0d,%0d) L%0d disp %0d depth %0d ham %0d", p, r.xl, r.yl, r.level, r.disp, r.depth, r.ham);
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
      for (int k = 0; k < 24; k++) begin
        automatic int w = 10 + $urandom % 60, h = 10 + $urandom % 60;
        automatic int x0 = 20 + $urandom % (W - 40 - w), y0 = 20 + $urandom % (H - 40 - h);
        automatic int v = (k % 2) ? 130 + $urandom % 120 : $urandom % 30;
        for (int y = y0; y < y0 + h; y++) for (int x = x0; x < x0 + w; x++) scene[s][y][x] = 8'(v);
      end
    end
    pix_valid = 0; pix_sof = 0; imu_valid = 0; imu_data = 0; imu_pop = 0; disp_pop = 0;
    repeat (4) @(posedge clk); rst_n <= 1;
    repeat (4) @(posedge clk); enable <= 1;
    wait (stat_frames[0] >= 1 && stat_frames[1] >= 1);
    begin
      automatic int last0 = -1, last1 = -1, idle = 0;
      while (idle < 200000) begin
        repeat (1000) @(posedge clk);
        if (nrec[0] == last0 && nrec[1] == last1) idle += 1000; else idle = 0;
        last0 = nrec[0]; last1 = nrec[1];
      end
    end
    $display("finished at cycle %0d", dut.time_tag);
    for (int p = 0; p < 2; p++) begin
      $display("pair %0d: frames %0d sync_err %0d drops %0d overlap %0d fm_stall %0d corrected %0d level1 %0d records %0d (L1 %0d) feat_ovf %0d disp_ovf %0d",
               p, stat_frames[p], stat_sync_err[p], stat_drops[p], stat_overlap[p], stat_fm_stall[p],
               stat_corrected[p], stat_level1[p], nrec[p], nl1[p], stat_feat_ovf[p], stat_disp_ovf[p]);
      checks++; if (nbad[p] * 3 > nrec[p]) begin failures++; $display("pair %0d: %0d of %0d records with wrong disparity", p, nbad[p], nrec[p]); end
      checks++; if (nrec[p] < 100) begin failures++; $display("pair %0d: too few records", p); end
      checks++; if (nl1[p] == 0 || stat_level1[p] == 0) begin failures++; $display("pair %0d: no level-1 match", p); end
      checks++; if (stat_feat_ovf[p] != 0 || stat_disp_ovf[p] != 0 || stat_sync_err[p] != 0 || stat_drops[p] != 0) begin
        failures++; $display("pair %0d: overflow, drop or sync error", p); end
    end
    checks++; if (nimu_out != imu_cnt || nimu_out == 0) begin failures++; $display("IMU samples out %0d of %0d", nimu_out, imu_cnt); end
    $display("camera triggers %0d, IMU triggers %0d, IMU samples tagged %0d", ncam, nimu, nimu_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

