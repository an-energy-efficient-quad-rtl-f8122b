// quad_cam_frontend: top level of the quad-camera ORB visual front end.
//
// Four cameras form two stereo pairs (cameras 0/1 and 2/3). A single timer
// gives the unified time tag; a single trigger generator fires all four
// cameras at once (CAM_FPS) and the IMU at IMU_RATE, aligned with the
// camera triggers. IMU samples are tagged by imu_interface and queued in
// the IMU buffer; camera frames are tagged and processed by two identical
// stereo_channel instances, each of which extracts ORB features of both
// pyramid levels of both images with one shared extractor and matches them
// into disparity/depth records. The records wait in each channel's
// disparity buffer and the tagged IMU samples in the IMU buffer, to be read
// by the DMA / bus side (outside this design, hence plain ports here), as
// does the back-end processor. The partitioning follows the paper's system
// diagram; port formats are this design's.
// Reset: rst_n is active-low and synchronous. enable starts the triggers.
module quad_cam_frontend
  import vf_pkg::*;
#(
  parameter int unsigned W          = 1280,
  parameter int unsigned H          = 720,
  parameter int unsigned W1         = 1067,
  parameter int unsigned H1         = 600,
  parameter int unsigned MAX_FEAT   = 2048,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned DISP_DEPTH = 1024,
  parameter int unsigned CLK_HZ     = 203_000_000,
  parameter int unsigned CAM_FPS    = 30,
  parameter int unsigned IMU_RATE   = 240,
  parameter int unsigned IMU_W      = 96,
  parameter int unsigned IMU_DEPTH  = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   enable,
  // sensors
  output logic                   cam_trig,
  output logic                   imu_trig,
  input  logic [3:0]             pix_valid,
  input  logic [3:0]             pix_sof,
  input  logic [7:0]             pix_data [4],
  input  logic                   imu_valid,
  input  logic [IMU_W-1:0]       imu_data,
  // IMU buffer read side
  input  logic                   imu_pop,
  output logic [TAG_W+IMU_W-1:0] imu_out,
  output logic                   imu_empty,
  // disparity buffers read side (one per stereo pair)
  input  logic [1:0]             disp_pop,
  output disp_t                  disp_data [2],
  output logic [1:0]             disp_empty,
  // statistics per stereo pair
  output logic [15:0]            stat_frames [2],
  output logic [15:0]            stat_sync_err [2],
  output logic [15:0]            stat_drops [2],
  output logic [15:0]            stat_overlap [2],
  output logic [31:0]            stat_fm_stall [2],
  output logic [15:0]            stat_corrected [2],
  output logic [15:0]            stat_level1 [2],
  output logic [15:0]            stat_feat_ovf [2],
  output logic [15:0]            stat_disp_ovf [2],
  output logic [15:0]            stat_imu_unsolicited
);
  tag_t time_tag;

  sync_timer #(.TAG_W(TAG_W)) u_timer (.clk, .rst_n, .time_tag);

  trigger_gen #(.CLK_HZ(CLK_HZ), .CAM_FPS(CAM_FPS), .IMU_RATE(IMU_RATE)) u_trig (
    .clk, .rst_n, .enable, .cam_trig, .imu_trig);

  logic imu_tv;
  logic [TAG_W+IMU_W-1:0] imu_td;
  imu_interface #(.IMU_W(IMU_W)) u_imu_if (
    .clk, .rst_n, .imu_trig, .time_tag, .imu_valid, .imu_data,
    .out_valid(imu_tv), .out_data(imu_td), .unsolicited(stat_imu_unsolicited));

  sync_fifo #(.WIDTH(TAG_W+IMU_W), .DEPTH(IMU_DEPTH)) u_imu_buf (
    .clk, .rst_n, .push(imu_tv), .din(imu_td), .pop(imu_pop),
    .dout(imu_out), .empty(imu_empty), .full(), .count());

  for (genvar p = 0; p < 2; p++) begin : g_pair
    logic [7:0] pd [2];
    assign pd[0] = pix_data[2*p];
    assign pd[1] = pix_data[2*p+1];
    stereo_channel #(.W(W), .H(H), .W1(W1), .H1(H1), .MAX_FEAT(MAX_FEAT),
                     .FIFO_DEPTH(FIFO_DEPTH), .DISP_DEPTH(DISP_DEPTH)) u_ch (
      .clk, .rst_n, .cam_trig, .time_tag,
      .pix_valid(pix_valid[2*p +: 2]), .pix_sof(pix_sof[2*p +: 2]), .pix_data(pd),
      .disp_pop(disp_pop[p]), .disp_data(disp_data[p]), .disp_empty(disp_empty[p]),
      .stat_frames(stat_frames[p]), .stat_sync_err(stat_sync_err[p]), .stat_drops(stat_drops[p]),
      .stat_overlap(stat_overlap[p]), .stat_fm_stall(stat_fm_stall[p]),
      .stat_corrected(stat_corrected[p]), .stat_level1(stat_level1[p]),
      .stat_feat_ovf(stat_feat_ovf[p]), .stat_disp_ovf(stat_disp_ovf[p]));
  end
endmodule
