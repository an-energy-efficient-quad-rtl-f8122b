// trigger_gen: synchronized trigger pulses for the cameras and the IMU.
//
// One counter of CLK_HZ/CAM_FPS cycles (one camera frame period) drives both
// outputs. cam_trig pulses when the counter is 0; imu_trig pulses whenever
// the counter is a multiple of the IMU period CLK_HZ/IMU_RATE, so every
// camera trigger coincides with an IMU trigger and the IMU samples
// IMU_RATE/CAM_FPS times per frame (8 with 240 Hz and 30 fps, the paper's
// rates). All four cameras share cam_trig, which is what makes their frames
// simultaneous. The clock frequency is the paper's feature-extractor clock;
// single-cycle pulses and the shared counter are this design's choices.
// Interface: enable starts the counter; while low it is held at 0 and no
// pulses are produced. Timing: the first pulses come in the first cycle
// with enable high.
module trigger_gen #(
  parameter int unsigned CLK_HZ   = 203_000_000,
  parameter int unsigned CAM_FPS  = 30,
  parameter int unsigned IMU_RATE = 240
) (
  input  logic clk,
  input  logic rst_n,
  input  logic enable,
  output logic cam_trig,
  output logic imu_trig
);
  localparam int unsigned CAM_PERIOD = CLK_HZ / CAM_FPS;
  localparam int unsigned IMU_PER_CAM = IMU_RATE / CAM_FPS;
  localparam int unsigned IMU_PERIOD = CAM_PERIOD / IMU_PER_CAM;
  localparam int unsigned CW = $clog2(CAM_PERIOD + 1);
  localparam int unsigned IW = $clog2(IMU_PERIOD + 1);

  logic [CW-1:0] cam_cnt;
  logic [IW-1:0] imu_cnt;

  initial begin
    assert (IMU_RATE % CAM_FPS == 0) else $error("IMU rate must be a multiple of the frame rate");
  end

  always_ff @(posedge clk) begin
    if (!rst_n || !enable) begin
      cam_cnt <= '0;
      imu_cnt <= '0;
    end else begin
      if (cam_cnt == CW'(IMU_PERIOD * IMU_PER_CAM - 1)) begin
        cam_cnt <= '0;
        imu_cnt <= '0;
      end else begin
        cam_cnt <= cam_cnt + 1'b1;
        imu_cnt <= (imu_cnt == IW'(IMU_PERIOD - 1)) ? '0 : imu_cnt + 1'b1;
      end
    end
  end

  assign cam_trig = enable && (cam_cnt == '0);
  assign imu_trig = enable && (imu_cnt == '0);
endmodule
