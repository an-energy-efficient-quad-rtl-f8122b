// imu_interface: IMU-side half of the hardware synchronization.
//
// Each IMU trigger latches the unified time tag and counts one request.
// The sample the IMU returns for that request (imu_valid/imu_data, from
// the serial receiver) is written to the IMU buffer together with the tag
// of its trigger, so IMU samples and camera frames are stamped from the
// same timer and can be aligned exactly. Samples that arrive without an
// outstanding trigger are still stored, with the latest tag, and counted
// in unsolicited. The tagging is the paper's; the sample format and the
// request bookkeeping are this design's. Timing: out_valid one cycle after
// imu_valid.
module imu_interface
  import vf_pkg::*;
#(
  parameter int unsigned IMU_W = 96
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   imu_trig,
  input  tag_t                   time_tag,
  input  logic                   imu_valid,
  input  logic [IMU_W-1:0]       imu_data,
  output logic                   out_valid,
  output logic [TAG_W+IMU_W-1:0] out_data,
  output logic [15:0]            unsolicited
);
  tag_t trig_tag;
  logic pending;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trig_tag <= '0; pending <= 1'b0; out_valid <= 1'b0; out_data <= '0; unsolicited <= '0;
    end else begin
      out_valid <= imu_valid;
      if (imu_valid) begin
        out_data <= {imu_trig ? time_tag : trig_tag, imu_data};
        if (!pending && !imu_trig) unsolicited <= unsolicited + 1'b1;
      end
      if (imu_trig) trig_tag <= time_tag;
      if (imu_trig && !imu_valid) pending <= 1'b1;
      else if (imu_valid)         pending <= 1'b0;
    end
  end
endmodule
