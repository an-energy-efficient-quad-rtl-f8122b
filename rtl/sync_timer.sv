// sync_timer: source of the unified time tag.
//
// A free-running counter, one tick per clock, that every sensor interface
// samples to stamp its data. Because the camera and IMU interfaces all read
// the same counter, a camera frame and an IMU sample triggered in the same
// cycle carry the same tag. The paper names the timer and the unified tag;
// the tag width (32 bits) and the one-tick-per-clock rate are this design's
// choices. Interface: clk, rst_n (active-low, synchronous), time_tag.
// Timing: time_tag is 0 in the first cycle after reset and increments by one
// every cycle, wrapping at 2**TAG_W.
module sync_timer #(
  parameter int unsigned TAG_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [TAG_W-1:0] time_tag
);
  always_ff @(posedge clk) begin
    if (!rst_n) time_tag <= '0;
    else        time_tag <= time_tag + 1'b1;
  end
endmodule
