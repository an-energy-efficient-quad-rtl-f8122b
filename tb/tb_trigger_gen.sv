// tb_trigger_gen: with a 2400 Hz clock, 30 fps and a 240 Hz IMU the camera
// period is 80 cycles and the IMU period 10. Checks the exact spacing of
// every pulse, that each camera pulse coincides with an IMU pulse, the
// number of pulses, and that nothing fires while enable is low.
module tb_trigger_gen;
  logic clk = 0, rst_n = 0, enable = 0;
  logic cam_trig, imu_trig;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  trigger_gen #(.CLK_HZ(2400), .CAM_FPS(30), .IMU_RATE(240)) dut (.clk, .rst_n, .enable, .cam_trig, .imu_trig);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int ncam = 0, nimu = 0, last_cam = -1, last_imu = -1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (20) begin
      @(posedge clk); #1;
      checks++; if (cam_trig || imu_trig) begin failures++; $display("pulse while disabled"); end
    end
    @(negedge clk); enable = 1;
    for (int t = 0; t < 800; t++) begin
      #1;
      if (cam_trig) begin
        ncam++;
        checks++; if (!imu_trig) begin failures++; $display("camera pulse without IMU pulse at %0d", t); end
        if (last_cam >= 0) begin checks++; if (t - last_cam != 80) begin failures++; $display("camera spacing %0d", t - last_cam); end end
        last_cam = t;
      end
      if (imu_trig) begin
        nimu++;
        if (last_imu >= 0) begin checks++; if (t - last_imu != 10) begin failures++; $display("imu spacing %0d", t - last_imu); end end
        last_imu = t;
      end
      @(negedge clk);
    end
    checks++; if (ncam != 10) begin failures++; $display("camera pulses %0d", ncam); end
    checks++; if (nimu != 80) begin failures++; $display("imu pulses %0d", nimu); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
