// tb_imu_interface: triggers at known times, samples returned a few cycles
// later; each tagged sample must carry the time tag of its trigger and the
// sample data unchanged. A sample with no trigger is counted as unsolicited.
module tb_imu_interface;
  import vf_pkg::*;
  logic clk = 0, rst_n = 0, imu_trig = 0, imu_valid = 0, out_valid;
  tag_t tt = 0;
  logic [95:0] imu_data = 0;
  logic [127:0] out_data;
  logic [15:0] unsol;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always @(posedge clk) tt <= tt + 1;
  imu_interface #(.IMU_W(96)) dut (.clk, .rst_n, .imu_trig, .time_tag(tt), .imu_valid, .imu_data, .out_valid, .out_data, .unsolicited(unsol));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    tag_t trig_at;
    logic [95:0] d;
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int k = 0; k < 20; k++) begin
      repeat (3 + k % 5) @(negedge clk);
      imu_trig = 1; trig_at = tt;
      @(negedge clk); imu_trig = 0;
      repeat (1 + k % 4) @(negedge clk);
      d = {$urandom, $urandom, $urandom};
      imu_valid = 1; imu_data = d;
      @(negedge clk); imu_valid = 0;
      checks++;
      if (!out_valid || out_data != {trig_at, d}) begin failures++; $display("k=%0d tag %0d exp %0d", k, out_data[127:96], trig_at); end
    end
    checks++; if (unsol != 0) begin failures++; $display("unsolicited %0d", unsol); end
    @(negedge clk); imu_valid = 1; @(negedge clk); imu_valid = 0;
    @(negedge clk); checks++; if (unsol != 1) begin failures++; $display("unsolicited not counted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
