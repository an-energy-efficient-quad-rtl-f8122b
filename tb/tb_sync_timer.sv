// tb_sync_timer: checks that the time tag starts at 0 after reset and
// advances by exactly one per clock, including across a wrap of a narrow tag.
module tb_sync_timer;
  logic clk = 0, rst_n = 0;
  logic [7:0] tag;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sync_timer #(.TAG_W(8)) dut (.clk, .rst_n, .time_tag(tag));
  initial begin
    #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    checks++; if (tag != 1) begin failures++; $display("tag after reset %0d", tag); end
    for (int i = 1; i < 600; i++) begin
      @(posedge clk); #1;
      checks++; if (tag != 8'(i + 1)) begin failures++; $display("cycle %0d tag %0d", i, tag); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
