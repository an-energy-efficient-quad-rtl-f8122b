// tb_sync_fifo: random push/pop traffic against a queue model; checks the
// head value, empty, full and count every cycle, and that pushes into a
// full FIFO are ignored.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic [11:0] din = 0, dout;
  logic empty, full;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [11:0] q[$];
  always #5 clk = ~clk;
  sync_fifo #(.WIDTH(12), .DEPTH(8)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .count);
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int nfull = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 8) || count != 4'(q.size())) begin
        failures++; $display("status mismatch size=%0d count=%0d", q.size(), count);
      end
      if (q.size() > 0) begin checks++; if (dout != q[0]) begin failures++; $display("head %h exp %h", dout, q[0]); end end
      push = ($urandom % 100) < (i < 1500 ? 60 : 40);
      pop  = ($urandom % 100) < (i < 1500 ? 40 : 60);
      din  = 12'($urandom);
      @(posedge clk);
      begin
        automatic int sz = q.size();
        if (pop && sz > 0) void'(q.pop_front());
        if (push) begin
          if (sz < 8) q.push_back(din); else nfull++;
        end
      end
    end
    checks++; if (nfull == 0) begin failures++; $display("full never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
