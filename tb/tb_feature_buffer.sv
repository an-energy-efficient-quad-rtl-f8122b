// tb_feature_buffer: fills the four (slot, side) lists of an 8-entry
// buffer with distinct features, overflows one list, reads everything back
// through the one-cycle read port, and checks counts, clear and overflow.
module tb_feature_buffer;
  import vf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear = 0, clr_slot = 0, clr_side = 0, wr_en = 0, wr_slot = 0, wr_side = 0;
  feat_t wr_feat = '0, rd_feat;
  logic rd_slot = 0, rd_side = 0;
  logic [2:0] rd_idx = 0;
  logic [3:0] count [2][2];
  logic [15:0] overflow;
  feat_t model [2][2][8];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  feature_buffer #(.MAX_FEAT(8)) dut (.clk, .rst_n, .clear, .clr_slot, .clr_side, .wr_en, .wr_slot, .wr_side,
    .wr_feat, .rd_slot, .rd_side, .rd_idx, .rd_feat, .count, .overflow);
  function automatic feat_t mk(int s, int d, int i);
    feat_t f;
    f.x = 11'(s * 100 + d * 10 + i); f.y = 10'(i * 3); f.level = 1'(i); f.theta = 5'(i + s);
    for (int w = 0; w < 8; w++) f.desc[32*w +: 32] = $urandom;
    return f;
  endfunction
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int s = 0; s < 2; s++) for (int d = 0; d < 2; d++) begin
      automatic int n = (s == 1 && d == 0) ? 10 : 3 + s + 2 * d;
      for (int i = 0; i < n; i++) begin
        @(negedge clk); wr_en = 1; wr_slot = 1'(s); wr_side = 1'(d); wr_feat = mk(s, d, i);
        if (i < 8) model[s][d][i] = wr_feat;
      end
    end
    @(negedge clk); wr_en = 0;
    checks++; if (overflow != 2) begin failures++; $display("overflow %0d", overflow); end
    for (int s = 0; s < 2; s++) for (int d = 0; d < 2; d++) begin
      automatic int n = (s == 1 && d == 0) ? 8 : 3 + s + 2 * d;
      checks++; if (int'(count[s][d]) != n) begin failures++; $display("count[%0d][%0d]=%0d", s, d, count[s][d]); end
      for (int i = 0; i < n; i++) begin
        @(negedge clk); rd_slot = 1'(s); rd_side = 1'(d); rd_idx = 3'(i);
        @(posedge clk); #1;
        checks++; if (rd_feat != model[s][d][i]) begin failures++; $display("read %0d %0d %0d", s, d, i); end
      end
    end
    @(negedge clk); clear = 1; clr_slot = 1; clr_side = 0;
    @(negedge clk); clear = 0;
    checks++; if (count[1][0] != 0 || count[0][1] != 5) begin failures++; $display("clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
