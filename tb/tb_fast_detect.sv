// tb_fast_detect: builds 31x31 patches and checks the segment test and
// the moments. Corner cases: an arc of exactly 9 contiguous circle pixels
// brighter (corner), an arc of 8 (not a corner), a dark arc of 9 that wraps
// around index 0 (corner), differences exactly at the threshold (not a
// corner). Random patches check m10 and m01 against a direct double loop
// over the radius-15 disc.
module tb_fast_detect;
  logic [7:0] win [31][31];
  logic is_corner;
  logic signed [21:0] m10, m01;
  int checks = 0, failures = 0;
  int cx[16] = '{0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3, -3, -3, -2, -1};
  int cy[16] = '{-3, -3, -2, -1, 0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3};
  fast_detect #(.THRESH(20), .ARC(9)) dut (.win, .is_corner, .m10, .m01);

  task automatic flat(input logic [7:0] v);
    for (int r = 0; r < 31; r++) for (int c = 0; c < 31; c++) win[r][c] = v;
  endtask
  task automatic arc(input int start, input int len, input logic [7:0] v);
    for (int k = 0; k < len; k++) win[15 + cy[(start + k) % 16]][15 + cx[(start + k) % 16]] = v;
  endtask
  task automatic expect_corner(input logic e, input string what);
    #1; checks++;
    if (is_corner !== e) begin failures++; $display("%s: got %0d", what, is_corner); end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int e10, e01;
    flat(100); expect_corner(0, "flat");
    checks++; if (m10 != 0 || m01 != 0) begin failures++; $display("flat moments %0d %0d", m10, m01); end
    for (int s = 0; s < 16; s++) begin
      flat(100); arc(s, 9, 121); expect_corner(1, $sformatf("bright arc 9 at %0d", s));
      flat(100); arc(s, 8, 200); expect_corner(0, $sformatf("bright arc 8 at %0d", s));
      flat(100); arc(s, 9, 79);  expect_corner(1, $sformatf("dark arc 9 at %0d", s));
      flat(100); arc(s, 12, 120); expect_corner(0, $sformatf("arc at threshold %0d", s));
      flat(10);  arc(s, 16, 0); expect_corner(0, $sformatf("dark below zero %0d", s));
    end
    flat(100); arc(0, 4, 150); arc(5, 4, 150); expect_corner(0, "two short arcs");
    for (int t = 0; t < 200; t++) begin
      e10 = 0; e01 = 0;
      for (int r = 0; r < 31; r++) for (int c = 0; c < 31; c++) win[r][c] = 8'($urandom);
      for (int dy = -15; dy <= 15; dy++)
        for (int dx = -15; dx <= 15; dx++)
          if (dx * dx + dy * dy <= 225) begin
            e10 += dx * int'(win[15 + dy][15 + dx]);
            e01 += dy * int'(win[15 + dy][15 + dx]);
          end
      #1; checks++;
      if (int'(m10) != e10 || int'(m01) != e01) begin failures++; $display("moments %0d %0d exp %0d %0d", m10, m01, e10, e01); end
    end
    // a bright right half pulls the centroid to +x: m10 > 0, m01 = 0
    flat(0);
    for (int r = 0; r < 31; r++) for (int c = 16; c < 31; c++) win[r][c] = 200;
    #1; checks++; if (!(m10 > 0 && m01 == 0)) begin failures++; $display("half-plane moments %0d %0d", m10, m01); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
