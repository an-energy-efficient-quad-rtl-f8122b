// tb_search_region: random left/right coordinate pairs, biased to lie near
// the strip edges, against the region rule (same level, |dy| <= 2,
// 0 <= xl - xr <= 128).
module tb_search_region;
  import vf_pkg::*;
  feat_t l, r;
  logic in_region;
  int checks = 0, failures = 0;
  search_region #(.ROW_TOL(2), .MAX_DISP(128)) dut (.left(l), .right(r), .in_region);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int xl, yl, xr, yr, nin = 0;
    logic e;
    for (int t = 0; t < 4000; t++) begin
      l = '0; r = '0;
      xl = $urandom % 1280; yl = $urandom % 720;
      xr = xl - (int'($urandom % 140) - 6); yr = yl + (int'($urandom % 7) - 3);
      if (xr < 0) xr = 0; if (xr > 1279) xr = 1279; if (yr < 0) yr = 0; if (yr > 719) yr = 719;
      l.x = 11'(xl); l.y = 10'(yl); r.x = 11'(xr); r.y = 10'(yr);
      l.level = 1'($urandom); r.level = ($urandom % 8 == 0) ? ~l.level : l.level;
      #1;
      e = (l.level == r.level) && (yl - yr <= 2) && (yr - yl <= 2) && (xl - xr >= 0) && (xl - xr <= 128);
      nin += int'(e);
      checks++; if (in_region != e) begin failures++; $display("l(%0d,%0d) r(%0d,%0d) got %0d", xl, yl, xr, yr, in_region); end
    end
    checks++; if (nin < 100) begin failures++; $display("too few in-region cases"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
