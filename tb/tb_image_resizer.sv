// tb_image_resizer: two random 16x12 images scaled to 14x10 (factor 1.2,
// with the last output column beyond the last source column, as for
// 1280 -> 1067). The reference computes each output pixel from its source
// position (1.2*ox, 1.2*oy) with bilinear weights, clamping the right
// neighbour to the last column, in real arithmetic, rounded. Checks every
// output value and coordinate, the output count and that all outputs of an
// image have appeared one cycle after its last pixel (pending slot).
module tb_image_resizer;
  localparam int SW = 16, SH = 12, DW = 14, DH = 10;
  logic clk = 0, rst_n = 0, in_valid = 0, in_sof = 0;
  logic [7:0] in_pix = 0;
  logic out_valid;
  logic [7:0] out_pix;
  logic [3:0] out_x, out_y;
  logic [7:0] img [SH][SW];
  int checks = 0, failures = 0;
  int got [DH][DW];
  int nout = 0;
  always #5 clk = ~clk;
  image_resizer #(.SRC_W(SW), .SRC_H(SH), .DST_W(DW), .DST_H(DH)) dut (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix, .out_valid, .out_pix, .out_x, .out_y);
  always @(posedge clk) if (rst_n && out_valid) begin
    nout++;
    if (out_x < DW && out_y < DH) got[out_y][out_x] = int'(out_pix);
  end
  function automatic int ref_pix(int ox, int oy);
    real sx = ox * 1.2, sy = oy * 1.2, fx, fy, v;
    int x0 = int'($floor(sx)), y0 = int'($floor(sy)), x1, y1;
    fx = sx - x0; fy = sy - y0;
    x1 = (x0 + 1 < SW) ? x0 + 1 : SW - 1;
    y1 = (y0 + 1 < SH) ? y0 + 1 : SH - 1;
    v = (1 - fx) * (1 - fy) * img[y0][x0] + fx * (1 - fy) * img[y0][x1]
      + (1 - fx) * fy * img[y1][x0] + fx * fy * img[y1][x1];
    return int'($floor(v + 0.5));
  endfunction
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int e;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 2; f++) begin
      for (int y = 0; y < SH; y++) for (int x = 0; x < SW; x++) img[y][x] = 8'($urandom);
      for (int y = 0; y < DH; y++) for (int x = 0; x < DW; x++) got[y][x] = -1;
      nout = 0;
      for (int y = 0; y < SH; y++)
        for (int x = 0; x < SW; x++) begin
          @(negedge clk); in_valid = 1; in_sof = (x == 0 && y == 0); in_pix = img[y][x];
        end
      @(negedge clk); in_valid = 0; in_sof = 0;
      @(negedge clk);
      @(negedge clk);
      checks++; if (nout != DW * DH) begin failures++; $display("frame %0d: %0d outputs", f, nout); end
      for (int y = 0; y < DH; y++)
        for (int x = 0; x < DW; x++) begin
          e = ref_pix(x, y);
          checks++;
          if (got[y][x] < e - 1 || got[y][x] > e + 1) begin failures++; $display("(%0d,%0d) got %0d exp %0d", x, y, got[y][x], e); end
        end
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
