// tb_window_gen: streams three 10x7 images (pixel value from a hash of
// frame, x and y) through a 5x5 window generator with 12-pixel line
// memories and checks, after every pixel whose window lies inside the
// image, that win[r][c] equals the pixel (x-4+c, y-4+r).
module tb_window_gen;
  localparam int K = 5, MW = 12, IW = 10, IH = 7;
  logic clk = 0, rst_n = 0, in_valid = 0, in_sof = 0;
  logic [7:0] in_pix = 0;
  logic [7:0] win [K][K];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  window_gen #(.K(K), .MAX_W(MW)) dut (.clk, .rst_n, .in_valid, .in_sof, .in_pix, .img_w(4'(IW)), .win);
  function automatic logic [7:0] pv(int f, int x, int y);
    return 8'((f * 97 + x * 13 + y * 31 + x * y) & 255);
  endfunction
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 3; f++)
      for (int y = 0; y < IH; y++)
        for (int x = 0; x < IW; x++) begin
          @(negedge clk);
          in_valid = 1; in_sof = (x == 0 && y == 0); in_pix = pv(f, x, y);
          @(posedge clk); #1;
          in_valid = 0;
          if (x >= K - 1 && y >= K - 1) begin
            for (int r = 0; r < K; r++)
              for (int c = 0; c < K; c++) begin
                checks++;
                if (win[r][c] != pv(f, x - K + 1 + c, y - K + 1 + r)) begin
                  failures++; $display("f%0d (%0d,%0d) win[%0d][%0d]=%h", f, x, y, r, c, win[r][c]);
                end
              end
          end
          // an idle cycle every few pixels: the window must not move
          if ((x + y) % 4 == 0) @(negedge clk);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
