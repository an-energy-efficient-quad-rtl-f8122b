// tb_gauss_smooth: random and constant 7x7 windows against a reference
// that forms the 2-D kernel as the outer product of the 7-tap binomial row
// (Pascal's triangle), sums, rounds and divides by 4096. A constant window
// must come out unchanged.
module tb_gauss_smooth;
  logic [7:0] win [7][7];
  logic [7:0] pix;
  int checks = 0, failures = 0;
  gauss_smooth #(.K(7)) dut (.win, .pix);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int row [7] = '{1, 6, 15, 20, 15, 6, 1};
    int acc;
    for (int t = 0; t < 500; t++) begin
      acc = 0;
      for (int r = 0; r < 7; r++)
        for (int c = 0; c < 7; c++) begin
          win[r][c] = (t < 256) ? 8'(t) : 8'($urandom);
          acc += row[r] * row[c] * int'(win[r][c]);
        end
      #1;
      checks++;
      if (int'(pix) != (acc + 2048) / 4096) begin failures++; $display("t=%0d got %0d exp %0d", t, pix, (acc + 2048) / 4096); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
