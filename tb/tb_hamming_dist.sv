// tb_hamming_dist: random descriptor pairs and pairs with a known number
// of flipped bits against $countones of the XOR.
module tb_hamming_dist;
  logic [255:0] a, b;
  logic [8:0] d;
  int checks = 0, failures = 0;
  hamming_dist #(.NBITS(256)) dut (.a, .b, .hdist(d));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 600; t++) begin
      for (int w = 0; w < 8; w++) begin a[32*w +: 32] = $urandom; b[32*w +: 32] = $urandom; end
      if (t < 257) begin b = a; for (int k = 0; k < t; k++) b[k] = ~b[k]; end
      #1; checks++;
      if (int'(d) != $countones(a ^ b)) begin failures++; $display("got %0d exp %0d", d, $countones(a ^ b)); end
      if (t < 257) begin checks++; if (int'(d) != t) begin failures++; $display("flipped %0d got %0d", t, d); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
