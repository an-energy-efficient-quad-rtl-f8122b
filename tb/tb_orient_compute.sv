// tb_orient_compute: compares the orientation bin with round(atan2(m01,
// m10) / 11.25 deg) mod 32 computed in floating point. Vectors along the
// bin centres must give exactly that bin; random vectors may differ by one
// bin only when the angle lies within 1.5 degrees of a bin boundary (the
// 8-bit word length limits the precision), and such cases are counted.
module tb_orient_compute;
  logic signed [21:0] m10, m01;
  logic [4:0] bin;
  int checks = 0, failures = 0;
  orient_compute #(.IN_W(22)) dut (.m10, .m01, .theta_bin(bin));
  localparam real PI = 3.14159265358979;
  function automatic int ref_bin(real a);
    real d = a * 180.0 / PI;
    if (d < 0) d += 360.0;
    return int'($floor(d / 11.25 + 0.5)) % 32;
  endfunction
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real a, d, frac;
    int rb, near = 0;
    m10 = 0; m01 = 0; #1; checks++; if (bin != 0) begin failures++; $display("zero vector bin %0d", bin); end
    for (int k = 0; k < 32; k++) begin
      for (int mag = 50; mag < 2000000; mag *= 7) begin
        a = k * 11.25 * PI / 180.0;
        m10 = 22'($rtoi(mag * $cos(a))); m01 = 22'($rtoi(mag * $sin(a)));
        #1; checks++;
        if (int'(bin) != k) begin failures++; $display("centre k=%0d mag=%0d bin=%0d", k, mag, bin); end
      end
    end
    for (int t = 0; t < 3000; t++) begin
      m10 = 22'(int'($urandom % 2000001) - 1000000);
      m01 = 22'(int'($urandom % 2000001) - 1000000);
      if (t % 3 == 0) begin m10 = m10 >>> 10; m01 = m01 >>> 10; end
      #1;
      a = $atan2(real'(m01), real'(m10));
      rb = ref_bin(a);
      d = a * 180.0 / PI; if (d < 0) d += 360.0;
      frac = d / 11.25 + 0.5 - $floor(d / 11.25 + 0.5);   // position inside the bin, 0..1
      checks++;
      if (int'(bin) != rb) begin
        if ((frac < 0.14 || frac > 0.86) && ((int'(bin) - rb + 32) % 32 == 1 || (rb - int'(bin) + 32) % 32 == 1)) near++;
        else begin failures++; $display("m10=%0d m01=%0d bin=%0d ref=%0d", m10, m01, bin, rb); end
      end
    end
    $display("boundary cases off by one bin: %0d", near);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
