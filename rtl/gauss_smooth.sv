// gauss_smooth: 7x7 Gaussian filter on a register-bank window.
//
// Computes the smoothed value of the window centre as the weighted sum of
// the 49 pixels with the separable binomial kernel [1 6 15 20 15 6 1] in
// both directions (weights sum to 4096), rounded and divided by 4096. The
// 7x7 size is the paper's; the binomial approximation of the Gaussian is
// this design's choice. Purely combinational; the caller registers it.
module gauss_smooth #(
  parameter int unsigned K = 7
) (
  input  logic [7:0] win [K][K],
  output logic [7:0] pix
);
  function automatic int unsigned binom(input int unsigned n, input int unsigned k);
    int unsigned r = 1;
    for (int unsigned i = 0; i < k; i++) r = r * (n - i) / (i + 1);
    return r;
  endfunction

  localparam int unsigned SHIFT = 2 * (K - 1);
  logic [SHIFT+8:0] acc;

  always_comb begin
    acc = '0;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++)
        acc += (SHIFT+9)'(binom(K-1, r) * binom(K-1, c)) * (SHIFT+9)'(win[r][c]);
    acc += (SHIFT+9)'(1 << (SHIFT - 1));
    pix = acc[SHIFT+7:SHIFT];
  end
endmodule
