// window_gen: line buffers (LB) and register bank (RB) for a K x K window.
//
// A raster pixel stream of active width img_w enters one pixel per
// in_valid. K-1 line memories of MAX_W bytes hold the previous K-1 lines;
// each accepted pixel reads the column (K-1 old lines + the new pixel) at
// the current x and shifts it into a K x K register bank. After the pixel
// at (x, y) is accepted, win[r][c] holds pixel (x-(K-1)+c, y-(K-1)+r), so
// the window centre is (x-K/2, y-K/2). Columns that wrap around a line end
// hold pixels of the previous line; the caller must ignore window positions
// closer than K/2 to a border. This is the LB/RB structure the paper uses
// between its extraction stages; the organisation is this design's own.
// Interface: sol (start of image) with the first pixel resets x and y.
// Timing: win is updated the cycle after in_valid.
module window_gen #(
  parameter int unsigned K     = 31,
  parameter int unsigned MAX_W = 1280
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       in_sof,
  input  logic [7:0]                 in_pix,
  input  logic [$clog2(MAX_W+1)-1:0] img_w,
  output logic [7:0]                 win [K][K]
);
  localparam int unsigned XW = $clog2(MAX_W+1);

  logic [7:0] lines [K-1][MAX_W];
  logic [XW-1:0] x;
  logic [XW-1:0] xa;
  logic [7:0] col [K];

  assign xa = in_sof ? '0 : x;

  always_comb begin
    for (int r = 0; r < K - 1; r++) col[r] = lines[r][xa];
    col[K-1] = in_pix;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) x <= '0;
    else if (in_valid) x <= (xa == img_w - 1'b1) ? '0 : xa + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < K - 1; r++) lines[r][xa] <= col[r+1];
      for (int r = 0; r < K; r++) begin
        for (int c = 0; c < K - 1; c++) win[r][c] <= win[r][c+1];
        win[r][K-1] <= col[r];
      end
    end
  end
endmodule
