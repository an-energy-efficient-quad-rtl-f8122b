// feature_extractor: ORB feature extraction of one image level, streaming.
//
// Two synchronized shifting line-buffer stages run on the same raster
// stream (one pixel per in_valid, in_sof on the first pixel):
//   stage 1: a 31x31 window of raw pixels feeds fast_detect (FAST-9 and the
//            moments m10/m01) and orient_compute (8-bit word length,
//            32 orientation bins). Every corner at least EDGE pixels from
//            the border is written, with its linear pixel index, x, y and
//            orientation, into the coordinate/orientation FIFO.
//   stage 2: a 7x7 raw window feeds gauss_smooth; the smoothed pixels form
//            a second stream, delayed by 3 lines + 3 pixels, that fills a
//            second 31x31 window (of smoothed pixels).
// When the centre of the smoothed window reaches the pixel index at the
// head of the FIFO, brief_descriptor computes the 256-bit descriptor from
// the smoothed window and the stored orientation, and the complete feature
// leaves on feat_valid/feat. The smoothed image is thus never stored: only
// the line buffers and the FIFO hold intermediate data, which is the
// "two-stage shifting line buffer" technique of the paper.
// Interface: start (one cycle, before the first pixel) latches level, img_w
// and img_h and empties the FIFO. done pulses once, a few cycles after the
// last pixel, when every feature has left. fifo_drop counts corners lost
// because the FIFO was full. Timing: one pixel per clock when in_valid is
// held high; a feature leaves 3*img_w + 3 pixels after its detection.
// EDGE and FIFO_DEPTH are this design's choices.
module feature_extractor
  import vf_pkg::*;
#(
  parameter int unsigned MAX_W      = 1280,
  parameter int unsigned MAX_H      = 720,
  parameter int unsigned EDGE       = 19,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned THRESH     = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        level,
  input  logic [XW-1:0] img_w,
  input  logic [YW-1:0] img_h,
  input  logic        in_valid,
  input  logic        in_sof,
  input  logic [7:0]  in_pix,
  output logic        feat_valid,
  output feat_t       feat,
  output logic        done,
  output logic [15:0] fifo_drop
);
  localparam int unsigned NW = $clog2(MAX_W * MAX_H + 1);

  typedef struct packed {
    logic [NW-1:0] idx;
    xcoord_t       x;
    ycoord_t       y;
    theta_t        theta;
  } cand_t;

  logic          lvl_q;
  logic [XW-1:0] w_q;
  logic [YW-1:0] h_q;
  logic [NW-1:0] off1, off2, npix;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lvl_q <= 1'b0; w_q <= XW'(MAX_W); h_q <= YW'(MAX_H);
      off1 <= '0; off2 <= '0; npix <= '0;
    end else if (start) begin
      lvl_q <= level; w_q <= img_w; h_q <= img_h;
      off1 <= NW'(15) * NW'(img_w) + NW'(15);
      off2 <= NW'(18) * NW'(img_w) + NW'(18);
      npix <= NW'(img_w) * NW'(img_h);
    end
  end

  // ---- input position --------------------------------------------------
  logic [NW-1:0] n;          // index of the next pixel
  logic [XW-1:0] xi;
  logic [YW-1:0] yi;
  logic [NW-1:0] na;
  logic [XW-1:0] xa;
  logic [YW-1:0] ya;
  assign na = in_sof ? '0 : n;
  assign xa = in_sof ? '0 : xi;
  assign ya = in_sof ? '0 : yi;

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      n <= '0; xi <= '0; yi <= '0;
    end else if (in_valid) begin
      n <= na + 1'b1;
      if (xa == w_q - 1'b1) begin xi <= '0; yi <= ya + 1'b1; end
      else                  begin xi <= xa + 1'b1; yi <= ya; end
    end
  end

  // ---- stage 1: raw windows -------------------------------------------
  logic [7:0] win31 [31][31];
  logic [7:0] win7  [7][7];

  window_gen #(.K(31), .MAX_W(MAX_W)) u_lb_raw (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix, .img_w(($clog2(MAX_W+1))'(w_q)), .win(win31));
  window_gen #(.K(7), .MAX_W(MAX_W)) u_lb_g (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix, .img_w(($clog2(MAX_W+1))'(w_q)), .win(win7));

  logic          v1;       // windows hold a new pixel
  logic          sof1;
  logic [NW-1:0] n1;
  logic [XW-1:0] x1;
  logic [YW-1:0] y1;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; sof1 <= 1'b0; n1 <= '0; x1 <= '0; y1 <= '0;
    end else begin
      v1 <= in_valid; sof1 <= in_valid && in_sof;
      if (in_valid) begin n1 <= na; x1 <= xa; y1 <= ya; end
    end
  end

  logic is_corner;
  logic signed [21:0] m10, m01;
  theta_t theta;
  fast_detect #(.THRESH(THRESH)) u_fast (.win(win31), .is_corner, .m10, .m01);
  orient_compute #(.IN_W(22)) u_orient (.m10, .m01, .theta_bin(theta));

  logic signed [XW+1:0] xc;
  logic signed [YW+1:0] yc;
  logic in_border;
  assign xc = signed'((XW+2)'(x1)) - 15;
  assign yc = signed'((YW+2)'(y1)) - 15;
  assign in_border = (xc >= signed'((XW+2)'(EDGE))) && (xc <= signed'((XW+2)'(w_q)) - signed'((XW+2)'(EDGE)) - 1)
                  && (yc >= signed'((YW+2)'(EDGE))) && (yc <= signed'((YW+2)'(h_q)) - signed'((YW+2)'(EDGE)) - 1);

  // coordinate / orientation RAM
  cand_t c_in, c_head;
  logic  c_push, c_pop, c_empty, c_full;
  logic [$clog2(FIFO_DEPTH+1)-1:0] c_count;
  assign c_push = v1 && is_corner && in_border;
  assign c_in   = '{idx: n1 - off1, x: xcoord_t'(xc), y: ycoord_t'(yc), theta: theta};

  sync_fifo #(.WIDTH($bits(cand_t)), .DEPTH(FIFO_DEPTH)) u_coord_ram (
    .clk, .rst_n(rst_n && !start), .push(c_push), .din(c_in), .pop(c_pop),
    .dout(c_head), .empty(c_empty), .full(c_full), .count(c_count));

  always_ff @(posedge clk) begin
    if (!rst_n || start) fifo_drop <= '0;
    else if (c_push && c_full) fifo_drop <= fifo_drop + 1'b1;
  end

  // ---- stage 2: smoothed stream and its window ------------------------
  logic [7:0] spix;
  gauss_smooth #(.K(7)) u_gauss (.win(win7), .pix(spix));

  logic [7:0] swin [31][31];
  window_gen #(.K(31), .MAX_W(MAX_W)) u_lb_s (
    .clk, .rst_n, .in_valid(v1), .in_sof(sof1), .in_pix(spix),
    .img_w(($clog2(MAX_W+1))'(w_q)), .win(swin));

  logic          v2;
  logic [NW-1:0] n2;
  always_ff @(posedge clk) begin
    if (!rst_n) begin v2 <= 1'b0; n2 <= '0; end
    else begin v2 <= v1; if (v1) n2 <= n1; end
  end

  logic [NW-1:0] scentre;
  logic          at_head, past_head;
  desc_t         desc;
  assign scentre   = n2 - off2;
  assign at_head   = v2 && !c_empty && (n2 >= off2) && (scentre == c_head.idx);
  assign past_head = v2 && !c_empty && (n2 >= off2) && (scentre > c_head.idx);
  assign c_pop     = at_head || past_head;

  brief_descriptor u_brief (.win(swin), .theta_bin(c_head.theta), .desc(desc));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      feat_valid <= 1'b0;
      feat <= '0;
    end else begin
      feat_valid <= at_head;
      if (at_head) feat <= '{x: c_head.x, y: c_head.y, level: lvl_q, theta: c_head.theta, desc: desc};
    end
  end

  // ---- end of image ---------------------------------------------------
  logic [2:0] tail;
  logic       last_seen;
  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      last_seen <= 1'b0; tail <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (in_valid && (na == npix - 1'b1)) begin last_seen <= 1'b1; tail <= '0; end
      else if (last_seen) begin
        if (tail == 3'd4) begin done <= 1'b1; last_seen <= 1'b0; end
        tail <= tail + 1'b1;
      end
    end
  end
endmodule
