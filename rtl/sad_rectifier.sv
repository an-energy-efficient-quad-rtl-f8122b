// sad_rectifier: SAD correction of a matched pair, disparity and depth.
//
// For a pre-matched pair (F in the left image, F' in the right image, both
// in the same pyramid level) it reads an 11x11 window around F and an
// 11 x (11 + 2*SAD_R) strip around F' from that level's images, one pixel
// per cycle through pix_rd_* (one cycle read latency). It then evaluates
// the sum of absolute differences for the 2*SAD_R+1 horizontal shifts of
// the right window, one shift per cycle, keeps the smallest (the first one
// on a tie, shifts tried from -SAD_R upwards), moves F' to that position
// and forms the disparity d = xl - x'r. Level-1 results are scaled back to
// level-0 pixels by 1.2 (rounded). depth = FB / d (0 when d <= 0).
// The 11x11 window, the sliding and the relocation are the paper's;
// SAD_R, FB, the scale recovery at this point and the sequential read
// schedule are this design's. Interface: in_valid/in_ready handshake for the
// pair, out_valid one cycle with the result. pix_rd_side selects the image,
// pix_rd_level the pyramid level, pix_rd_addr = y*width(level) + x.
// Timing: 121 + 11*(11+2*SAD_R) reads + (2*SAD_R+1) SAD cycles + 3.
module sad_rectifier
  import vf_pkg::*;
#(
  parameter int unsigned W     = 1280,
  parameter int unsigned H     = 720,
  parameter int unsigned W1    = 1067,
  parameter int unsigned WIN   = 11,
  parameter int unsigned SAD_R = 5,
  parameter int unsigned FB    = 84000
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  feat_t                     in_l,
  input  feat_t                     in_r,
  input  logic [8:0]                in_ham,
  output logic                      pix_rd_side,
  output logic                      pix_rd_level,
  output logic [$clog2(W*H)-1:0]  pix_rd_addr,
  input  logic [7:0]                pix_rd_data,
  output logic                      out_valid,
  output disp_t                     out,
  output logic [15:0]               corrected
);
  localparam int unsigned HW  = WIN / 2;
  localparam int unsigned SW  = WIN + 2 * SAD_R;
  localparam int unsigned NSH = 2 * SAD_R + 1;
  localparam int unsigned AW  = $clog2(W * H);

  typedef enum logic [2:0] {S_IDLE, S_RDL, S_RDR, S_SAD, S_OUT} state_t;
  state_t st;

  feat_t l_q, r_q;
  logic [8:0] ham_q;
  logic [7:0] lp [WIN][WIN];
  logic [7:0] rp [WIN][SW];
  logic [$clog2(WIN+1)-1:0] rr;
  logic [$clog2(SW+1)-1:0]  cc;
  logic                     dv;        // data of the previous read is valid
  logic [$clog2(WIN+1)-1:0] rr_d;
  logic [$clog2(SW+1)-1:0]  cc_d;
  logic                     side_d;
  logic [$clog2(NSH+1)-1:0] sh;
  logic [15:0] best_sad;
  logic [$clog2(NSH+1)-1:0] best_sh;

  // read address generation
  logic [XW:0] base_x;
  logic [YW:0] base_y;
  logic [AW-1:0] lw;
  assign lw = l_q.level ? AW'(W1) : AW'(W);
  always_comb begin
    if (st == S_RDL) begin
      base_x = {1'b0, l_q.x} - (XW+1)'(HW) + (XW+1)'(cc);
      base_y = {1'b0, l_q.y} - (YW+1)'(HW) + (YW+1)'(rr);
    end else begin
      base_x = {1'b0, r_q.x} - (XW+1)'(HW + SAD_R) + (XW+1)'(cc);
      base_y = {1'b0, r_q.y} - (YW+1)'(HW) + (YW+1)'(rr);
    end
  end
  assign pix_rd_addr  = AW'(base_y) * lw + AW'(base_x);
  assign pix_rd_side  = (st == S_RDR);
  assign pix_rd_level = l_q.level;
  assign in_ready     = (st == S_IDLE);

  // SAD of the current shift
  logic [15:0] sad;
  always_comb begin
    sad = '0;
    for (int r = 0; r < WIN; r++)
      for (int c = 0; c < WIN; c++)
        sad += 16'((lp[r][c] > rp[r][c + int'(sh)]) ? lp[r][c] - rp[r][c + int'(sh)]
                                                    : rp[r][c + int'(sh)] - lp[r][c]);
  end

  // result
  logic signed [XW+1:0] xr_new, d_lvl;
  logic [XW+3:0] d0, xl0, yl0;
  always_comb begin
    xr_new = signed'((XW+2)'(r_q.x)) + signed'((XW+2)'(best_sh)) - signed'((XW+2)'(SAD_R));
    d_lvl  = signed'((XW+2)'(l_q.x)) - xr_new;
    if (l_q.level) begin
      d0  = (d_lvl > 0) ? ((XW+4)'(d_lvl) * 6 + 2) / 5 : '0;
      xl0 = ((XW+4)'(l_q.x) * 6 + 2) / 5;
      yl0 = ((XW+4)'(l_q.y) * 6 + 2) / 5;
    end else begin
      d0  = (d_lvl > 0) ? (XW+4)'(d_lvl) : '0;
      xl0 = (XW+4)'(l_q.x);
      yl0 = (XW+4)'(l_q.y);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; rr <= '0; cc <= '0; dv <= 1'b0; rr_d <= '0; cc_d <= '0; side_d <= 1'b0;
      sh <= '0; best_sad <= '0; best_sh <= '0; out_valid <= 1'b0; out <= '0;
      l_q <= '0; r_q <= '0; ham_q <= '0; corrected <= '0;
    end else begin
      out_valid <= 1'b0;
      dv <= 1'b0;
      if (dv) begin
        if (!side_d) lp[rr_d][cc_d] <= pix_rd_data;
        else         rp[rr_d][cc_d] <= pix_rd_data;
      end
      unique case (st)
        S_IDLE: if (in_valid) begin
          l_q <= in_l; r_q <= in_r; ham_q <= in_ham; rr <= '0; cc <= '0; st <= S_RDL;
        end
        S_RDL, S_RDR: begin
          dv <= 1'b1; rr_d <= rr; cc_d <= cc; side_d <= (st == S_RDR);
          if (cc == (st == S_RDL ? ($clog2(SW+1))'(WIN - 1) : ($clog2(SW+1))'(SW - 1))) begin
            cc <= '0;
            if (rr == ($clog2(WIN+1))'(WIN - 1)) begin
              rr <= '0;
              if (st == S_RDL) st <= S_RDR;
              else begin st <= S_SAD; sh <= '0; end
            end else rr <= rr + 1'b1;
          end else cc <= cc + 1'b1;
        end
        S_SAD: if (!dv) begin
          if (sh == '0 || sad < best_sad) begin best_sad <= sad; best_sh <= sh; end
          if (sh == ($clog2(NSH+1))'(NSH - 1)) st <= S_OUT;
          else sh <= sh + 1'b1;
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out.xl    <= xcoord_t'(xl0);
          out.yl    <= ycoord_t'(yl0);
          out.level <= l_q.level;
          out.ham   <= ham_q;
          out.disp  <= 11'(d0);
          out.depth <= (d0 == '0) ? '0 : 16'(32'(FB) / 32'(d0));
          if (best_sh != ($clog2(NSH+1))'(SAD_R)) corrected <= corrected + 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
