// fe_pyramid: one feature extractor run over both pyramid levels of an image.
//
// Sequence for one image (start pulse with side, image-buffer bank and
// frame slot):
//   1. level 0: read the W x H image from the image buffer, one address per
//      cycle, and stream it into the feature extractor and, at the same
//      time, into the image resizer, whose 1067x600 output is written to
//      the pyramid RAM bank {slot, side};
//   2. level 1: once the extractor reports done, stream the resized image
//      back from the pyramid RAM into the same extractor with level = 1.
// Features leave on feat_valid/feat as the extractor produces them; clear
// pulses at start so the caller can empty the feature list. done pulses at
// the end. The pyramid RAM is kept because the SAD rectifier needs level-1
// pixels later. The paper builds a two-level pyramid by bilinear resizing
// and stores it in RAM; running both levels one after the other through a
// single extractor is this design's choice. Timing: W*H + W1*H1 cycles
// plus a few cycles of pipeline fill per image.
module fe_pyramid
  import vf_pkg::*;
#(
  parameter int unsigned W          = 1280,
  parameter int unsigned H          = 720,
  parameter int unsigned W1         = 1067,
  parameter int unsigned H1         = 600,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic                       side,
  input  logic                       img_bank,
  input  logic                       slot,
  output logic                       busy,
  output logic                       done,
  output logic                       clear,
  // image buffer read (port A of the buffer selected by side)
  output logic                       img_rd_bank,
  output logic [$clog2(W*H)-1:0]     img_rd_addr,
  input  logic [7:0]                 img_rd_data,
  // pyramid RAM
  output logic                       pyr_wr_en,
  output logic [1:0]                 pyr_wr_bank,
  output logic [$clog2(W1*H1)-1:0]   pyr_wr_addr,
  output logic [7:0]                 pyr_wr_data,
  output logic [1:0]                 pyr_rd_bank,
  output logic [$clog2(W1*H1)-1:0]   pyr_rd_addr,
  input  logic [7:0]                 pyr_rd_data,
  // features
  output logic                       feat_valid,
  output feat_t                      feat,
  output logic [15:0]                fifo_drop
);
  localparam int unsigned A0 = $clog2(W*H);
  localparam int unsigned A1 = $clog2(W1*H1);

  typedef enum logic [2:0] {S_IDLE, S_L0, S_W0, S_L1, S_W1} state_t;
  state_t st;

  logic side_q, bank_q, slot_q;
  logic [A0-1:0] addr0;
  logic [A1-1:0] addr1;
  logic rd_v, rd_sof, rd_lvl;
  logic fe_start, fe_level, fe_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; side_q <= 1'b0; bank_q <= 1'b0; slot_q <= 1'b0;
      addr0 <= '0; addr1 <= '0; rd_v <= 1'b0; rd_sof <= 1'b0; rd_lvl <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      rd_v <= 1'b0; rd_sof <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_L0; side_q <= side; bank_q <= img_bank; slot_q <= slot; addr0 <= '0;
        end
        S_L0: begin
          rd_v <= 1'b1; rd_sof <= (addr0 == '0); rd_lvl <= 1'b0;
          if (addr0 == A0'(W*H - 1)) st <= S_W0;
          else addr0 <= addr0 + 1'b1;
        end
        S_W0: if (fe_done) begin st <= S_L1; addr1 <= '0; end
        S_L1: begin
          rd_v <= 1'b1; rd_sof <= (addr1 == '0); rd_lvl <= 1'b1;
          if (addr1 == A1'(W1*H1 - 1)) st <= S_W1;
          else addr1 <= addr1 + 1'b1;
        end
        S_W1: if (fe_done) begin st <= S_IDLE; done <= 1'b1; end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy  = (st != S_IDLE);
  assign clear = start && (st == S_IDLE);
  assign img_rd_bank = bank_q;
  assign img_rd_addr = addr0;
  assign pyr_rd_bank = {slot_q, side_q};
  assign pyr_rd_addr = addr1;

  // extractor start: at the start command (level 0) and when entering level 1
  assign fe_start = (st == S_IDLE && start) || (st == S_W0 && fe_done);
  assign fe_level = (st == S_W0);

  logic [7:0] pix;
  assign pix = rd_lvl ? pyr_rd_data : img_rd_data;

  feature_extractor #(.MAX_W(W), .MAX_H(H), .FIFO_DEPTH(FIFO_DEPTH)) u_fe (
    .clk, .rst_n, .start(fe_start), .level(fe_level),
    .img_w(fe_level ? XW'(W1) : XW'(W)), .img_h(fe_level ? YW'(H1) : YW'(H)),
    .in_valid(rd_v), .in_sof(rd_sof), .in_pix(pix),
    .feat_valid, .feat, .done(fe_done), .fifo_drop);

  logic rs_v;
  logic [7:0] rs_pix;
  logic [$clog2(W1+1)-1:0] rs_x;
  logic [$clog2(H1+1)-1:0] rs_y;
  image_resizer #(.SRC_W(W), .SRC_H(H), .DST_W(W1), .DST_H(H1)) u_resize (
    .clk, .rst_n, .in_valid(rd_v && !rd_lvl), .in_sof(rd_sof && !rd_lvl), .in_pix(img_rd_data),
    .out_valid(rs_v), .out_pix(rs_pix), .out_x(rs_x), .out_y(rs_y));

  assign pyr_wr_en   = rs_v;
  assign pyr_wr_bank = {slot_q, side_q};
  assign pyr_wr_addr = A1'(rs_y) * A1'(W1) + A1'(rs_x);
  assign pyr_wr_data = rs_pix;
endmodule
