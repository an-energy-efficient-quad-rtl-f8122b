// stereo_channel: one stereo camera pair of the quad-camera front end.
//
// Contents: two camera interfaces writing two double-banked image buffers,
// the mux that lets one feature extractor serve both images, the extractor
// with its pyramid RAM (fe_pyramid), the feature buffer, the feature
// matcher (stereo matcher + SAD rectifier), the disparity buffer and the
// frame-multiplexed controller. Two identical channels make up the design.
// Data flow for one frame: cameras -> image buffers -> mux -> FE(L), FE(R)
// -> feature buffer -> FM (level 0, then level 1; SAD reads the image
// buffers for level 0 and the pyramid RAM for level 1) -> disparity buffer
// -> disp_* ports (taken by the DMA/bus side). The wiring follows the
// paper's block diagram of the frame-multiplexed front end; the memory
// organisation is this design's. All memories read with one cycle latency.
module stereo_channel
  import vf_pkg::*;
#(
  parameter int unsigned W          = 1280,
  parameter int unsigned H          = 720,
  parameter int unsigned W1         = 1067,
  parameter int unsigned H1         = 600,
  parameter int unsigned MAX_FEAT   = 2048,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned DISP_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cam_trig,
  input  tag_t        time_tag,
  input  logic [1:0]  pix_valid,     // [0] left camera, [1] right camera
  input  logic [1:0]  pix_sof,
  input  logic [7:0]  pix_data [2],
  input  logic        disp_pop,
  output disp_t       disp_data,
  output logic        disp_empty,
  output logic [15:0] stat_frames,
  output logic [15:0] stat_sync_err,
  output logic [15:0] stat_drops,
  output logic [15:0] stat_overlap,
  output logic [31:0] stat_fm_stall,
  output logic [15:0] stat_corrected,
  output logic [15:0] stat_level1,
  output logic [15:0] stat_feat_ovf,
  output logic [15:0] stat_disp_ovf
);
  localparam int unsigned A0 = $clog2(W*H);
  localparam int unsigned A1 = $clog2(W1*H1);
  localparam int unsigned IW = $clog2(MAX_FEAT);
  localparam int unsigned CW = $clog2(MAX_FEAT + 1);

  // ---- camera interfaces and image buffers ------------------------------
  logic [1:0] claim, claim_bank, wr_en, wr_bank, fdone, fbank;
  logic [A0-1:0] wr_addr [2];
  logic [7:0] wr_data [2];
  tag_t ftag [2];
  logic [15:0] drops [2];
  logic [1:0] bank_free [2];

  logic fe_img_bank_rd;
  logic [A0-1:0] fe_img_addr;
  logic [7:0] rda [2], rdb [2];
  logic fm_bank_l, fm_bank_r;
  logic pix_side, pix_level;
  logic [A0-1:0] pix_addr;

  for (genvar s = 0; s < 2; s++) begin : g_cam
    cam_interface #(.W(W), .H(H)) u_if (
      .clk, .rst_n, .cam_trig, .time_tag,
      .pix_valid(pix_valid[s]), .pix_sof(pix_sof[s]), .pix_data(pix_data[s]),
      .bank_free(bank_free[s]), .claim(claim[s]), .claim_bank(claim_bank[s]),
      .wr_en(wr_en[s]), .wr_bank(wr_bank[s]), .wr_addr(wr_addr[s]), .wr_data(wr_data[s]),
      .frame_done(fdone[s]), .frame_tag(ftag[s]), .frame_bank(fbank[s]), .drops(drops[s]));

    frame_ram #(.W(W), .H(H), .BANKS(2)) u_img_buf (
      .clk, .wr_en(wr_en[s]), .wr_bank(wr_bank[s]), .wr_addr(wr_addr[s]), .wr_data(wr_data[s]),
      .rda_bank(fe_img_bank_rd), .rda_addr(fe_img_addr), .rda_data(rda[s]),
      .rdb_bank(s == 0 ? fm_bank_l : fm_bank_r), .rdb_addr(pix_addr), .rdb_data(rdb[s]));
  end
  assign stat_drops = drops[0] + drops[1];

  // ---- controller -----------------------------------------------------
  logic fe_start, fe_side, fe_img_bank, fe_slot, fe_done;
  logic fm_start, fm_slot, fm_done;
  frame_mux_ctrl u_ctrl (
    .clk, .rst_n,
    .claim_l(claim[0]), .claim_bank_l(claim_bank[0]), .claim_r(claim[1]), .claim_bank_r(claim_bank[1]),
    .done_l(fdone[0]), .bank_l(fbank[0]), .tag_l(ftag[0]),
    .done_r(fdone[1]), .bank_r(fbank[1]), .tag_r(ftag[1]),
    .bank_free_l(bank_free[0]), .bank_free_r(bank_free[1]),
    .fe_start, .fe_side, .fe_img_bank, .fe_slot, .fe_done,
    .fm_start, .fm_slot, .fm_bank_l, .fm_bank_r, .fm_done,
    .n_frames(stat_frames), .n_sync_err(stat_sync_err), .n_overlap(stat_overlap), .fm_stall(stat_fm_stall));

  // ---- feature extractor (frame-multiplexed through the mux) ------------
  logic fe_busy, fe_clear, fe_fv;
  feat_t fe_feat;
  logic pyr_we;
  logic [1:0] pyr_wb, pyr_rb;
  logic [A1-1:0] pyr_wa, pyr_ra;
  logic [7:0] pyr_wd, pyr_rda, pyr_rdb;
  logic [7:0] mux_pix;
  assign mux_pix = fe_side ? rda[1] : rda[0];

  fe_pyramid #(.W(W), .H(H), .W1(W1), .H1(H1), .FIFO_DEPTH(FIFO_DEPTH)) u_fe (
    .clk, .rst_n, .start(fe_start), .side(fe_side), .img_bank(fe_img_bank), .slot(fe_slot),
    .busy(fe_busy), .done(fe_done), .clear(fe_clear),
    .img_rd_bank(fe_img_bank_rd), .img_rd_addr(fe_img_addr), .img_rd_data(mux_pix),
    .pyr_wr_en(pyr_we), .pyr_wr_bank(pyr_wb), .pyr_wr_addr(pyr_wa), .pyr_wr_data(pyr_wd),
    .pyr_rd_bank(pyr_rb), .pyr_rd_addr(pyr_ra), .pyr_rd_data(pyr_rda),
    .feat_valid(fe_fv), .feat(fe_feat), .fifo_drop());

  frame_ram #(.W(W1), .H(H1), .BANKS(4)) u_pyr_ram (
    .clk, .wr_en(pyr_we), .wr_bank(pyr_wb), .wr_addr(pyr_wa), .wr_data(pyr_wd),
    .rda_bank(pyr_rb), .rda_addr(pyr_ra), .rda_data(pyr_rda),
    .rdb_bank({fm_slot, pix_side}), .rdb_addr(A1'(pix_addr)), .rdb_data(pyr_rdb));

  // ---- feature buffer ---------------------------------------------------
  logic fb_rs, fb_rside;
  logic [IW-1:0] fb_ridx;
  feat_t fb_rfeat;
  logic [CW-1:0] fb_count [2][2];
  feature_buffer #(.MAX_FEAT(MAX_FEAT)) u_fbuf (
    .clk, .rst_n, .clear(fe_clear), .clr_slot(fe_slot), .clr_side(fe_side),
    .wr_en(fe_fv), .wr_slot(fe_slot), .wr_side(fe_side), .wr_feat(fe_feat),
    .rd_slot(fb_rs), .rd_side(fb_rside), .rd_idx(fb_ridx), .rd_feat(fb_rfeat),
    .count(fb_count), .overflow(stat_feat_ovf));

  // ---- feature matcher --------------------------------------------------
  logic fm_ov;
  disp_t fm_out;
  logic pix_side_d, pix_level_d;
  logic [7:0] pix_data_m;
  always_ff @(posedge clk) begin
    pix_side_d <= pix_side;
    pix_level_d <= pix_level;
  end
  assign pix_data_m = pix_level_d ? pyr_rdb : (pix_side_d ? rdb[1] : rdb[0]);

  feature_matcher #(.W(W), .H(H), .W1(W1), .MAX_FEAT(MAX_FEAT)) u_fm (
    .clk, .rst_n, .start(fm_start), .slot(fm_slot),
    .count_l(fb_count[fm_slot][0]), .count_r(fb_count[fm_slot][1]),
    .fb_rd_slot(fb_rs), .fb_rd_side(fb_rside), .fb_rd_idx(fb_ridx), .fb_rd_feat(fb_rfeat),
    .pix_rd_side(pix_side), .pix_rd_level(pix_level), .pix_rd_addr(pix_addr), .pix_rd_data(pix_data_m),
    .out_valid(fm_ov), .out(fm_out), .busy(), .done(fm_done),
    .n_corrected(stat_corrected), .n_level1(stat_level1));

  // ---- disparity buffer -------------------------------------------------
  logic disp_full;
  sync_fifo #(.WIDTH($bits(disp_t)), .DEPTH(DISP_DEPTH)) u_disp_buf (
    .clk, .rst_n, .push(fm_ov), .din(fm_out), .pop(disp_pop),
    .dout(disp_data), .empty(disp_empty), .full(disp_full), .count());

  always_ff @(posedge clk) begin
    if (!rst_n) stat_disp_ovf <= '0;
    else if (fm_ov && disp_full) stat_disp_ovf <= stat_disp_ovf + 1'b1;
  end
endmodule
