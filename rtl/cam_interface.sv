// cam_interface: camera-side half of the hardware synchronization.
//
// The shared camera trigger starts an exposure in every camera; this
// interface latches the unified time tag at that trigger, and the frame
// that follows carries that tag. Since all cameras are triggered by the
// same pulse and stamped from the same timer, the four frames of one
// instant carry identical tags. Pixels (8-bit, one per pix_valid,
// pix_sof on the first) are written straight into the image buffer, at
// address y*W + x of the chosen bank. At start of frame the interface
// claims a free bank (bank_free from the controller), preferring the one
// not used last; if none is free the frame is dropped and counted. When the
// last pixel is written, frame_done pulses with the frame's tag and bank.
// The direct write into on-chip RAM and the tagging are the paper's; the
// pixel bus, the bank choice and the drop rule are this design's.
module cam_interface
  import vf_pkg::*;
#(
  parameter int unsigned W = 1280,
  parameter int unsigned H = 720
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cam_trig,
  input  tag_t                   time_tag,
  input  logic                   pix_valid,
  input  logic                   pix_sof,
  input  logic [7:0]             pix_data,
  input  logic [1:0]             bank_free,
  output logic                   claim,
  output logic                   claim_bank,
  output logic                   wr_en,
  output logic                   wr_bank,
  output logic [$clog2(W*H)-1:0] wr_addr,
  output logic [7:0]             wr_data,
  output logic                   frame_done,
  output tag_t                   frame_tag,
  output logic                   frame_bank,
  output logic [15:0]            drops
);
  localparam int unsigned AW = $clog2(W*H);

  tag_t trig_tag, cur_tag;
  logic active, last_bank;
  logic [AW-1:0] addr;
  logic pick_ok, pick_bank;

  always_comb begin
    if (bank_free[~last_bank])     begin pick_ok = 1'b1; pick_bank = ~last_bank; end
    else if (bank_free[last_bank]) begin pick_ok = 1'b1; pick_bank = last_bank; end
    else                           begin pick_ok = 1'b0; pick_bank = last_bank; end
  end

  assign claim      = pix_valid && pix_sof && pick_ok;
  assign claim_bank = pick_bank;
  assign wr_en      = pix_valid && (pix_sof ? pick_ok : active);
  assign wr_bank    = pix_sof ? pick_bank : last_bank;
  assign wr_addr    = pix_sof ? '0 : addr;
  assign wr_data    = pix_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trig_tag <= '0; cur_tag <= '0; active <= 1'b0; last_bank <= 1'b1; addr <= '0;
      frame_done <= 1'b0; frame_tag <= '0; frame_bank <= 1'b0; drops <= '0;
    end else begin
      frame_done <= 1'b0;
      if (cam_trig) trig_tag <= time_tag;
      if (pix_valid && pix_sof) begin
        if (pick_ok) begin
          active <= 1'b1; last_bank <= pick_bank; addr <= AW'(1); cur_tag <= trig_tag;
        end else begin
          active <= 1'b0; drops <= drops + 1'b1;
        end
      end else if (pix_valid && active) begin
        if (addr == AW'(W*H - 1)) begin
          active <= 1'b0;
          frame_done <= 1'b1; frame_tag <= cur_tag; frame_bank <= last_bank;
        end
        addr <= addr + 1'b1;
      end
    end
  end
endmodule
