// tb_cam_interface: 6x4 frames. Checks that every pixel lands at y*W + x
// of the claimed bank, that the two banks alternate, that the frame tag is
// the time tag of the preceding trigger, and that a frame arriving while
// no bank is free is dropped (no writes, drops incremented).
module tb_cam_interface;
  import vf_pkg::*;
  localparam int W = 6, H = 4;
  logic clk = 0, rst_n = 0, cam_trig = 0, pix_valid = 0, pix_sof = 0;
  logic [7:0] pix_data = 0;
  logic [1:0] bank_free = 2'b11;
  logic claim, claim_bank, wr_en, wr_bank, frame_done, frame_bank;
  logic [4:0] wr_addr;
  logic [7:0] wr_data;
  tag_t tt = 0, frame_tag;
  logic [15:0] drops;
  logic [7:0] mem [2][W*H];
  int nwr = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always @(posedge clk) tt <= tt + 1;
  always @(posedge clk) if (wr_en) begin mem[wr_bank][wr_addr] <= wr_data; nwr++; end
  cam_interface #(.W(W), .H(H)) dut (.clk, .rst_n, .cam_trig, .time_tag(tt), .pix_valid, .pix_sof, .pix_data,
    .bank_free, .claim, .claim_bank, .wr_en, .wr_bank, .wr_addr, .wr_data, .frame_done, .frame_tag, .frame_bank, .drops);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    tag_t trig_at;
    logic exp_bank, got_claim, got_bank, seen_done;
    exp_bank = 0;
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int f = 0; f < 5; f++) begin
      bank_free = (f == 3) ? 2'b00 : 2'b11;
      @(negedge clk); cam_trig = 1; trig_at = tt; @(negedge clk); cam_trig = 0;
      repeat (3) @(negedge clk);
      nwr = 0; got_claim = 0; seen_done = 0;
      for (int p = 0; p < W * H; p++) begin
        pix_valid = 1; pix_sof = (p == 0); pix_data = 8'(f * 40 + p);
        #1;
        if (claim) begin got_claim = 1; got_bank = claim_bank; end
        @(negedge clk);
        if (frame_done) seen_done = 1;
        pix_valid = 0; pix_sof = 0;
      end
      @(negedge clk); if (frame_done) seen_done = 1;
      if (f == 3) begin
        checks++; if (nwr != 0 || got_claim || seen_done) begin failures++; $display("dropped frame wrote %0d", nwr); end
        checks++; if (drops != 1) begin failures++; $display("drops %0d", drops); end
      end else begin
        checks++; if (!got_claim || got_bank != exp_bank) begin failures++; $display("f%0d claim %0d bank %0d exp %0d", f, got_claim, got_bank, exp_bank); end
        checks++; if (!seen_done || frame_tag != trig_at || frame_bank != exp_bank) begin failures++; $display("f%0d done %0d tag %0d exp %0d", f, seen_done, frame_tag, trig_at); end
        for (int p = 0; p < W * H; p++) begin
          checks++; if (mem[exp_bank][p] != 8'(f * 40 + p)) begin failures++; $display("f%0d pix %0d", f, p); end
        end
        exp_bank = ~exp_bank;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
