// feature_buffer: storage of extracted features between FE and FM.
//
// Holds up to MAX_FEAT features for each (frame slot, side) pair: two frame
// slots so the extractor can fill frame N+1 while the matcher reads frame
// N, and two sides (left, right image). Writes append to the list selected
// by wr_slot/wr_side; clear empties one list (issued by the extractor at
// the start of an image). Reads are random access by index with one cycle
// of latency. A write to a full list is dropped and counted in overflow.
// The paper draws this buffer between extractor and matcher; its depth and
// the two slots are this design's choices.
module feature_buffer
  import vf_pkg::*;
#(
  parameter int unsigned MAX_FEAT = 2048
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          clr_slot,
  input  logic                          clr_side,
  input  logic                          wr_en,
  input  logic                          wr_slot,
  input  logic                          wr_side,
  input  feat_t                         wr_feat,
  input  logic                          rd_slot,
  input  logic                          rd_side,
  input  logic [$clog2(MAX_FEAT)-1:0]   rd_idx,
  output feat_t                         rd_feat,
  output logic [$clog2(MAX_FEAT+1)-1:0] count [2][2],
  output logic [15:0]                   overflow
);
  localparam int unsigned IW = $clog2(MAX_FEAT);
  localparam int unsigned CW = $clog2(MAX_FEAT + 1);

  feat_t mem [4 * MAX_FEAT];

  logic full;
  assign full = (count[wr_slot][wr_side] == CW'(MAX_FEAT));

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[{wr_slot, wr_side, IW'(count[wr_slot][wr_side])}] <= wr_feat;
    rd_feat <= mem[{rd_slot, rd_side, rd_idx}];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < 2; s++)
        for (int d = 0; d < 2; d++) count[s][d] <= '0;
      overflow <= '0;
    end else begin
      if (clear) count[clr_slot][clr_side] <= '0;
      if (wr_en) begin
        if (full) overflow <= overflow + 1'b1;
        else count[wr_slot][wr_side] <= count[wr_slot][wr_side] + 1'b1;
      end
    end
  end
endmodule
