// frame_ram: double-banked on-chip frame store with one write and two read ports.
//
// Holds BANKS images of W x H 8-bit pixels, addressed y*W + x within a bank.
// It is used for the four camera image buffers (written by a camera
// interface) and for the pyramid RAM that keeps the 1067x600 resized images
// (written by the resizer). Read port A is the streaming port of the
// feature extractor, read port B the random-access port of the SAD
// rectifier. Both reads have one cycle of latency (registered output, as a
// block RAM). Two banks let a new frame be written while the previous one
// is still being processed, which the FE/FM pipeline needs; the paper only
// says the images go to on-chip RAM, so the banking is this design's choice.
module frame_ram #(
  parameter int unsigned W     = 1280,
  parameter int unsigned H     = 720,
  parameter int unsigned BANKS = 2
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [$clog2(BANKS)-1:0]      wr_bank,
  input  logic [$clog2(W*H)-1:0]        wr_addr,
  input  logic [7:0]                    wr_data,
  input  logic [$clog2(BANKS)-1:0]      rda_bank,
  input  logic [$clog2(W*H)-1:0]        rda_addr,
  output logic [7:0]                    rda_data,
  input  logic [$clog2(BANKS)-1:0]      rdb_bank,
  input  logic [$clog2(W*H)-1:0]        rdb_addr,
  output logic [7:0]                    rdb_data
);
  localparam int unsigned AW = $clog2(W*H);
  localparam int unsigned BW = $clog2(BANKS);
  localparam int unsigned TOT = BANKS * W * H;

  logic [7:0] mem [TOT];

  function automatic logic [BW+AW-1:0] flat(input logic [BW-1:0] b, input logic [AW-1:0] a);
    return (BW+AW)'(b) * (BW+AW)'(W*H) + (BW+AW)'(a);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[flat(wr_bank, wr_addr)] <= wr_data;
    rda_data <= mem[flat(rda_bank, rda_addr)];
    rdb_data <= mem[flat(rdb_bank, rdb_addr)];
  end
endmodule
