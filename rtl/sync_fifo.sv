// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used for the on-chip buffers that hold records in arrival order: the IMU
// buffer (tagged IMU samples), the disparity buffers (rectified matches
// waiting for the bus) and the coordinate/orientation RAM inside the
// feature extractor. Storage is a DEPTH-entry array with read and write
// pointers. Interface: push writes din when not full (a push into a full
// FIFO is ignored; the caller counts it); pop removes the head when not
// empty; dout always shows the head. Timing: a pushed word is visible on
// dout the cycle after the push. Push and pop may happen in the same cycle.
// The paper only names these memories; the FIFO organisation is this
// design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  // Pointer rule: the count never passes DEPTH.
  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule
