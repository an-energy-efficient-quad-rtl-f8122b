// image_resizer: streaming bilinear down-scaler that builds pyramid level 1.
//
// The source raster (SRC_W x SRC_H, one pixel per in_valid) is scaled by
// DEN/NUM (5/6, i.e. 1/1.2: 1280x720 -> 1067x600 with the defaults).
// Output pixel (ox, oy) samples the source at (1.2*ox, 1.2*oy): its integer
// part selects the 2x2 neighbourhood and its fraction, a multiple of 1/5,
// gives the bilinear weights, so the result is
//   (sum of weight * pixel, weights in 0..25) / 25, rounded.
// One line buffer supplies the upper row of the neighbourhood. An output is
// produced when the lower-right pixel of its neighbourhood arrives, so at
// most one output per input except at the end of a line, where the last
// output column (source x = 1279.2, beyond the image) is clamped to the
// edge pixel and emitted from a one-entry pending slot in the next cycle.
// The sizes and the bilinear method are the paper's; the fixed-point
// weights, the edge clamp and the streaming organisation are this design's.
// Interface: in_sof marks the first pixel of an image. out_valid pulses
// with out_pix at (out_x, out_y). Timing: one cycle from input to output.
module image_resizer #(
  parameter int unsigned SRC_W = 1280,
  parameter int unsigned SRC_H = 720,
  parameter int unsigned DST_W = 1067,
  parameter int unsigned DST_H = 600,
  parameter int unsigned NUM   = 6,
  parameter int unsigned DEN   = 5
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          in_sof,
  input  logic [7:0]                    in_pix,
  output logic                          out_valid,
  output logic [7:0]                    out_pix,
  output logic [$clog2(DST_W+1)-1:0]    out_x,
  output logic [$clog2(DST_H+1)-1:0]    out_y
);
  localparam int unsigned SXW = $clog2(SRC_W + 1);
  localparam int unsigned SYW = $clog2(SRC_H + 1);
  localparam int unsigned OXW = $clog2(DST_W + 1);
  localparam int unsigned OYW = $clog2(DST_H + 1);
  localparam int unsigned STEP = NUM / DEN;          // integer part of the step
  localparam int unsigned FSTEP = NUM % DEN;         // fractional part, in 1/DEN

  logic [7:0] line_mem [SRC_W];
  logic [SXW-1:0] x, xa;
  logic [SYW-1:0] y, ya;
  logic [7:0] up_cur, up_prev, cur_prev;

  // Output-column and output-row trackers: source position of the next output.
  logic [OXW-1:0] ox;  logic [SXW-1:0] sx_int;  logic [3:0] fx;
  logic [OYW-1:0] oy;  logic [SYW-1:0] sy_int;  logic [3:0] fy;

  logic pend_valid;
  logic [7:0] pend_pix;
  logic [OXW-1:0] pend_x;
  logic [OYW-1:0] pend_y;

  assign xa = in_sof ? '0 : x;
  assign ya = in_sof ? '0 : y;
  assign up_cur = line_mem[xa];

  logic row_active, emit, emit_edge;
  logic [OYW-1:0] oya;
  logic [SYW-1:0] sya;
  logic [3:0] fya;
  assign oya = in_sof ? '0 : oy;
  assign sya = in_sof ? '0 : sy_int;
  assign fya = in_sof ? '0 : fy;
  assign row_active = (ya != '0) && (sya == ya - 1'b1) && (oya < OYW'(DST_H));
  assign emit      = in_valid && row_active && (xa != '0) && (sx_int == xa - 1'b1) && (ox < OXW'(DST_W));
  // Clamp case: the next output's neighbourhood starts at the last column.
  logic [OXW-1:0] ox_n;  logic [SXW-1:0] sx_int_n;  logic [3:0] fx_n;
  always_comb begin
    ox_n = ox; sx_int_n = sx_int; fx_n = fx;
    if (emit) begin
      ox_n = ox + 1'b1;
      if (fx + 4'(FSTEP) >= 4'(DEN)) begin
        fx_n = fx + 4'(FSTEP) - 4'(DEN);
        sx_int_n = sx_int + SXW'(STEP) + 1'b1;
      end else begin
        fx_n = fx + 4'(FSTEP);
        sx_int_n = sx_int + SXW'(STEP);
      end
    end
  end
  assign emit_edge = in_valid && row_active && (xa == SXW'(SRC_W - 1)) && (sx_int_n == xa) && (ox_n < OXW'(DST_W));

  function automatic logic [7:0] blend(input logic [7:0] p00, input logic [7:0] p01,
                                       input logic [7:0] p10, input logic [7:0] p11,
                                       input logic [3:0] wx, input logic [3:0] wy);
    logic [15:0] s;
    s = 16'(DEN - wx) * 16'(DEN - wy) * 16'(p00) + 16'(wx) * 16'(DEN - wy) * 16'(p01)
      + 16'(DEN - wx) * 16'(wy) * 16'(p10) + 16'(wx) * 16'(wy) * 16'(p11);
    return 8'((s + 16'(DEN * DEN / 2)) / 16'(DEN * DEN));
  endfunction

  always_ff @(posedge clk) begin
    if (in_valid) line_mem[xa] <= in_pix;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x <= '0; y <= '0;
      ox <= '0; sx_int <= '0; fx <= '0;
      oy <= '0; sy_int <= '0; fy <= '0;
      out_valid <= 1'b0; out_pix <= '0; out_x <= '0; out_y <= '0;
      pend_valid <= 1'b0; pend_pix <= '0; pend_x <= '0; pend_y <= '0;
      up_prev <= '0; cur_prev <= '0;
    end else begin
      out_valid <= 1'b0;
      if (pend_valid) begin
        out_valid <= 1'b1; out_pix <= pend_pix; out_x <= pend_x; out_y <= pend_y;
        pend_valid <= 1'b0;
      end
      if (in_valid) begin
        up_prev <= up_cur;
        cur_prev <= in_pix;
        if (emit) begin
          out_valid <= 1'b1;
          out_pix <= blend(up_prev, up_cur, cur_prev, in_pix, fx, fya);
          out_x <= ox;
          out_y <= oya;
        end
        if (emit_edge) begin
          pend_valid <= 1'b1;
          pend_pix <= blend(up_cur, up_cur, in_pix, in_pix, fx_n, fya);
          pend_x <= ox_n;
          pend_y <= oya;
        end
        if (xa == SXW'(SRC_W - 1)) begin
          x <= '0;
          y <= ya + 1'b1;
          ox <= '0; sx_int <= '0; fx <= '0;
          if (row_active) begin
            oy <= oya + 1'b1;
            if (fya + 4'(FSTEP) >= 4'(DEN)) begin
              fy <= fya + 4'(FSTEP) - 4'(DEN);
              sy_int <= sya + SYW'(STEP) + 1'b1;
            end else begin
              fy <= fya + 4'(FSTEP);
              sy_int <= sya + SYW'(STEP);
            end
          end else begin
            oy <= oya; sy_int <= sya; fy <= fya;
          end
        end else begin
          x <= xa + 1'b1;
          y <= ya;
          ox <= ox_n; sx_int <= sx_int_n; fx <= fx_n;
          oy <= oya; sy_int <= sya; fy <= fya;
        end
      end
    end
  end
endmodule
