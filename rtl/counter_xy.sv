// counter_xy -- column/line position of the incoming pixel stream (counterXY).
//
// X is the column and Y the line of the pixel presented on the input in the
// current cycle.  Both advance only on cycles with vld_pix, so horizontal and
// vertical blanking are skipped; X wraps at IMG_W and then Y advances,
// wrapping at IMG_H.  vsync clears both counters so that every frame starts at
// (0,0).  The counter, its inputs (vld_pix, vsync, pixel clock) and outputs
// (X, Y) are named as in the paper's window-generator diagrams; the exact
// counting convention (position of the current pixel, vsync as a level that
// is active during blanking) is this design's.
module counter_xy #(
  parameter int IMG_W = 1920,
  parameter int IMG_H = 1080
) (
  input  logic                     clock,
  input  logic                     reset,
  input  logic                     vld_pix,
  input  logic                     vsync,
  output logic [$clog2(IMG_W)-1:0] X,
  output logic [$clog2(IMG_H)-1:0] Y
);
  always_ff @(posedge clock) begin
    if (reset || vsync) begin
      X <= '0;
      Y <= '0;
    end else if (vld_pix) begin
      if (X == ($clog2(IMG_W))'(IMG_W - 1)) begin
        X <= '0;
        Y <= (Y == ($clog2(IMG_H))'(IMG_H - 1)) ? '0 : Y + 1'b1;
      end else begin
        X <= X + 1'b1;
      end
    end
  end
endmodule
