// window_generator -- sliding WIN_H x WIN_W window over a raster pixel stream
// (the paper's generateWindow), with constant-value border extension.
//
// Structure, as in the paper's 3x3 and 5x5 diagrams:
//  * counter_xy gives the column X and line Y of the incoming pixel.
//  * WIN_H-1 line buffers are chained: the input pixel feeds line buffer 0,
//    line buffer k feeds line buffer k+1.  Window row 0 takes the newest line
//    (the input pixel), row k the output of line buffer k-1, so row
//    WIN_H-1 is the oldest line.  Inside a row, column WIN_W-1 is the newest
//    pixel and column 0 the oldest: w[r][c] is the paper's w_rc.
//  * Each row is a shift register of WIN_W window registers plus
//    (WIN_W-1)/2 border registers r (WIN_H*(WIN_W-1)/2 in all) and WIN_W
//    multiplexers; each row other than the centre row also has a multiplexer
//    on its source that substitutes the constant BORDER for lines outside the
//    frame (WIN_H*(WIN_W+1)-1 multiplexers in all).
// Border handling.  With c = (WIN_W-1)/2, while the first c pixels of a line
// arrive the window still finishes the previous line: BORDER enters the newest
// column, and the arriving pixels are parked in the r registers.  When
// pixel c arrives the row is reloaded at once: the parked pixels go to the
// columns c .. WIN_W-2, BORDER to columns 0 .. c-1, the new pixel to column
// WIN_W-1.  Rows whose line lies above the first or below the last line of the
// frame (relative to the window centre) read BORDER instead of their source.
// The selects are comparisons of the registered pixel position with small
// constants, as in the paper's diagrams.  Where this design departs from the
// printed selects: the line selects are applied at every column (the
// diagrams gate them with X>=1 / X>=2, which would let the parked pixels of
// the first columns bypass the border value).
// Alignment.  The input pixel is registered once (pix_r) so that it lines up
// with the registered line-buffer outputs; the selects use the position of
// pix_r.  This register is this design's; the paper draws the input pixel
// going straight to row 0.
// Timing.  All registers advance only on cycles with vld_pix.  After each such
// cycle, win_valid pulses for one cycle and w holds the window centred on
// pixel (center_x, center_y).  In raster order that pixel lies
// IMG_W*(WIN_H-1)/2 + (WIN_W-1)/2 + 1 valid pixels before the one that has just
// been accepted.  The last (WIN_H-1)/2 lines
// of a frame are therefore emitted while the next frame streams in.
// win_valid stays low until the first real window (centre (0,0)) after reset.
module window_generator #(
  parameter int                IMG_W       = 1920,
  parameter int                IMG_H       = 1080,
  parameter int                WIN_H       = 3,
  parameter int                WIN_W       = 3,
  parameter int                FLOAT_WIDTH = 16,
  parameter logic [FLOAT_WIDTH-1:0] BORDER = '0
) (
  input  logic                     clock,
  input  logic                     reset,
  input  logic [FLOAT_WIDTH-1:0]   pixel_in,
  input  logic                     vld_pix,
  input  logic                     vsync,
  output logic [FLOAT_WIDTH-1:0]   w [WIN_H][WIN_W],
  output logic                     win_valid,
  output logic [$clog2(IMG_W)-1:0] center_x,
  output logic [$clog2(IMG_H)-1:0] center_y
);
  localparam int XW = $clog2(IMG_W);
  localparam int YW = $clog2(IMG_H);
  localparam int CH = (WIN_H - 1) / 2;
  localparam int CW = (WIN_W - 1) / 2;

  logic [XW-1:0]          X, xd;
  logic [YW-1:0]          Y, yd;
  logic [FLOAT_WIDTH-1:0] pix_r;
  logic [FLOAT_WIDTH-1:0] src  [WIN_H];
  logic [FLOAT_WIDTH-1:0] msrc [WIN_H];
  logic [FLOAT_WIDTH-1:0] r    [WIN_H][CW];
  logic                   primed;
  logic                   first;

  counter_xy #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_counter (
    .clock(clock), .reset(reset), .vld_pix(vld_pix), .vsync(vsync), .X(X), .Y(Y));

  assign src[0] = pix_r;
  for (genvar k = 0; k < WIN_H - 1; k++) begin : g_lb
    line_buffer #(.DEPTH(IMG_W), .WIDTH(FLOAT_WIDTH)) u_lb (
      .clock(clock), .reset(reset), .valid_pixel(vld_pix), .col_count(X),
      .data_in(src[k]), .data_out(src[k+1]));
  end

  // Line selects: row k reads BORDER when its line is outside the frame.
  always_comb begin
    for (int k = 0; k < WIN_H; k++) begin
      msrc[k] = src[k];
      if (k < CH && int'(yd) >= k && int'(yd) < CH)  msrc[k] = BORDER;
      if (k > CH && int'(yd) >= CH && int'(yd) < k)  msrc[k] = BORDER;
    end
  end

  assign first = (int'(xd) == CW) && (int'(yd) == CH);

  always_ff @(posedge clock) begin
    if (reset) begin
      pix_r     <= '0;
      xd        <= '0;
      yd        <= '0;
      primed    <= 1'b0;
      win_valid <= 1'b0;
      center_x  <= '0;
      center_y  <= '0;
      for (int k = 0; k < WIN_H; k++) begin
        for (int j = 0; j < WIN_W; j++) w[k][j] <= BORDER;
        for (int j = 0; j < CW; j++)    r[k][j] <= BORDER;
      end
    end else if (vld_pix) begin
      pix_r <= pixel_in;
      xd    <= X;
      yd    <= Y;
      for (int k = 0; k < WIN_H; k++) begin
        r[k][0] <= msrc[k];
        for (int j = 1; j < CW; j++) r[k][j] <= r[k][j-1];
        w[k][WIN_W-1] <= (int'(xd) < CW) ? BORDER : msrc[k];
        for (int j = CW; j < WIN_W - 1; j++)
          w[k][j] <= (int'(xd) == CW) ? r[k][2*CW-1-j] : w[k][j+1];
        for (int j = 0; j < CW; j++)
          w[k][j] <= (int'(xd) == CW) ? BORDER : w[k][j+1];
      end
      primed    <= primed | first;
      win_valid <= primed | first;
      if (int'(xd) >= CW) begin
        center_x <= XW'(int'(xd) - CW);
        center_y <= (int'(yd) >= CH) ? YW'(int'(yd) - CH) : YW'(int'(yd) + IMG_H - CH);
      end else begin
        center_x <= XW'(int'(xd) + IMG_W - CW);
        center_y <= (int'(yd) >= CH + 1) ? YW'(int'(yd) - CH - 1)
                                         : YW'(int'(yd) + IMG_H - CH - 1);
      end
    end else begin
      win_valid <= 1'b0;
    end
  end
endmodule
