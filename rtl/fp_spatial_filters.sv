// fp_spatial_filters -- top level: the paper's five floating-point spatial
// filters running side by side on one pixel stream.
//
// A 3x3 window generator feeds conv3x3 (run-time kernel k3), the median
// filter, the non-linear filter f_zeta and the Sobel magnitude; a 5x5 window
// generator feeds conv5x5 (run-time kernel k5).  Every filter produces one
// output pixel per valid input pixel once its pipeline is full.
//
// Input stream: pixel_in is a float in the configured format, qualified by
// vld_pix (blanking cycles have vld_pix low); pixels arrive in raster order,
// IMG_W per line, and vsync (one cycle, before the first pixel of a frame)
// restarts the position counters.  Pixels outside the image are read as 0.
//
// Outputs, per filter: <f>_pix, <f>_valid (one cycle per output pixel) and
// <f>_x/<f>_y, the image coordinates of the window centre the pixel belongs
// to.  Latency from the window generator's win_valid to <f>_valid:
// conv3x3 26, conv5x5 32, median 19, nl 26, sobel 39 cycles.  The window
// generator itself emits the window centred on pixel n when input pixel
// n + CH*IMG_W + CW + 1 is accepted (CH = CW = 1 for 3x3, 2 for 5x5).
//
// The paper describes the filters and window generators separately and
// implements them as separate designs on the Zybo Z7-20; grouping them under
// one top with shared 3x3 windows is this design's choice.
module fp_spatial_filters #(
  parameter int IMG_W          = 1920,
  parameter int IMG_H          = 1080,
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15
) (
  input  logic                     clock,
  input  logic                     reset,
  input  logic [FLOAT_WIDTH-1:0]   pixel_in,
  input  logic                     vld_pix,
  input  logic                     vsync,
  input  logic [FLOAT_WIDTH-1:0]   k3 [3][3],
  input  logic [FLOAT_WIDTH-1:0]   k5 [5][5],

  output logic [FLOAT_WIDTH-1:0]   conv3_pix,
  output logic                     conv3_valid,
  output logic [$clog2(IMG_W)-1:0] conv3_x,
  output logic [$clog2(IMG_H)-1:0] conv3_y,

  output logic [FLOAT_WIDTH-1:0]   conv5_pix,
  output logic                     conv5_valid,
  output logic [$clog2(IMG_W)-1:0] conv5_x,
  output logic [$clog2(IMG_H)-1:0] conv5_y,

  output logic [FLOAT_WIDTH-1:0]   median_pix,
  output logic                     median_valid,
  output logic [$clog2(IMG_W)-1:0] median_x,
  output logic [$clog2(IMG_H)-1:0] median_y,

  output logic [FLOAT_WIDTH-1:0]   nl_pix,
  output logic                     nl_valid,
  output logic [$clog2(IMG_W)-1:0] nl_x,
  output logic [$clog2(IMG_H)-1:0] nl_y,

  output logic [FLOAT_WIDTH-1:0]   sobel_pix,
  output logic                     sobel_valid,
  output logic [$clog2(IMG_W)-1:0] sobel_x,
  output logic [$clog2(IMG_H)-1:0] sobel_y
);
  import fp_pkg::*;

  localparam int XW = $clog2(IMG_W);
  localparam int YW = $clog2(IMG_H);

  localparam int LAT_CONV3  = L_MULT + adder_tree_latency(9);
  localparam int LAT_CONV5  = L_MULT + adder_tree_latency(25);
  localparam int LAT_MEDIAN = 2 * 6 + L_ADD + L_SHIFT;
  localparam int LAT_NL     = L_MAX + L_MULT + L_SQRT + L_ADD + L_SHIFT + L_CAS + L_DIV + L_MULT;
  localparam int LAT_SOBEL  = LAT_CONV3 + L_MULT + L_ADD + L_SQRT;

  logic [FLOAT_WIDTH-1:0] w3 [3][3];
  logic [FLOAT_WIDTH-1:0] w5 [5][5];
  logic                   v3, v5;
  logic [XW-1:0]          cx3, cx5;
  logic [YW-1:0]          cy3, cy5;

  window_generator #(.IMG_W(IMG_W), .IMG_H(IMG_H), .WIN_H(3), .WIN_W(3),
                     .FLOAT_WIDTH(FLOAT_WIDTH))
    u_win3 (.clock(clock), .reset(reset), .pixel_in(pixel_in), .vld_pix(vld_pix),
            .vsync(vsync), .w(w3), .win_valid(v3), .center_x(cx3), .center_y(cy3));
  window_generator #(.IMG_W(IMG_W), .IMG_H(IMG_H), .WIN_H(5), .WIN_W(5),
                     .FLOAT_WIDTH(FLOAT_WIDTH))
    u_win5 (.clock(clock), .reset(reset), .pixel_in(pixel_in), .vld_pix(vld_pix),
            .vsync(vsync), .w(w5), .win_valid(v5), .center_x(cx5), .center_y(cy5));

  // ---- filters -----------------------------------------------------------
  conv_filter #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
                .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS), .WIN_H(3), .WIN_W(3))
    u_conv3 (.clock(clock), .reset(reset), .w(w3), .k(k3), .valid_i(v3),
             .pixel_out(conv3_pix), .valid_o(conv3_valid));
  conv_filter #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
                .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS), .WIN_H(5), .WIN_W(5))
    u_conv5 (.clock(clock), .reset(reset), .w(w5), .k(k5), .valid_i(v5),
             .pixel_out(conv5_pix), .valid_o(conv5_valid));
  median_filter #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
                  .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_median (.clock(clock), .reset(reset), .w(w3), .valid_i(v3),
              .pixel_out(median_pix), .valid_o(median_valid));
  nl_filter #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
              .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_nl (.clock(clock), .reset(reset), .w(w3), .valid_i(v3),
          .pixel_out(nl_pix), .valid_o(nl_valid));
  sobel_filter #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
                 .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_sobel (.clock(clock), .reset(reset), .w(w3), .valid_i(v3),
             .pixel_out(sobel_pix), .valid_o(sobel_valid));

  // ---- window-centre coordinates, delayed like the pixels ------------------
  delay_line #(.WIDTH(XW + YW), .DEPTH(LAT_CONV3)) u_xy_conv3 (
    .clock(clock), .reset(reset), .din({cx3, cy3}), .dout({conv3_x, conv3_y}));
  delay_line #(.WIDTH(XW + YW), .DEPTH(LAT_CONV5)) u_xy_conv5 (
    .clock(clock), .reset(reset), .din({cx5, cy5}), .dout({conv5_x, conv5_y}));
  delay_line #(.WIDTH(XW + YW), .DEPTH(LAT_MEDIAN)) u_xy_median (
    .clock(clock), .reset(reset), .din({cx3, cy3}), .dout({median_x, median_y}));
  delay_line #(.WIDTH(XW + YW), .DEPTH(LAT_NL)) u_xy_nl (
    .clock(clock), .reset(reset), .din({cx3, cy3}), .dout({nl_x, nl_y}));
  delay_line #(.WIDTH(XW + YW), .DEPTH(LAT_SOBEL)) u_xy_sobel (
    .clock(clock), .reset(reset), .din({cx3, cy3}), .dout({sobel_x, sobel_y}));
endmodule
