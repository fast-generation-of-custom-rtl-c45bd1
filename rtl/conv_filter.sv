// conv_filter -- linear floating-point convolution conv_HxW(w, k) = sum w_ij*k_ij.
//
// One fp_mult per window position forms w_ij * k_ij (the kernel coefficients
// are inputs, so they can be changed at run time), and an
// AdderTree(WIN_H*WIN_W) sums the products in row-major order.  For 3x3 this
// is the paper's AdderTree(8) over w00..w21 plus the product of w22 delayed by
// 3*L_ADD; for 5x5 it is AdderTree(16) plus AdderTree(9).  Structure and
// latencies are the paper's.  A new window is accepted every clock; valid_o
// is valid_i delayed by LATENCY = L_MULT + L_ADD*ceil(log2(WIN_H*WIN_W))
// (26 cycles for 3x3, 32 for 5x5).
module conv_filter #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int WIN_H          = 3,
  parameter int WIN_W          = 3
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] w [WIN_H][WIN_W],
  input  logic [FLOAT_WIDTH-1:0] k [WIN_H][WIN_W],
  input  logic                   valid_i,
  output logic [FLOAT_WIDTH-1:0] pixel_out,
  output logic                   valid_o
);
  localparam int N = WIN_H * WIN_W;
  localparam int LATENCY = fp_pkg::L_MULT + fp_pkg::adder_tree_latency(N);

  logic [FLOAT_WIDTH-1:0] prod [N];

  for (genvar i = 0; i < WIN_H; i++) begin : g_row
    for (genvar j = 0; j < WIN_W; j++) begin : g_col
      fp_mult #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
                .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
        u_mult (.clock(clock), .reset(reset), .float_a(w[i][j]), .float_b(k[i][j]),
                .float_c(prod[i*WIN_W + j]));
    end
  end

  adder_tree #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
               .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS), .N(N))
    u_tree (.clock(clock), .reset(reset), .din(prod), .dout(pixel_out));

  delay_line #(.WIDTH(1), .DEPTH(LATENCY)) u_valid (
    .clock(clock), .reset(reset), .din(valid_i), .dout(valid_o));
endmodule
