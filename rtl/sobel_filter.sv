// sobel_filter -- floating-point Sobel magnitude (the paper's fp_sobel):
//   out = sqrt( conv3x3(w, Kx)^2 + conv3x3(w, Ky)^2 )
// with Kx = [1 0 -1; 2 0 -2; 1 0 -1] and Ky = [1 2 1; 0 0 0; -1 -2 -1].
// Two conv_filter instances share the input window; their kernels are
// constants converted to the configured float format at elaboration.  Each
// result is squared with an fp_mult, the squares are added and an fp_sqrt
// gives the magnitude.  Kernels and the formula are the paper's; the
// square / add / sqrt pipeline is this design's realisation of it.
// LATENCY = 26 + 2 + 6 + 5 = 39 cycles; valid_o is valid_i delayed by it
// (the x convolution's valid output, delayed by the remaining 13 cycles).
module sobel_filter #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] w [3][3],
  input  logic                   valid_i,
  output logic [FLOAT_WIDTH-1:0] pixel_out,
  output logic                   valid_o
);
  import fp_pkg::*;

  localparam int CONV_LAT = L_MULT + adder_tree_latency(9);
  localparam int LATENCY  = CONV_LAT + L_MULT + L_ADD + L_SQRT;

  // Kx[i][j] = (2 - |i-1|) * (1 - j); Ky is its transpose.
  function automatic real kx_coef(input int i, input int j);
    return real'((i == 1) ? 2 : 1) * real'(1 - j);
  endfunction

  logic [FLOAT_WIDTH-1:0] kx [3][3];
  logic [FLOAT_WIDTH-1:0] ky [3][3];
  logic [FLOAT_WIDTH-1:0] gx, gy, gx2, gy2, sum;
  logic                   vx;

  for (genvar i = 0; i < 3; i++) begin : g_row
    for (genvar j = 0; j < 3; j++) begin : g_col
      localparam logic [63:0] KX64 = real_to_fp(kx_coef(i, j), MANTISSA_WIDTH, EXP_WIDTH, BIAS);
      localparam logic [63:0] KY64 = real_to_fp(kx_coef(j, i), MANTISSA_WIDTH, EXP_WIDTH, BIAS);
      assign kx[i][j] = KX64[FLOAT_WIDTH-1:0];
      assign ky[i][j] = KY64[FLOAT_WIDTH-1:0];
    end
  end

  conv_filter #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
                .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS), .WIN_H(3), .WIN_W(3))
    u_gx (.clock(clock), .reset(reset), .w(w), .k(kx), .valid_i(valid_i),
          .pixel_out(gx), .valid_o(vx));
  conv_filter #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
                .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS), .WIN_H(3), .WIN_W(3))
    u_gy (.clock(clock), .reset(reset), .w(w), .k(ky), .valid_i(valid_i),
          .pixel_out(gy), .valid_o());

  fp_mult #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_sqx (.clock(clock), .reset(reset), .float_a(gx), .float_b(gx), .float_c(gx2));
  fp_mult #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_sqy (.clock(clock), .reset(reset), .float_a(gy), .float_b(gy), .float_c(gy2));
  fp_adder #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_add (.clock(clock), .reset(reset), .float_a(gx2), .float_b(gy2), .float_c(sum));
  fp_sqrt #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_sqrt (.clock(clock), .reset(reset), .float_a(sum), .float_b(pixel_out));

  delay_line #(.WIDTH(1), .DEPTH(LATENCY - CONV_LAT)) u_valid (
    .clock(clock), .reset(reset), .din(vx), .dout(valid_o));
endmodule
