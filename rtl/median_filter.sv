// median_filter -- floating-point 3x3 median filter built from two SORT5.
//
// One SORT5 sorts the '+'-shaped footprint (w01, w10, w11, w12, w21), the
// other the 'x'-shaped one (w00, w02, w11, w20, w22); both run in parallel.
// Their medians (output b2) are added and the sum is halved by a
// floating-point right shift (exponent minus one).  Footprints, structure and
// the 12-cycle SORT5 latency are the paper's.  Latency 12 + 6 + 1 = 19
// cycles; the registers the paper draws between the units are taken to be
// the units' own output registers.  valid_o is valid_i delayed by LATENCY.
module median_filter #(
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
  localparam int LATENCY = 2 * 6 + fp_pkg::L_ADD + fp_pkg::L_SHIFT;

  logic [FLOAT_WIDTH-1:0] diag_in [5], diag_out [5];
  logic [FLOAT_WIDTH-1:0] cross_in [5], cross_out [5];
  logic [FLOAT_WIDTH-1:0] sum;

  assign diag_in  = '{w[0][0], w[0][2], w[1][1], w[2][0], w[2][2]};
  assign cross_in = '{w[0][1], w[1][0], w[1][1], w[1][2], w[2][1]};

  sort5 #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
          .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_sort_diag (.clock(clock), .reset(reset), .a(diag_in), .b(diag_out));
  sort5 #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
          .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_sort_cross (.clock(clock), .reset(reset), .a(cross_in), .b(cross_out));

  fp_adder #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
             .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_add (.clock(clock), .reset(reset), .float_a(diag_out[2]), .float_b(cross_out[2]),
           .float_c(sum));
  fp_shift #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
             .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS), .SHIFT(-1))
    u_rsh (.clock(clock), .reset(reset), .float_a(sum), .float_b(pixel_out));

  delay_line #(.WIDTH(1), .DEPTH(LATENCY)) u_valid (
    .clock(clock), .reset(reset), .din(valid_i), .dout(valid_o));
endmodule
