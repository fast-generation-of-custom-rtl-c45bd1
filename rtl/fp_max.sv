// fp_max -- registered maximum of two custom floats, latency 1.
//
// Both operands are mapped to an unsigned ordering key (fp_pkg::fp_key) and the
// larger one is registered.  The filters use it as max(w, 1.0) to keep the
// arguments of log2 and of the division away from zero; the one-cycle latency
// is the paper's.  Ports follow the naming of the other operators
// (float_a = x, float_b = y, float_c = z of the max(x,y) box).
module fp_max #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int LATENCY        = fp_pkg::L_MAX
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] float_a,
  input  logic [FLOAT_WIDTH-1:0] float_b,
  output logic [FLOAT_WIDTH-1:0] float_c
);
  // The comparison only needs the bit layout; format parameters are kept for
  // a uniform operator interface.
  localparam int UNUSED = MANTISSA_WIDTH + EXP_WIDTH + BIAS;
  logic [FLOAT_WIDTH-1:0] res;
  always_comb begin
    if (fp_pkg::fp_key(64'(float_a), FLOAT_WIDTH) >= fp_pkg::fp_key(64'(float_b), FLOAT_WIDTH))
      res = float_a;
    else
      res = float_b;
  end
  delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(LATENCY)) u_pipe (
    .clock(clock), .reset(reset), .din(res), .dout(float_c));
endmodule
