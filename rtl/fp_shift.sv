// fp_shift -- floating-point "shift": multiply by 2^SHIFT, latency 1.
//
// SHIFT is added to the exponent field (SHIFT < 0 is the paper's FP_RSH(-SHIFT),
// SHIFT > 0 its FP_LSH(SHIFT)); the sign and mantissa pass unchanged.  Zero
// stays zero, an exponent that leaves the range flushes to zero or saturates
// (fp_pkg rules).  Used for the /2 of the median filter and the x0.5 and x8 of
// the non-linear filter.
module fp_shift #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int SHIFT          = -1,
  parameter int LATENCY        = fp_pkg::L_SHIFT
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] float_a,
  output logic [FLOAT_WIDTH-1:0] float_b
);
  localparam int M    = MANTISSA_WIDTH;
  localparam int E    = EXP_WIDTH;
  localparam int EMAX = (1 << E) - 1;
  localparam int UNUSED_BIAS = BIAS;
  logic signed [E+1:0]    ex;
  logic [FLOAT_WIDTH-1:0] res;
  always_comb begin
    ex = $signed({2'b00, float_a[M +: E]}) + (E+2)'(SHIFT);
    if (float_a[M +: E] == '0 || ex <= 0) res = '0;
    else if (ex > EMAX) res = {float_a[FLOAT_WIDTH-1], E'(EMAX), {M{1'b1}}};
    else res = {float_a[FLOAT_WIDTH-1], ex[E-1:0], float_a[M-1:0]};
  end
  delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(LATENCY)) u_pipe (
    .clock(clock), .reset(reset), .din(res), .dout(float_b));
endmodule
