// fp_mult -- custom floating-point multiplier, latency 2, one product per clock.
//
// The sign is the XOR of the operand signs, the exponents are added and the
// bias removed, and the two (MANTISSA_WIDTH+1)-bit significands are multiplied.
// A product in [2,4) is shifted right one place and the exponent incremented.
// The result is truncated; a zero operand or exponent underflow gives zero,
// exponent overflow saturates to the largest magnitude (format rules of
// fp_pkg).  The port names (clock, reset, float_a, float_b, float_c) and the
// parameter set are those of the generated instances the paper prints; the
// latency of two cycles is the paper's.  Here the product is formed in one
// combinational step and then passes through LATENCY output registers.
module fp_mult #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int LATENCY        = fp_pkg::L_MULT
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] float_a,
  input  logic [FLOAT_WIDTH-1:0] float_b,
  output logic [FLOAT_WIDTH-1:0] float_c
);
  localparam int M = MANTISSA_WIDTH;
  localparam int E = EXP_WIDTH;
  localparam int EMAX = (1 << E) - 1;

  logic                   sa, sb;
  logic [E-1:0]           ea, eb;
  logic [2*M+1:0]         prod;
  logic signed [E+2:0]    ex;
  logic [M-1:0]           mr;
  logic [FLOAT_WIDTH-1:0] res;

  always_comb begin
    sa   = float_a[FLOAT_WIDTH-1];
    sb   = float_b[FLOAT_WIDTH-1];
    ea   = float_a[M +: E];
    eb   = float_b[M +: E];
    prod = {1'b1, float_a[M-1:0]} * {1'b1, float_b[M-1:0]};
    ex   = $signed({3'b000, ea}) + $signed({3'b000, eb}) - (E+3)'(BIAS);
    if (prod[2*M+1]) begin
      ex = ex + 1'b1;
      mr = prod[2*M -: M];
    end else begin
      mr = prod[2*M-1 -: M];
    end
    res = '0;
    if (ea == '0 || eb == '0 || ex <= 0) begin
      res = '0;
    end else if (ex > EMAX) begin
      res = {sa ^ sb, E'(EMAX), {M{1'b1}}};
    end else begin
      res = {sa ^ sb, ex[E-1:0], mr};
    end
  end

  delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(LATENCY)) u_pipe (
    .clock(clock), .reset(reset), .din(res), .dout(float_c));
endmodule
