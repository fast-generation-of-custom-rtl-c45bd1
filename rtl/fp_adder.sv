// fp_adder -- custom floating-point adder, latency 6, one sum per clock.
//
// The operand of larger magnitude is found by comparing {exponent, mantissa};
// the smaller significand is shifted right by the exponent difference, keeping
// G guard bits plus a sticky bit so that subtraction truncates correctly.  The
// significands are added (equal signs) or subtracted (different signs), the
// result is renormalised with a leading-zero count and truncated to
// MANTISSA_WIDTH bits.  Zero, underflow and overflow follow the fp_pkg rules.
// The six-cycle latency is the one the paper reports for its adder; how the
// work is split across those cycles is not given, so here the sum is formed
// in one combinational step followed by LATENCY output registers.
module fp_adder #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int LATENCY        = fp_pkg::L_ADD
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] float_a,
  input  logic [FLOAT_WIDTH-1:0] float_b,
  output logic [FLOAT_WIDTH-1:0] float_c
);
  localparam int M    = MANTISSA_WIDTH;
  localparam int E    = EXP_WIDTH;
  localparam int EMAX = (1 << E) - 1;
  localparam int G    = 3;            // guard bits below the mantissa LSB
  localparam int SW   = M + 2 + G;    // significand + carry + guard bits
  // BIAS is implied by the operands: addition never moves the bias.
  localparam int UNUSED_BIAS = BIAS;

  logic [FLOAT_WIDTH-1:0] op_hi, op_lo;
  logic [E-1:0]           eb, es;
  logic [E:0]             d;
  logic [SW-1:0]          mb, ms, sum, shifted;
  logic                   sticky;
  logic signed [E+1:0]    ex;
  int                     lz;
  logic [FLOAT_WIDTH-1:0] res;

  always_comb begin
    if (float_a[FLOAT_WIDTH-2:0] >= float_b[FLOAT_WIDTH-2:0]) begin
      op_hi = float_a; op_lo = float_b;
    end else begin
      op_hi = float_b; op_lo = float_a;
    end
    eb = op_hi[M +: E];
    es = op_lo[M +: E];
    mb = {1'b0, 1'b1, op_hi[M-1:0], {G{1'b0}}};
    ms = (es == '0) ? '0 : {1'b0, 1'b1, op_lo[M-1:0], {G{1'b0}}};
    d  = {1'b0, eb} - {1'b0, es};
    // Right shift with sticky.
    shifted = '0;
    sticky  = 1'b0;
    if (d >= (E+1)'(SW)) begin
      shifted = '0;
      sticky  = (ms != '0);
    end else begin
      shifted = ms >> d;
      for (int i = 0; i < SW; i++)
        if (i < int'(d) && ms[i]) sticky = 1'b1;
    end
    if (op_hi[FLOAT_WIDTH-1] == op_lo[FLOAT_WIDTH-1])
      sum = mb + shifted;
    else
      sum = mb - shifted - {{(SW-1){1'b0}}, sticky};
    ex = $signed({2'b00, eb});
    lz = 0;
    res = '0;
    if (eb == '0) begin
      res = '0;                                   // both operands zero
    end else if (sum == '0) begin
      res = '0;
    end else if (sum[SW-1]) begin                 // carry out: shift right
      ex = ex + 1'b1;
      if (ex > EMAX) res = {op_hi[FLOAT_WIDTH-1], E'(EMAX), {M{1'b1}}};
      else           res = {op_hi[FLOAT_WIDTH-1], ex[E-1:0], sum[SW-2 -: M]};
    end else begin
      // Leading-zero count below the carry position.
      lz = SW - 1;
      for (int i = 0; i < SW - 1; i++)
        if (sum[i]) lz = SW - 2 - i;
      sum = sum << lz;
      ex  = ex - (E+2)'(lz);
      if (ex <= 0) res = '0;
      else         res = {op_hi[FLOAT_WIDTH-1], ex[E-1:0], sum[SW-3 -: M]};
    end
  end

  delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(LATENCY)) u_pipe (
    .clock(clock), .reset(reset), .din(res), .dout(float_c));
endmodule
