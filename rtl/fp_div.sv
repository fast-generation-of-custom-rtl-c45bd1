// fp_div -- custom floating-point divider float_c = float_a / float_b, latency 7.
//
// The reciprocal of the divisor's significand 1.m_b (in (0.5, 1]) comes from
// a four-segment degree-3 polynomial selected by the two top mantissa bits;
// it is multiplied by the dividend's significand, the product (in (0.5, 2))
// is normalised, and the exponents are subtracted.  The four-segment degree-3
// approximation and the seven-cycle latency are the paper's; approximating
// 1/m_b (rather than another function) and the handling of division by zero
// (saturation) are this design's.
module fp_div #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int LATENCY        = fp_pkg::L_DIV
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
  localparam int FB   = M + 6;
  localparam int VW   = FB + 6;
  localparam int QW   = M + 1 + FB + 1;

  logic [1:0]             seg;
  logic [FB-1:0]          t;
  logic signed [VW-1:0]   r;
  logic [FB:0]            rc;
  logic [QW-1:0]          q;
  logic signed [E+2:0]    ex;
  logic                   sg;
  logic [M-1:0]           mr;
  logic [FLOAT_WIDTH-1:0] res;

  always_comb begin
    seg = float_b[M-1 -: 2];
    t   = FB'(float_b[M-3:0]) << (FB - M);
  end

  poly4_eval #(.FN0(fp_pkg::FN_RECIP), .FN1(fp_pkg::FN_RECIP), .SPLIT(0),
               .LO(1.0), .STEP(0.25), .DEG(3), .FB(FB), .VW(VW))
    u_poly (.seg(seg), .t(t), .val(r));

  always_comb begin
    if (r > (VW'(1) <<< FB))       rc = {1'b1, {FB{1'b0}}};
    else if (r < 0)                rc = '0;
    else                           rc = r[FB:0];
    q  = QW'({1'b1, float_a[M-1:0]}) * QW'(rc);          // M+FB fraction bits
    ex = $signed({3'b000, float_a[M +: E]}) - $signed({3'b000, float_b[M +: E]})
         + (E+3)'(BIAS);
    sg = float_a[FLOAT_WIDTH-1] ^ float_b[FLOAT_WIDTH-1];
    if (q[M+FB]) begin
      mr = q[M+FB-1 -: M];
    end else begin
      mr = q[M+FB-2 -: M];
      ex = ex - 1'b1;
    end
    if (float_a[M +: E] == '0)      res = '0;
    else if (float_b[M +: E] == '0) res = {sg, E'(EMAX), {M{1'b1}}};
    else if (ex <= 0)               res = '0;
    else if (ex > EMAX)             res = {sg, E'(EMAX), {M{1'b1}}};
    else                            res = {sg, ex[E-1:0], mr};
  end

  delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(LATENCY)) u_pipe (
    .clock(clock), .reset(reset), .din(res), .dout(float_c));
endmodule
