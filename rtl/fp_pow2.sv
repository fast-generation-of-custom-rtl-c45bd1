// fp_pow2 -- custom floating-point exponential 2^x, latency 6.
//
// x is converted to signed fixed point (FB fraction bits) and split into its
// floor I and fraction f in [0,1).  2^f in [1,2) comes from a four-segment
// degree-2 polynomial selected by the two top fraction bits and becomes the
// mantissa; I + BIAS becomes the exponent (flush to zero below the range,
// saturation above).  The six-cycle latency is the one annotated on the 2^x
// node of the paper's operator tree; the method is this design's.
// Timing: float_b(t) = 2^float_a(t - LATENCY).
module fp_pow2 #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int LATENCY        = fp_pkg::L_POW2
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] float_a,
  output logic [FLOAT_WIDTH-1:0] float_b
);
  localparam int M    = MANTISSA_WIDTH;
  localparam int E    = EXP_WIDTH;
  localparam int EMAX = (1 << E) - 1;
  localparam int FB   = M + 6;
  localparam int VW   = FB + 6;
  localparam int XW   = FB + E + 4;

  logic signed [E+1:0]    eu;
  logic [XW-1:0]          mag;
  logic signed [XW-1:0]   x;
  logic signed [XW-1:0]   ip;
  logic [FB-1:0]          f, t;
  logic [1:0]             seg;
  logic                   big;
  logic signed [VW-1:0]   r;
  logic [M-1:0]           mr;
  logic signed [XW-1:0]   ex;
  logic [FLOAT_WIDTH-1:0] res;

  always_comb begin
    eu  = $signed({2'b00, float_a[M +: E]}) - (E+2)'(BIAS);
    big = (eu > (E+2)'(E + 1));
    mag = XW'({1'b1, float_a[M-1:0]}) << (FB - M);
    if (float_a[M +: E] == '0)     mag = '0;
    else if (big)                  mag = '0;
    else if (eu >= 0)              mag = mag << eu;
    else if (-eu >= FB + 2)        mag = '0;
    else                           mag = mag >> (-eu);
    x   = float_a[FLOAT_WIDTH-1] ? -$signed(mag) : $signed(mag);
    ip  = x >>> FB;
    f   = x[FB-1:0];
    seg = f[FB-1 -: 2];
    t   = {2'b00, f[FB-3:0]};
  end

  poly4_eval #(.FN0(fp_pkg::FN_POW2), .FN1(fp_pkg::FN_POW2), .SPLIT(0),
               .LO(0.0), .STEP(0.25), .DEG(2), .FB(FB), .VW(VW))
    u_poly (.seg(seg), .t(t), .val(r));

  always_comb begin
    if (r >= (VW'(2) <<< FB))      mr = '1;
    else if (r < (VW'(1) <<< FB))  mr = '0;
    else                           mr = r[FB-1 -: M];
    ex = ip + XW'(BIAS);
    if (big && float_a[FLOAT_WIDTH-1])       res = '0;
    else if (big)                            res = {1'b0, E'(EMAX), {M{1'b1}}};
    else if (ex <= 0)                        res = '0;
    else if (ex > EMAX)                      res = {1'b0, E'(EMAX), {M{1'b1}}};
    else                                     res = {1'b0, ex[E-1:0], mr};
  end

  delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(LATENCY)) u_pipe (
    .clock(clock), .reset(reset), .din(res), .dout(float_b));
endmodule
