// fp_sqrt -- custom floating-point square root, latency 5.
//
// For x = 1.m * 2^u the result is sqrt(1.m) * 2^(u/2) when u is even and
// sqrt(2 * 1.m) * 2^((u-1)/2) when u is odd.  The mantissa part comes from a
// four-segment, degree-2 polynomial (poly4_eval): the segments are
// {u even, u odd} x {1.m < 1.5, 1.m >= 1.5}.  The four-segment degree-2
// approximation and the five-cycle latency are the paper's; the segmenting,
// the truncation and returning zero for negative input are this design's.
// Timing: float_b(t) = sqrt(float_a(t - LATENCY)).
module fp_sqrt #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int LATENCY        = fp_pkg::L_SQRT
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] float_a,
  output logic [FLOAT_WIDTH-1:0] float_b
);
  localparam int M  = MANTISSA_WIDTH;
  localparam int E  = EXP_WIDTH;
  localparam int FB = M + 6;
  localparam int VW = FB + 6;

  logic signed [E+1:0]    eu, half;
  logic                   odd;
  logic [1:0]             seg;
  logic [FB-1:0]          t;
  logic signed [VW-1:0]   r;
  logic [M-1:0]           mr;
  logic signed [E+1:0]    ex;
  logic [FLOAT_WIDTH-1:0] res;

  always_comb begin
    eu   = $signed({2'b00, float_a[M +: E]}) - (E+2)'(BIAS);
    odd  = eu[0];
    half = (eu - (E+2)'(odd)) >>> 1;
    seg  = {odd, float_a[M-1]};
    t    = FB'({float_a[M-2:0]}) << (FB - M);
  end

  poly4_eval #(.FN0(fp_pkg::FN_SQRT), .FN1(fp_pkg::FN_SQRT2X), .SPLIT(1),
               .LO(1.0), .STEP(0.5), .DEG(2), .FB(FB), .VW(VW))
    u_poly (.seg(seg), .t(t), .val(r));

  always_comb begin
    if (r >= (VW'(2) <<< FB))      mr = '1;
    else if (r < (VW'(1) <<< FB))  mr = '0;
    else                           mr = r[FB-1 -: M];
    ex = half + (E+2)'(BIAS);
    if (float_a[M +: E] == '0 || float_a[FLOAT_WIDTH-1]) res = '0;
    else res = {1'b0, ex[E-1:0], mr};
  end

  delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(LATENCY)) u_pipe (
    .clock(clock), .reset(reset), .din(res), .dout(float_b));
endmodule
