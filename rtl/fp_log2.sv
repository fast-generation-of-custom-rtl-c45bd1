// fp_log2 -- custom floating-point base-2 logarithm, latency 5.
//
// For x = 1.m * 2^u, log2(x) = u + log2(1.m).  log2(1.m) in [0,1) comes from a
// four-segment degree-2 polynomial selected by the two top mantissa bits.
// The fixed-point sum u + log2(1.m) is converted back to a float with a
// leading-one search.  Inputs <= 0 give the most negative representable
// number.  The five-cycle latency is the paper's (it equals the square
// root's); the approximation scheme is assumed to be the square root's.
// Timing: float_b(t) = log2(float_a(t - LATENCY)).
module fp_log2 #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int LATENCY        = fp_pkg::L_LOG2
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
  localparam int XW   = FB + E + 3;        // fixed-point log value width

  logic signed [E+1:0]    eu;
  logic [1:0]             seg;
  logic [FB-1:0]          t, f;
  logic signed [VW-1:0]   r;
  logic signed [XW-1:0]   v;
  logic [XW-1:0]          mag;
  int                     p;
  logic signed [E+2:0]    ex;
  logic [XW-1:0]          norm;
  logic [FLOAT_WIDTH-1:0] res;

  always_comb begin
    eu  = $signed({2'b00, float_a[M +: E]}) - (E+2)'(BIAS);
    seg = float_a[M-1 -: 2];
    t   = FB'(float_a[M-3:0]) << (FB - M);
  end

  poly4_eval #(.FN0(fp_pkg::FN_LOG2), .FN1(fp_pkg::FN_LOG2), .SPLIT(0),
               .LO(1.0), .STEP(0.25), .DEG(2), .FB(FB), .VW(VW))
    u_poly (.seg(seg), .t(t), .val(r));

  always_comb begin
    if (r < 0)                       f = '0;
    else if (r >= (VW'(1) <<< FB))   f = '1;
    else                             f = r[FB-1:0];
    v   = (XW'(eu) <<< FB) + $signed({{(XW-FB){1'b0}}, f});
    mag = v[XW-1] ? XW'(-v) : XW'(v);
    p   = 0;
    for (int i = 0; i < XW; i++) if (mag[i]) p = i;
    norm = mag << (XW - 1 - p);
    ex   = (E+3)'(p - FB + BIAS);
    if (float_a[M +: E] == '0 || float_a[FLOAT_WIDTH-1])
      res = {1'b1, E'(EMAX), {M{1'b1}}};
    else if (mag == '0 || ex <= 0)
      res = '0;
    else if (ex > EMAX)
      res = {v[XW-1], E'(EMAX), {M{1'b1}}};
    else
      res = {v[XW-1], ex[E-1:0], norm[XW-2 -: M]};
  end

  delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(LATENCY)) u_pipe (
    .clock(clock), .reset(reset), .din(res), .dout(float_b));
endmodule
