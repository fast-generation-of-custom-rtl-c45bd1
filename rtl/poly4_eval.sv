// poly4_eval -- four-segment piecewise polynomial evaluator (combinational).
//
// The argument range is cut into four segments; `seg` selects one and `t` is
// the offset of the argument from the segment's start, in fixed point with FB
// fraction bits.  The result p(t) = c0 + c1 t + ... + cDEG t^DEG is evaluated
// by Horner's rule in signed fixed point (FB fraction bits) and returned in
// `val`.  The coefficients are computed at elaboration by fp_pkg::poly_coef,
// which interpolates the target function at the Chebyshev nodes of each
// segment.  Segment s covers [LO + STEP*j, LO + STEP*(j+1)) of function FN0,
// with j = s; when SPLIT = 1, segments 0-1 use FN0 and segments 2-3 use FN1,
// both with j = s mod 2.  The paper specifies four segments and the degree for
// the square root (2) and the division (3); how the coefficients are obtained
// is this design's choice.
module poly4_eval #(
  parameter int  FN0   = fp_pkg::FN_SQRT,
  parameter int  FN1   = fp_pkg::FN_SQRT2X,
  parameter int  SPLIT = 1,
  parameter real LO    = 1.0,
  parameter real STEP  = 0.5,
  parameter int  DEG   = 2,
  parameter int  FB    = 16,
  parameter int  VW    = FB + 6
) (
  input  logic [1:0]           seg,
  input  logic [FB-1:0]        t,
  output logic signed [VW-1:0] val
);
  localparam int PW = VW + FB + 2;

  logic signed [VW-1:0] coef [4][4];

  for (genvar s = 0; s < 4; s++) begin : g_seg
    localparam int  FN = (SPLIT != 0 && s >= 2) ? FN1 : FN0;
    localparam real SLO = LO + STEP * ((SPLIT != 0) ? (s % 2) : s);
    for (genvar k = 0; k < 4; k++) begin : g_k
      localparam longint C = (k <= DEG) ? fp_pkg::poly_coef(FN, SLO, STEP, DEG, k, FB) : 0;
      assign coef[s][k] = VW'(C);
    end
  end

  logic signed [PW-1:0] prod;
  logic signed [VW-1:0] acc;
  always_comb begin
    acc  = coef[seg][DEG];
    prod = '0;
    for (int k = DEG - 1; k >= 0; k--) begin
      prod = PW'(acc) * $signed({1'b0, t});
      acc  = VW'(prod >>> FB) + coef[seg][k];
    end
  end
  assign val = acc;
endmodule
