// fp_pkg -- constants and elaboration-time helpers shared by the custom
// floating-point spatial-filter library.
//
// Number format.  A float of FLOAT_WIDTH bits is {s, e, m} with EXP_WIDTH
// exponent bits and MANTISSA_WIDTH fraction bits; its value is
// (-1)^s * 1.m * 2^(e - BIAS).  The default format is float16(10,5) with
// BIAS 15.  An exponent field of 0 means zero (no subnormals).  There is no
// Inf/NaN: results that overflow saturate to the largest magnitude and results
// that underflow flush to zero.  Results are truncated, not rounded.  The field
// order and the bias follow the worked example K[1][1]=6.75 -> 16'h46c0; the
// handling of zero, overflow and rounding is this library's own choice.
//
// Latencies.  Every operator is a fixed-latency pipeline accepting one operand
// set per clock.  The latencies are the ones the filter schedules are built
// from: adder 6, multiplier 2, square root 5, log2 5, 2^x 6, divider 7,
// max 1, exponent shift 1, compare-and-swap 2.
//
// The functions below are used only at elaboration (constants) or by
// testbenches (conversion to and from real); no hardware is generated from
// the real-valued ones.
package fp_pkg;

  localparam int L_ADD   = 6;
  localparam int L_MULT  = 2;
  localparam int L_SQRT  = 5;
  localparam int L_LOG2  = 5;
  localparam int L_POW2  = 6;
  localparam int L_DIV   = 7;
  localparam int L_MAX   = 1;
  localparam int L_SHIFT = 1;
  localparam int L_CAS   = 2;

  // Latency of AdderTree(n): L_ADD * ceil(log2(n)).
  function automatic int adder_tree_latency(input int n);
    return L_ADD * $clog2(n);
  endfunction

  // Ordering key: an unsigned integer that sorts like the float's value.
  // Positive numbers get their sign bit set, negative ones are inverted.
  function automatic logic [63:0] fp_key(input logic [63:0] a, input int fw);
    logic [63:0] mask;
    mask = (fw >= 64) ? '1 : ((64'd1 << fw) - 64'd1);
    if (a[fw-1]) return (~a) & mask;
    else         return (a | (64'd1 << (fw-1))) & mask;
  endfunction

  // Real -> float bits (truncating).  Used for constants such as 1.0 and 0.0313.
  function automatic logic [63:0] real_to_fp(input real v, input int mw, input int ew,
                                             input int bias);
    logic [63:0] r;
    real  a;
    int   e;
    logic [63:0] m;
    r = '0;
    if (v == 0.0) return r;
    a = (v < 0.0) ? -v : v;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    e = e + bias;
    if (e <= 0) return r;
    if (e >= (1 << ew)) begin
      e = (1 << ew) - 1;
      m = (64'd1 << mw) - 64'd1;
    end else begin
      m = 64'(longint'($floor((a - 1.0) * (2.0 ** mw))));
    end
    r = (64'(e) << mw) | m;
    if (v < 0.0) r = r | (64'd1 << (mw + ew));
    return r;
  endfunction

  // Float bits -> real (testbench use).
  function automatic real fp_to_real(input logic [63:0] f, input int mw, input int ew,
                                     input int bias);
    int  e;
    real v;
    e = int'((f >> mw) & ((64'd1 << ew) - 64'd1));
    if (e == 0) return 0.0;
    v = (1.0 + real'(f & ((64'd1 << mw) - 64'd1)) / (2.0 ** mw)) * (2.0 ** (e - bias));
    return f[mw+ew] ? -v : v;
  endfunction

  // Functions approximated by the piecewise polynomials.
  localparam int FN_SQRT   = 0;  // sqrt(x)
  localparam int FN_SQRT2X = 1;  // sqrt(2x)
  localparam int FN_LOG2   = 2;  // log2(x)
  localparam int FN_POW2   = 3;  // 2^x
  localparam int FN_RECIP  = 4;  // 1/x

  function automatic real poly_fn(input int fn, input real x);
    case (fn)
      FN_SQRT:   return $sqrt(x);
      FN_SQRT2X: return $sqrt(2.0 * x);
      FN_LOG2:   return $ln(x) / $ln(2.0);
      FN_POW2:   return 2.0 ** x;
      default:   return 1.0 / x;
    endcase
  endfunction

  // Coefficient k (of t^k, t = x - lo) of the degree-`deg` polynomial that
  // interpolates poly_fn(fn, .) at the Chebyshev nodes of [lo, lo+h].
  // Returned in fixed point with `fb` fraction bits.
  function automatic longint poly_coef(input int fn, input real lo, input real h,
                                       input int deg, input int k, input int fb);
    real t [4];
    real c [4];
    real p [4];
    real q [4];
    for (int i = 0; i <= deg; i++) begin
      t[i] = h / 2.0 + h / 2.0 * $cos((2.0 * i + 1.0) * 3.14159265358979 / (2.0 * (deg + 1)));
      c[i] = poly_fn(fn, lo + t[i]);
    end
    // Newton divided differences.
    for (int j = 1; j <= deg; j++)
      for (int i = deg; i >= j; i--)
        c[i] = (c[i] - c[i-1]) / (t[i] - t[i-j]);
    // Expand the Newton form into monomials of t.
    for (int i = 0; i < 4; i++) p[i] = 0.0;
    p[0] = c[deg];
    for (int j = deg - 1; j >= 0; j--) begin
      for (int i = 0; i < 4; i++) q[i] = 0.0;
      for (int i = 0; i < 3; i++) begin
        q[i+1] = q[i+1] + p[i];
        q[i]   = q[i] - p[i] * t[j];
      end
      q[3] = q[3] - p[3] * t[j];
      q[0] = q[0] + c[j];
      for (int i = 0; i < 4; i++) p[i] = q[i];
    end
    return longint'(p[k] * (2.0 ** fb));
  endfunction

endpackage
