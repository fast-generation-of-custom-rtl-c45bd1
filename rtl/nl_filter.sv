// nl_filter -- non-linear floating-point 3x3 filter f_zeta of the paper's
// example (its Eq. 2):
//   w'_ij   = max(w_ij, 1)
//   f_alpha = 0.5 * ( sqrt(w'00*w'02) + sqrt(w'20*w'22) )
//   f_beta  = 8   * ( log2(w'01*w'21) + log2(w'10*w'12) )
//   f_delta = 2^(0.0313 * w'11)
//   [b0, b1] = CMP_and_SWAP(f_beta, f_delta)      (b0 = min, b1 = max)
//   f_zeta  = f_alpha * (b0 / b1)
// The multiplication by 0.5 and by 8 are floating-point shifts of the
// exponent (FP_RSH(1), FP_LSH(3)).  Schedule, as in the paper: max 1, mult 2,
// sqrt/log2 5, add 6, shift 1 -> f_alpha and f_beta at 15; max 1, mult 2,
// pow2 6 -> f_delta at 9, delayed by 6; CMP_and_SWAP 2 and divide 7 -> 24;
// f_alpha delayed by 9; final multiply 2 -> LATENCY 26.  The constants 1.0
// and 0.0313 are converted to the configured float format at elaboration.
// valid_o is valid_i delayed by LATENCY; one window is accepted per clock.
module nl_filter #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] w [3][3],
  input  logic                   valid_i,
  output logic [FLOAT_WIDTH-1:0] pixel_out,
  output logic                   valid_o
);
  import fp_pkg::*;

  localparam int LATENCY = L_MAX + L_MULT + L_SQRT + L_ADD + L_SHIFT + L_CAS + L_DIV + L_MULT;

  localparam logic [63:0] ONE_64  = real_to_fp(1.0, MANTISSA_WIDTH, EXP_WIDTH, BIAS);
  localparam logic [63:0] K_DELTA = real_to_fp(0.0313, MANTISSA_WIDTH, EXP_WIDTH, BIAS);
  localparam logic [FLOAT_WIDTH-1:0] ONE  = ONE_64[FLOAT_WIDTH-1:0];
  localparam logic [FLOAT_WIDTH-1:0] KDEL = K_DELTA[FLOAT_WIDTH-1:0];

  // Alignment delays derived from the unit latencies.
  localparam int T_AB    = L_MAX + L_MULT + L_SQRT + L_ADD + L_SHIFT;   // f_alpha, f_beta
  localparam int T_DELTA = L_MAX + L_MULT + L_POW2;                     // f_delta
  localparam int T_PHI   = T_AB + L_CAS + L_DIV;                        // f_phi

  logic [FLOAT_WIDTH-1:0] wm [3][3];
  logic [FLOAT_WIDTH-1:0] m0, m1, m2, m3, m4;
  logic [FLOAT_WIDTH-1:0] s0, s1, l0, l1, sum_a, sum_b;
  logic [FLOAT_WIDTH-1:0] f_alpha, f_beta, f_delta, f_delta_d, f_alpha_d;
  logic [FLOAT_WIDTH-1:0] lo, hi, f_phi;

  // max(w_ij, 1)
  for (genvar i = 0; i < 3; i++) begin : g_row
    for (genvar j = 0; j < 3; j++) begin : g_col
      fp_max #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
               .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
        u_max (.clock(clock), .reset(reset), .float_a(w[i][j]), .float_b(ONE),
               .float_c(wm[i][j]));
    end
  end

  fp_mult #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_m0 (.clock(clock), .reset(reset), .float_a(wm[0][0]), .float_b(wm[0][2]), .float_c(m0));
  fp_mult #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_m1 (.clock(clock), .reset(reset), .float_a(wm[2][0]), .float_b(wm[2][2]), .float_c(m1));
  fp_mult #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_m2 (.clock(clock), .reset(reset), .float_a(wm[0][1]), .float_b(wm[2][1]), .float_c(m2));
  fp_mult #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_m3 (.clock(clock), .reset(reset), .float_a(wm[1][0]), .float_b(wm[1][2]), .float_c(m3));
  fp_mult #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_m4 (.clock(clock), .reset(reset), .float_a(wm[1][1]), .float_b(KDEL), .float_c(m4));

  // f_alpha
  fp_sqrt #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_sq0 (.clock(clock), .reset(reset), .float_a(m0), .float_b(s0));
  fp_sqrt #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_sq1 (.clock(clock), .reset(reset), .float_a(m1), .float_b(s1));
  fp_adder #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_add_a (.clock(clock), .reset(reset), .float_a(s0), .float_b(s1), .float_c(sum_a));
  fp_shift #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS),
             .SHIFT(-1))
    u_rsh (.clock(clock), .reset(reset), .float_a(sum_a), .float_b(f_alpha));

  // f_beta
  fp_log2 #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_lg0 (.clock(clock), .reset(reset), .float_a(m2), .float_b(l0));
  fp_log2 #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_lg1 (.clock(clock), .reset(reset), .float_a(m3), .float_b(l1));
  fp_adder #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_add_b (.clock(clock), .reset(reset), .float_a(l0), .float_b(l1), .float_c(sum_b));
  fp_shift #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS),
             .SHIFT(3))
    u_lsh (.clock(clock), .reset(reset), .float_a(sum_b), .float_b(f_beta));

  // f_delta, aligned to f_beta
  fp_pow2 #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_pow (.clock(clock), .reset(reset), .float_a(m4), .float_b(f_delta));
  delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(T_AB - T_DELTA)) u_dly_delta (
    .clock(clock), .reset(reset), .din(f_delta), .dout(f_delta_d));

  // f_phi = min / max
  fp_cmp_and_swap #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_cas (.clock(clock), .reset(reset), .a0(f_beta), .a1(f_delta_d), .b0(lo), .b1(hi));
  fp_div #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_div (.clock(clock), .reset(reset), .float_a(lo), .float_b(hi), .float_c(f_phi));

  // f_zeta = f_alpha * f_phi
  delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(T_PHI - T_AB)) u_dly_alpha (
    .clock(clock), .reset(reset), .din(f_alpha), .dout(f_alpha_d));
  fp_mult #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH), .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
    u_m_out (.clock(clock), .reset(reset), .float_a(f_alpha_d), .float_b(f_phi), .float_c(pixel_out));

  delay_line #(.WIDTH(1), .DEPTH(LATENCY)) u_valid (
    .clock(clock), .reset(reset), .din(valid_i), .dout(valid_o));
endmodule
