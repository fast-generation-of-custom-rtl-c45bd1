// tb_nl_filter -- self-checking testbench of nl_filter (f_zeta).
//
// Random 3x3 windows (values between -4 and 64, so that the max(w,1) clamp
// is active on many pixels and f_beta lands on both sides of f_delta) are
// applied one per clock with a random valid_i.  Each result, 26 clocks
// later, is compared with f_zeta evaluated in double precision from the
// decoded inputs.  The operators approximate sqrt, log2, 2^x and division
// with short polynomials and truncate, so a result passes within 2^-5 of
// the reference magnitude plus 2^-8 of f_alpha.  The testbench also counts
// how often each branch of the CMP_and_SWAP was taken and requires both.
module tb_nl_filter;
  import fp_pkg::*;
  localparam int FW = 16, MW = 10, EW = 5, BI = 15;
  localparam int N = 2000;
  localparam int LAT = 26;

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [FW-1:0] w [3][3];
  logic [FW-1:0] o;
  logic          vi, vo;
  logic [FW-1:0] hw [N][3][3];
  logic          hv [N];
  int checks = 0, failures = 0, n_beta_gt = 0, n_beta_le = 0, n_clamp = 0;
  real worst = 0.0;

  nl_filter dut (.clock(clock), .reset(reset), .w(w), .valid_i(vi), .pixel_out(o), .valid_o(vo));

  function automatic logic [FW-1:0] rnd(input int mode);
    if ($urandom_range(0, 7) == 0) return '0;
    if (mode == 0) return {1'($urandom_range(0, 3) == 0), EW'($urandom_range(BI - 3, BI + 2)), MW'($urandom)};
    return {1'b0, EW'($urandom_range(BI - 2, BI + 5)), MW'($urandom)};
  endfunction

  function automatic real r(input logic [FW-1:0] f);
    return fp_to_real(64'(f), MW, EW, BI);
  endfunction

  function automatic real mx(input logic [FW-1:0] f);
    return (r(f) > 1.0) ? r(f) : 1.0;
  endfunction

  task automatic check(input int i);
    real fa, fb, fd, e, g, tol, err;
    fa = 0.5 * ($sqrt(mx(hw[i][0][0]) * mx(hw[i][0][2])) + $sqrt(mx(hw[i][2][0]) * mx(hw[i][2][2])));
    fb = 8.0 * (($ln(mx(hw[i][0][1]) * mx(hw[i][2][1])) + $ln(mx(hw[i][1][0]) * mx(hw[i][1][2]))) / $ln(2.0));
    fd = 2.0 ** (0.0313 * mx(hw[i][1][1]));
    e = (fb > fd) ? fa * (fd / fb) : fa * (fb / fd);
    g = r(o);
    tol = e * 2.0 ** -5 + fa * 2.0 ** -8;
    err = (g > e) ? g - e : e - g;
    if (err / (e + fa * 2.0 ** -3) > worst) worst = err / (e + fa * 2.0 ** -3);
    checks++;
    if (hv[i]) begin
      if (fb > fd) n_beta_gt++; else n_beta_le++;
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) if (r(hw[i][a][b]) < 1.0) n_clamp++;
    end
    if (vo !== hv[i] || err > tol) begin
      failures++;
      if (failures < 10) $display("MISMATCH set %0d: got %f expected %f (alpha %f beta %f delta %f) valid %b/%b",
                                  i, g, e, fa, fb, fd, vo, hv[i]);
    end
  endtask

  initial begin
    repeat (N + 1000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      int mode;
      mode = int'($urandom_range(0, 1));
      hv[i] = 1'($urandom_range(0, 3) != 0);
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) hw[i][a][b] = rnd(mode);
      // Large centre pixels push f_delta above f_beta.
      if ($urandom_range(0, 2) == 0) hw[i][1][1] = {1'b0, EW'(BI + 7), MW'($urandom)};
    end
    for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) w[a][b] = '0;
    vi = 1'b0;
    repeat (3) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    for (int i = 0; i < N + LAT; i++) begin
      @(negedge clock);
      if (i >= LAT) check(i - LAT);
      if (i < N) begin
        vi = hv[i];
        for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) w[a][b] = hw[i][a][b];
      end else vi = 1'b0;
    end
    $display("f_beta > f_delta: %0d  f_beta <= f_delta: %0d  clamped pixels: %0d  worst relative error %f",
             n_beta_gt, n_beta_le, n_clamp, worst);
    checks++;
    if (n_beta_gt == 0 || n_beta_le == 0 || n_clamp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
