// tb_median_filter -- self-checking testbench of median_filter.
//
// Random 3x3 windows are applied one per clock with a random valid_i.  The
// reference takes the median of the 'x' footprint (w00 w02 w11 w20 w22) and
// of the '+' footprint (w01 w10 w11 w12 w21) exactly, and halves their sum
// in double precision.  The result, 19 clocks later, must match within
// 2^-(M-1) of |m1|+|m2|; valid_o must be valid_i delayed by 19.
module tb_median_filter;
  import fp_pkg::*;
  localparam int FW = 16, MW = 10, EW = 5, BI = 15;
  localparam int N = 2000;
  localparam int LAT = 19;

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [FW-1:0] w [3][3];
  logic [FW-1:0] o;
  logic          vi, vo;
  logic [FW-1:0] hw [N][3][3];
  logic          hv [N];
  int checks = 0, failures = 0;

  median_filter dut (.clock(clock), .reset(reset), .w(w), .valid_i(vi), .pixel_out(o), .valid_o(vo));

  function automatic logic [FW-1:0] rnd();
    if ($urandom_range(0, 15) == 0) return '0;
    return {1'($urandom_range(0, 3) == 0), EW'($urandom_range(10, 20)), MW'($urandom)};
  endfunction

  function automatic real r(input logic [FW-1:0] f);
    return fp_to_real(64'(f), MW, EW, BI);
  endfunction

  function automatic real med5(input real v0, input real v1, input real v2, input real v3,
                               input real v4);
    real s [5];
    real t;
    s = '{v0, v1, v2, v3, v4};
    for (int p = 0; p < 5; p++)
      for (int q = 0; q < 4 - p; q++)
        if (s[q] > s[q+1]) begin t = s[q]; s[q] = s[q+1]; s[q+1] = t; end
    return s[2];
  endfunction

  task automatic check(input int i);
    real m1, m2, e, g, tol;
    m1 = med5(r(hw[i][0][0]), r(hw[i][0][2]), r(hw[i][1][1]), r(hw[i][2][0]), r(hw[i][2][2]));
    m2 = med5(r(hw[i][0][1]), r(hw[i][1][0]), r(hw[i][1][1]), r(hw[i][1][2]), r(hw[i][2][1]));
    e = (m1 + m2) / 2.0;
    tol = (((m1 < 0.0) ? -m1 : m1) + ((m2 < 0.0) ? -m2 : m2)) * 2.0 ** (1 - MW) + 1e-6;
    g = r(o);
    checks++;
    if (vo !== hv[i] || (g - e) > tol || (e - g) > tol) begin
      failures++;
      if (failures < 10) $display("MISMATCH set %0d: got %f expected %f valid %b/%b", i, g, e, vo, hv[i]);
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
      hv[i] = 1'($urandom_range(0, 3) != 0);
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) hw[i][a][b] = rnd();
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
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
