// tb_conv_filter -- self-checking testbench of conv_filter, 3x3 and 5x5.
//
// Random windows and random kernels (the kernel changes every 97 windows to
// exercise the run-time coefficients) are applied one per clock with a
// random valid_i.  Each result is checked exactly 26 (3x3) or 32 (5x5)
// clocks later against sum(w*k) in double precision, within 2^-(M-4) of the
// sum of |w*k|; valid_o must equal valid_i delayed by the same latency.
module tb_conv_filter;
  import fp_pkg::*;
  localparam int FW = 16, MW = 10, EW = 5, BI = 15;
  localparam int N = 1500;
  localparam int LAT3 = 26, LAT5 = 32;

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [FW-1:0] w5 [5][5];
  logic [FW-1:0] k5 [5][5];
  logic [FW-1:0] w3 [3][3];
  logic [FW-1:0] k3 [3][3];
  logic [FW-1:0] o3, o5;
  logic          vi, vo3, vo5;
  logic [FW-1:0] hw [N][5][5];
  logic [FW-1:0] hk [N][5][5];
  logic          hv [N];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 3; i++) begin : g_r
    for (genvar j = 0; j < 3; j++) begin : g_c
      assign w3[i][j] = w5[i][j];
      assign k3[i][j] = k5[i][j];
    end
  end

  conv_filter #(.WIN_H(3), .WIN_W(3)) dut3 (.clock(clock), .reset(reset), .w(w3), .k(k3),
    .valid_i(vi), .pixel_out(o3), .valid_o(vo3));
  conv_filter #(.WIN_H(5), .WIN_W(5)) dut5 (.clock(clock), .reset(reset), .w(w5), .k(k5),
    .valid_i(vi), .pixel_out(o5), .valid_o(vo5));

  function automatic logic [FW-1:0] rnd();
    int e;
    e = int'($urandom_range(0, 6)) - 3;
    if ($urandom_range(0, 15) == 0) return '0;
    return {1'($urandom_range(0, 1)), EW'(e + BI), MW'($urandom)};
  endfunction

  function automatic real r(input logic [FW-1:0] f);
    return fp_to_real(64'(f), MW, EW, BI);
  endfunction

  task automatic check(input int i, input int n, input logic [FW-1:0] got, input logic v);
    real s, m, g, p;
    s = 0.0; m = 0.0;
    for (int a = 0; a < n; a++)
      for (int b = 0; b < n; b++) begin
        p = r(hw[i][a][b]) * r(hk[i][a][b]);
        s += p;
        m += (p < 0.0) ? -p : p;
      end
    g = r(got);
    checks++;
    if (v !== hv[i] || ((g - s) > m * 2.0 ** (4 - MW) + 1e-6) || ((s - g) > m * 2.0 ** (4 - MW) + 1e-6)) begin
      failures++;
      if (failures < 10) $display("MISMATCH %0dx%0d set %0d: got %f expected %f valid %b/%b",
                                  n, n, i, g, s, v, hv[i]);
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
      for (int a = 0; a < 5; a++)
        for (int b = 0; b < 5; b++) begin
          hw[i][a][b] = rnd();
          hk[i][a][b] = (i % 97 == 0 || i == 0) ? rnd() : hk[i-1][a][b];
        end
    end
    for (int a = 0; a < 5; a++) for (int b = 0; b < 5; b++) begin w5[a][b] = '0; k5[a][b] = '0; end
    vi = 1'b0;
    repeat (3) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    for (int i = 0; i < N + LAT5; i++) begin
      @(negedge clock);
      if (i >= LAT3 && i - LAT3 < N) check(i - LAT3, 3, o3, vo3);
      if (i >= LAT5 && i - LAT5 < N) check(i - LAT5, 5, o5, vo5);
      if (i < N) begin
        vi = hv[i];
        for (int a = 0; a < 5; a++) for (int b = 0; b < 5; b++) begin
          w5[a][b] = hw[i][a][b]; k5[a][b] = hk[i][a][b];
        end
      end else vi = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
