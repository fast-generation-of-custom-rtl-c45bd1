// tb_sobel_filter -- self-checking testbench of sobel_filter.
//
// Random 3x3 windows are applied one per clock with a random valid_i; one
// window in eight is flat (all pixels equal), whose gradient is exactly 0.
// Each result, 39 clocks later, is compared with
// sqrt(conv(w,Kx)^2 + conv(w,Ky)^2) in double precision, within 2^-(M-5) of
// the sum of |w*K| of both convolutions plus 2^-(M-3) of the magnitude;
// valid_o must equal valid_i delayed by 39.
module tb_sobel_filter;
  import fp_pkg::*;
  localparam int FW = 16, MW = 10, EW = 5, BI = 15;
  localparam int N = 2000;
  localparam int LAT = 39;

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [FW-1:0] w [3][3];
  logic [FW-1:0] o;
  logic          vi, vo;
  logic [FW-1:0] hw [N][3][3];
  logic          hv [N];
  int checks = 0, failures = 0;
  real kx [3][3] = '{'{1.0, 0.0, -1.0}, '{2.0, 0.0, -2.0}, '{1.0, 0.0, -1.0}};
  real ky [3][3] = '{'{1.0, 2.0, 1.0}, '{0.0, 0.0, 0.0}, '{-1.0, -2.0, -1.0}};

  sobel_filter dut (.clock(clock), .reset(reset), .w(w), .valid_i(vi), .pixel_out(o), .valid_o(vo));

  function automatic logic [FW-1:0] rnd();
    if ($urandom_range(0, 15) == 0) return '0;
    return {1'($urandom_range(0, 3) == 0), EW'($urandom_range(BI - 3, BI + 4)), MW'($urandom)};
  endfunction

  function automatic real r(input logic [FW-1:0] f);
    return fp_to_real(64'(f), MW, EW, BI);
  endfunction

  function automatic real ab(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check(input int i);
    real gx, gy, s, e, g, tol;
    gx = 0.0; gy = 0.0; s = 0.0;
    for (int a = 0; a < 3; a++)
      for (int b = 0; b < 3; b++) begin
        gx += r(hw[i][a][b]) * kx[a][b];
        gy += r(hw[i][a][b]) * ky[a][b];
        s  += ab(r(hw[i][a][b])) * (ab(kx[a][b]) + ab(ky[a][b]));
      end
    e = $sqrt(gx * gx + gy * gy);
    g = r(o);
    tol = s * 2.0 ** (5 - MW) + e * 2.0 ** (3 - MW) + 1e-6;
    checks++;
    if (vo !== hv[i] || ab(g - e) > tol) begin
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
      logic [FW-1:0] flat;
      flat = rnd();
      hv[i] = 1'($urandom_range(0, 3) != 0);
      for (int a = 0; a < 3; a++)
        for (int b = 0; b < 3; b++) hw[i][a][b] = (i % 8 == 0) ? flat : rnd();
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
