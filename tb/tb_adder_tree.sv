// tb_adder_tree -- self-checking testbench of adder_tree.
//
// Three trees are tested side by side: N = 9 (AdderTree(8) plus a delayed
// input), N = 25 (AdderTree(16) plus AdderTree(9)) and N = 5.  Random input
// sets are applied one per clock; each sum is checked exactly
// L_ADD*ceil(log2 N) clocks later against a double-precision sum, within a
// tolerance of 2^-(M-4) times the sum of the magnitudes (one truncation per
// tree level).
module tb_adder_tree;
  import fp_pkg::*;
  localparam int FW = 16, MW = 10, EW = 5, BI = 15;
  localparam int N = 1500;
  localparam int LAT9 = 24, LAT25 = 30, LAT5 = 18;

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [FW-1:0] d25 [25];
  logic [FW-1:0] d9 [9];
  logic [FW-1:0] d5 [5];
  logic [FW-1:0] o9, o25, o5;
  logic [FW-1:0] hist [N][25];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 9; i++) begin : g9
    assign d9[i] = d25[i];
  end
  for (genvar i = 0; i < 5; i++) begin : g5
    assign d5[i] = d25[i];
  end

  adder_tree #(.N(9))  dut9  (.clock(clock), .reset(reset), .din(d9),  .dout(o9));
  adder_tree #(.N(25)) dut25 (.clock(clock), .reset(reset), .din(d25), .dout(o25));
  adder_tree #(.N(5))  dut5  (.clock(clock), .reset(reset), .din(d5),  .dout(o5));

  function automatic logic [FW-1:0] rnd();
    int e;
    e = int'($urandom_range(0, 8)) - 4;
    if ($urandom_range(0, 15) == 0) return '0;
    return {1'($urandom_range(0, 1)), EW'(e + BI), MW'($urandom)};
  endfunction

  function automatic real r(input logic [FW-1:0] f);
    return fp_to_real(64'(f), MW, EW, BI);
  endfunction

  task automatic check(input int i, input int n, input logic [FW-1:0] got);
    real s, m, g;
    s = 0.0; m = 0.0;
    for (int j = 0; j < n; j++) begin
      s += r(hist[i][j]);
      m += (r(hist[i][j]) < 0.0) ? -r(hist[i][j]) : r(hist[i][j]);
    end
    g = r(got);
    checks++;
    if (((g - s) > m * 2.0 ** (4 - MW) + 1e-6) || ((s - g) > m * 2.0 ** (4 - MW) + 1e-6)) begin
      failures++;
      if (failures < 10) $display("MISMATCH N=%0d set %0d: got %f expected %f", n, i, g, s);
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
    for (int i = 0; i < N; i++)
      for (int j = 0; j < 25; j++) hist[i][j] = rnd();
    for (int j = 0; j < 25; j++) d25[j] = '0;
    repeat (3) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    for (int i = 0; i < N + LAT25; i++) begin
      @(negedge clock);
      if (i >= LAT9  && i - LAT9  < N) check(i - LAT9,  9,  o9);
      if (i >= LAT25 && i - LAT25 < N) check(i - LAT25, 25, o25);
      if (i >= LAT5  && i - LAT5  < N) check(i - LAT5,  5,  o5);
      if (i < N) for (int j = 0; j < 25; j++) d25[j] = hist[i][j];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
