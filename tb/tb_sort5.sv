// tb_sort5 -- self-checking testbench of the SORT5 network.
//
// Random sets of five floats (with many repeated values, zeros and
// negatives) are applied one per clock.  Twelve clocks later the five
// outputs must be the inputs in ascending order, bit for bit, where the
// order is that of the values (the ordering key of fp_pkg).
module tb_sort5;
  import fp_pkg::*;
  localparam int FW = 16, MW = 10, EW = 5, BI = 15;
  localparam int N = 2000;
  localparam int LAT = 12;

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [FW-1:0] a [5];
  logic [FW-1:0] b [5];
  logic [FW-1:0] hist [N][5];
  int checks = 0, failures = 0;

  sort5 dut (.clock(clock), .reset(reset), .a(a), .b(b));

  function automatic logic [FW-1:0] rnd();
    case ($urandom_range(0, 7))
      0:       return '0;
      1:       return 16'h3c00;
      2:       return {1'b1, 5'(BI), 10'd0};
      default: return {1'($urandom_range(0, 1)), EW'($urandom_range(1, 30)), MW'($urandom)};
    endcase
  endfunction

  task automatic check(input int i);
    logic [FW-1:0] s [5];
    logic [FW-1:0] t;
    bit bad;
    for (int j = 0; j < 5; j++) s[j] = hist[i][j];
    for (int p = 0; p < 5; p++)
      for (int q = 0; q < 4 - p; q++)
        if (fp_key(64'(s[q]), FW) > fp_key(64'(s[q+1]), FW)) begin
          t = s[q]; s[q] = s[q+1]; s[q+1] = t;
        end
    bad = 1'b0;
    for (int j = 0; j < 5; j++) if (b[j] !== s[j]) bad = 1'b1;
    checks++;
    if (bad) begin
      failures++;
      if (failures < 10) $display("MISMATCH set %0d: got %h %h %h %h %h expected %h %h %h %h %h",
                                  i, b[0], b[1], b[2], b[3], b[4], s[0], s[1], s[2], s[3], s[4]);
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
    for (int i = 0; i < N; i++) for (int j = 0; j < 5; j++) hist[i][j] = rnd();
    for (int j = 0; j < 5; j++) a[j] = '0;
    repeat (3) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    for (int i = 0; i < N + LAT; i++) begin
      @(negedge clock);
      if (i >= LAT) check(i - LAT);
      if (i < N) for (int j = 0; j < 5; j++) a[j] = hist[i][j];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
