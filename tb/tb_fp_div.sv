// tb_fp_div -- self-checking testbench of fp_div.
//
// Streams 2000 random operand sets into the operator, one per clock, and
// compares each result, 7 clocks later, with the same operation computed
// in double precision from the decoded operands.  A result passes when it is
// within (2.0 ** -8) (relative) plus 0.0 (absolute) of the reference.  The
// check of result i happens exactly LATENCY clocks after operand i was
// applied, so a wrong latency or a stall fails too.
module tb_fp_div;
  import fp_pkg::*;
  localparam int FW = 16, MW = 10, EW = 5, BI = 15;
  localparam int LAT = 7;
  localparam int N = 2000;

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [FW-1:0] a, b, c;
  int checks = 0, failures = 0;
  logic [FW-1:0] va [N];
  logic [FW-1:0] vb [N];

  fp_div dut (.clock(clock), .reset(reset), .float_a(a), .float_b(b), .float_c(c));

  function automatic logic [FW-1:0] rnd(input int emin, input int emax, input bit allow_neg);
    int e;
    e = emin + int'($urandom_range(0, emax - emin));
    return {allow_neg ? 1'($urandom_range(0, 1)) : 1'b0, EW'(e + BI), MW'($urandom)};
  endfunction

  function automatic real r(input logic [FW-1:0] f);
    return fp_to_real(64'(f), MW, EW, BI);
  endfunction

  task automatic check(input int i, input logic [FW-1:0] got);
    real ra, rb, rg, rf, tol;
    ra = r(va[i]); rb = r(vb[i]); rg = r(got);
    rf = ra / rb;
    tol = (2.0 ** -8) * ((rf < 0.0) ? -rf : rf) + 0.0;
    checks++;
    if (((rg - rf) > tol) || ((rf - rg) > tol)) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH %0d: a=%h (%f) b=%h (%f) got=%h (%f) expected %f",
                 i, va[i], ra, vb[i], rb, got, rg, rf);
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
      va[i] = rnd(-6, 6, 1); vb[i] = rnd(-6, 6, 1);
    end
    va[0] = '0; va[1] = 16'h4000; vb[1] = 16'h4000;
    a = '0; b = '0;
    repeat (3) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    for (int i = 0; i < N + LAT; i++) begin
      @(negedge clock);
      if (i >= LAT) check(i - LAT, c);
      if (i < N) begin a = va[i]; b = vb[i]; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
