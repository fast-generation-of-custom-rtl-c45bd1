// tb_fp_cmp_and_swap -- self-checking testbench of fp_cmp_and_swap.
//
// Random pairs (including equal values, zeros and mixed signs) are applied
// one per clock; two clocks later b0 must be the smaller and b1 the larger
// of the pair by value, bit for bit.  Both orders of input are counted.
module tb_fp_cmp_and_swap;
  import fp_pkg::*;
  localparam int FW = 16, MW = 10, EW = 5, BI = 15;
  localparam int N = 2000;
  localparam int LAT = 2;

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [FW-1:0] a0, a1, b0, b1;
  logic [FW-1:0] va [N];
  logic [FW-1:0] vb [N];
  int checks = 0, failures = 0, n_swap = 0, n_keep = 0;

  fp_cmp_and_swap dut (.clock(clock), .reset(reset), .a0(a0), .a1(a1), .b0(b0), .b1(b1));

  function automatic logic [FW-1:0] rnd();
    if ($urandom_range(0, 9) == 0) return '0;
    return {1'($urandom_range(0, 1)), EW'($urandom_range(1, 31)), MW'($urandom)};
  endfunction

  function automatic real r(input logic [FW-1:0] f);
    return fp_to_real(64'(f), MW, EW, BI);
  endfunction

  task automatic check(input int i);
    logic [FW-1:0] lo, hi;
    if (r(va[i]) > r(vb[i])) begin lo = vb[i]; hi = va[i]; n_swap++; end
    else begin lo = va[i]; hi = vb[i]; n_keep++; end
    checks++;
    // Equal values may come out in either order as long as both are kept.
    if (r(b0) != r(lo) || r(b1) != r(hi) || !((b0 == lo && b1 == hi) || (b0 == hi && b1 == lo))) begin
      failures++;
      if (failures < 10) $display("MISMATCH %0d: a0=%h a1=%h got b0=%h b1=%h", i, va[i], vb[i], b0, b1);
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
      va[i] = rnd();
      vb[i] = ($urandom_range(0, 9) == 0) ? va[i] : rnd();
    end
    a0 = '0; a1 = '0;
    repeat (3) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    for (int i = 0; i < N + LAT; i++) begin
      @(negedge clock);
      if (i >= LAT) check(i - LAT);
      if (i < N) begin a0 = va[i]; a1 = vb[i]; end
    end
    $display("swapped %0d, kept %0d", n_swap, n_keep);
    checks++;
    if (n_swap == 0 || n_keep == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
