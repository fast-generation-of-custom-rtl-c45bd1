// tb_fp_pkg -- self-checking testbench of the fp_pkg helpers.
//
// Checks: the conversion of the paper's example 6.75 to 16'h46c0 and of 1.0
// to 16'h3c00; real -> float -> real round trips in float16(10,5) and
// float32(23,8) within one unit of the last place; that fp_key orders random
// pairs like their real values; that the Chebyshev polynomial coefficients
// reproduce sqrt, log2, 2^x and 1/x on sample intervals; and the operator
// latencies the filter schedules rely on (AdderTree(9) = 24, AdderTree(25) =
// 30).  The testbench has no clocked logic, but the same watchdog as the
// others.
module tb_fp_pkg;
  import fp_pkg::*;

  int checks = 0, failures = 0;
  logic clock = 1'b0;
  always #5 clock = ~clock;

  task automatic expect_true(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic real ab(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  initial begin
    repeat (100000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v, back;
    logic [63:0] f, g;
    expect_true(real_to_fp(6.75, 10, 5, 15) == 64'h46c0, "6.75 -> 16'h46c0");
    expect_true(real_to_fp(1.0, 10, 5, 15) == 64'h3c00, "1.0 -> 16'h3c00");
    expect_true(real_to_fp(-2.0, 10, 5, 15) == 64'hc000, "-2.0 -> 16'hc000");
    expect_true(real_to_fp(0.0, 10, 5, 15) == 64'h0, "0.0 -> 0");
    expect_true(real_to_fp(1.0e9, 10, 5, 15) == 64'h7fff, "overflow saturates");
    expect_true(real_to_fp(1.0e-9, 10, 5, 15) == 64'h0, "underflow flushes to zero");
    expect_true(fp_to_real(64'h46c0, 10, 5, 15) == 6.75, "16'h46c0 -> 6.75");

    for (int i = 0; i < 2000; i++) begin
      int sc;
      sc = int'($urandom_range(0, 20)) - 10;
      v = (real'($urandom) / 4294967296.0 - 0.5) * (2.0 ** sc);
      back = fp_to_real(real_to_fp(v, 10, 5, 15), 10, 5, 15);
      expect_true(ab(back - v) <= ab(v) * 2.0 ** -10 + 2.0 ** -14, "float16 round trip (values below 2^-14 flush to 0)");
      back = fp_to_real(real_to_fp(v, 23, 8, 127), 23, 8, 127);
      expect_true(ab(back - v) <= ab(v) * 2.0 ** -23 + 1e-30, "float32 round trip");
    end

    for (int i = 0; i < 2000; i++) begin
      f = 64'($urandom_range(0, 65535));
      g = 64'($urandom_range(0, 65535));
      if (fp_to_real(f, 10, 5, 15) < fp_to_real(g, 10, 5, 15))
        expect_true(fp_key(f, 16) < fp_key(g, 16), "fp_key order");
      else if (fp_to_real(f, 10, 5, 15) > fp_to_real(g, 10, 5, 15))
        expect_true(fp_key(f, 16) > fp_key(g, 16), "fp_key order");
    end

    // Polynomial coefficients: evaluate at random points of each interval.
    for (int fn = FN_SQRT; fn <= FN_RECIP; fn++) begin
      for (int seg = 0; seg < 4; seg++) begin
        real lo, h, x, p, c [4], tol;
        int deg;
        deg = (fn == FN_RECIP) ? 3 : 2;
        lo  = (fn == FN_POW2) ? seg * 0.25 : 1.0 + seg * 0.25;
        h   = 0.25;
        for (int k = 0; k < 4; k++)
          c[k] = (k <= deg) ? real'(poly_coef(fn, lo, h, deg, k, 30)) / (2.0 ** 30) : 0.0;
        tol = (fn == FN_RECIP) ? 1e-4 : 1e-3;
        for (int s = 0; s < 20; s++) begin
          x = h * real'($urandom_range(0, 1000)) / 1000.0;
          p = c[0] + x * (c[1] + x * (c[2] + x * c[3]));
          expect_true(ab(p - poly_fn(fn, lo + x)) < tol, $sformatf("poly fn %0d seg %0d", fn, seg));
        end
      end
    end

    expect_true(adder_tree_latency(9) == 24, "AdderTree(9) latency");
    expect_true(adder_tree_latency(25) == 30, "AdderTree(25) latency");
    expect_true(adder_tree_latency(8) == 18, "AdderTree(8) latency");
    expect_true(L_ADD == 6 && L_MULT == 2 && L_SQRT == 5 && L_LOG2 == 5 && L_POW2 == 6 &&
                L_DIV == 7 && L_MAX == 1 && L_SHIFT == 1 && L_CAS == 2, "operator latencies");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
