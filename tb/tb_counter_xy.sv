// tb_counter_xy -- self-checking testbench of counter_xy.
//
// A 5x3 counter is fed random valid/blank cycles and occasional vsync pulses.
// A behavioural model of the expected position runs alongside and X and Y are
// compared after every clock.
module tb_counter_xy;
  localparam int IW = 5, IH = 3;
  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;
  logic vld_pix, vsync;
  logic [2:0] X;
  logic [1:0] Y;
  int ex = 0, ey = 0, checks = 0, failures = 0, wraps = 0;

  counter_xy #(.IMG_W(IW), .IMG_H(IH)) dut (.clock(clock), .reset(reset), .vld_pix(vld_pix),
                                            .vsync(vsync), .X(X), .Y(Y));
  initial begin
    repeat (5000) @(posedge clock);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    vld_pix = 1'b0; vsync = 1'b0;
    repeat (2) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clock);
      checks++;
      if (int'(X) != ex || int'(Y) != ey) begin
        failures++;
        if (failures < 10) $display("cycle %0d: X=%0d Y=%0d expected %0d %0d", i, X, Y, ex, ey);
      end
      vsync   = ($urandom_range(0, 99) == 0);
      vld_pix = !vsync && ($urandom_range(0, 3) != 0);
      if (vsync) begin ex = 0; ey = 0; end
      else if (vld_pix) begin
        ex++;
        if (ex == IW) begin ex = 0; ey++; if (ey == IH) begin ey = 0; wraps++; end end
      end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("frame wrap never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
