// tb_window_generator -- self-checking testbench of window_generator.
//
// Runs a 3x3 and a 5x5 generator side by side on a small 8x6 image.  Three
// frames of random pixel words are streamed with random gaps in vld_pix and a
// vsync pulse before each frame.  Every emitted window of the first two frames
// is compared element by element with the window cut out of the stored frame
// (BORDER outside the frame), and its centre coordinates and its position in
// the stream (the number of valid input pixels accepted so far) are checked.
module tb_window_generator;
  localparam int IW = 8, IH = 6, FW = 16;
  localparam logic [FW-1:0] BRD = 16'h0000;
  localparam int NPIX = IW * IH;

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [FW-1:0] pixel_in;
  logic          vld_pix, vsync;
  logic [FW-1:0] w3 [3][3];
  logic [FW-1:0] w5 [5][5];
  logic          v3, v5;
  logic [2:0]    cx3, cx5;
  logic [2:0]    cy3, cy5;

  window_generator #(.IMG_W(IW), .IMG_H(IH), .WIN_H(3), .WIN_W(3), .FLOAT_WIDTH(FW), .BORDER(BRD))
    dut3 (.clock(clock), .reset(reset), .pixel_in(pixel_in), .vld_pix(vld_pix), .vsync(vsync),
          .w(w3), .win_valid(v3), .center_x(cx3), .center_y(cy3));
  window_generator #(.IMG_W(IW), .IMG_H(IH), .WIN_H(5), .WIN_W(5), .FLOAT_WIDTH(FW), .BORDER(BRD))
    dut5 (.clock(clock), .reset(reset), .pixel_in(pixel_in), .vld_pix(vld_pix), .vsync(vsync),
          .w(w5), .win_valid(v5), .center_x(cx5), .center_y(cy5));

  logic [FW-1:0] img [3][NPIX];
  int checks = 0, failures = 0;
  int n_in = 0;          // valid pixels accepted
  int n3 = 0, n5 = 0;    // windows seen

  function automatic logic [FW-1:0] pix(input int f, input int x, input int y);
    if (x < 0 || x >= IW || y < 0 || y >= IH) return BRD;
    return img[f][y * IW + x];
  endfunction

  task automatic check_win(input int n, input int wh, input int cx, input int cy);
    int f, ex, ey, ch, cw;
    logic [FW-1:0] got, expv;
    f  = n / NPIX;
    ex = (n % NPIX) % IW;
    ey = (n % NPIX) / IW;
    ch = (wh - 1) / 2;
    cw = ch;
    checks++;
    if (cx != ex || cy != ey || n_in != n + ch * IW + cw + 2) begin
      failures++;
      $display("POS %0dx%0d window %0d: centre (%0d,%0d) exp (%0d,%0d), inputs %0d",
               wh, wh, n, cx, cy, ex, ey, n_in);
    end
    for (int r = 0; r < wh; r++)
      for (int c = 0; c < wh; c++) begin
        got  = (wh == 3) ? w3[r][c] : w5[r][c];
        expv = pix(f, ex + c - cw, ey + ch - r);
        checks++;
        if (got !== expv) begin
          failures++;
          if (failures < 20)
            $display("VAL %0dx%0d window %0d (%0d,%0d) w[%0d][%0d]=%h exp %h",
                     wh, wh, n, ex, ey, r, c, got, expv);
        end
      end
  endtask

  // Monitor: sample right after each rising edge.
  always @(posedge clock) begin
    #1;
    if (!reset && vld_pix_q) n_in++;
    if (v3) begin if (n3 < 2 * NPIX) check_win(n3, 3, int'(cx3), int'(cy3)); n3++; end
    if (v5) begin if (n5 < 2 * NPIX) check_win(n5, 5, int'(cx5), int'(cy5)); n5++; end
  end
  logic vld_pix_q;
  always @(posedge clock) vld_pix_q <= vld_pix;

  initial begin
    repeat (20000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 3; f++)
      for (int i = 0; i < NPIX; i++) img[f][i] = 16'($urandom_range(1, 65535));
    pixel_in = '0; vld_pix = 1'b0; vsync = 1'b0;
    repeat (3) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    for (int f = 0; f < 3; f++) begin
      @(negedge clock) vsync = 1'b1;
      @(negedge clock) vsync = 1'b0;
      for (int i = 0; i < NPIX; i++) begin
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clock); vld_pix = 1'b0; pixel_in = 16'hdead;
        end
        @(negedge clock); vld_pix = 1'b1; pixel_in = img[f][i];
      end
      @(negedge clock) vld_pix = 1'b0;
      repeat (5) @(negedge clock);
    end
    repeat (10) @(negedge clock);
    checks++;
    if (n3 < 2 * NPIX || n5 < 2 * NPIX) begin
      failures++;
      $display("too few windows: %0d %0d", n3, n5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
