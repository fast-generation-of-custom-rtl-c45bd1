// fp_spatial_filters_bench -- end-to-end bench of the fp_spatial_filters top,
// shared by tb_fp_spatial_filters (small image, three frames) and
// tb_fp_spatial_filters_full (one 1920x1080 frame, top at its defaults).
//
// NF frames of random float pixels (many of them below 1.0 or negative) are
// streamed with random blanking gaps in vld_pix and a vsync pulse before
// every frame; the conv3x3 and conv5x5 kernels are random and change between
// frames.  Every output of every filter is checked: its coordinates must
// follow raster order, and its value must match a double-precision model of
// the filter applied to the stored frame, with 0 outside the image (and with
// the float16 saturation of the Sobel squares modelled).  The bench counts
// how often each mechanism occurred -- border windows (top, bottom, left,
// right), blanking cycles, vsync pulses, both branches of the non-linear
// filter's CMP_and_SWAP, the max(w,1) clamp, kernel changes -- and fails if
// any of them never happened.  After the last frame, 2*IW+4 extra pixels of
// a following frame flush out the windows of the last lines.
module fp_spatial_filters_bench #(
  parameter int IW   = 12,   // image width
  parameter int IH   = 8,    // image height
  parameter int NF   = 3,    // frames
  parameter bit FULL = 1'b0  // instantiate the top with its default parameters
) ();
  import fp_pkg::*;
  localparam int FW = 16, MW = 10, EW = 5, BI = 15;
  localparam int NPIX = IW * IH;
  localparam real FMAX = 131008.0;  // largest float16(10,5) magnitude

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [FW-1:0] pixel_in;
  logic          vld_pix, vsync;
  logic [FW-1:0] k3 [3][3];
  logic [FW-1:0] k5 [5][5];
  logic [FW-1:0] o_pix [5];
  logic          o_vld [5];
  logic [$clog2(IW)-1:0] o_x [5];
  logic [$clog2(IH)-1:0] o_y [5];

  if (FULL) begin : g_full
    fp_spatial_filters dut (
    .clock(clock), .reset(reset), .pixel_in(pixel_in), .vld_pix(vld_pix), .vsync(vsync),
    .k3(k3), .k5(k5),
    .conv3_pix(o_pix[0]),  .conv3_valid(o_vld[0]),  .conv3_x(o_x[0]),  .conv3_y(o_y[0]),
    .conv5_pix(o_pix[1]),  .conv5_valid(o_vld[1]),  .conv5_x(o_x[1]),  .conv5_y(o_y[1]),
    .median_pix(o_pix[2]), .median_valid(o_vld[2]), .median_x(o_x[2]), .median_y(o_y[2]),
    .nl_pix(o_pix[3]),     .nl_valid(o_vld[3]),     .nl_x(o_x[3]),     .nl_y(o_y[3]),
    .sobel_pix(o_pix[4]),  .sobel_valid(o_vld[4]),  .sobel_x(o_x[4]),  .sobel_y(o_y[4]));
  end else begin : g_small
    fp_spatial_filters #(.IMG_W(IW), .IMG_H(IH)) dut (
    .clock(clock), .reset(reset), .pixel_in(pixel_in), .vld_pix(vld_pix), .vsync(vsync),
    .k3(k3), .k5(k5),
    .conv3_pix(o_pix[0]),  .conv3_valid(o_vld[0]),  .conv3_x(o_x[0]),  .conv3_y(o_y[0]),
    .conv5_pix(o_pix[1]),  .conv5_valid(o_vld[1]),  .conv5_x(o_x[1]),  .conv5_y(o_y[1]),
    .median_pix(o_pix[2]), .median_valid(o_vld[2]), .median_x(o_x[2]), .median_y(o_y[2]),
    .nl_pix(o_pix[3]),     .nl_valid(o_vld[3]),     .nl_x(o_x[3]),     .nl_y(o_y[3]),
    .sobel_pix(o_pix[4]),  .sobel_valid(o_vld[4]),  .sobel_x(o_x[4]),  .sobel_y(o_y[4]));
  end

  logic [FW-1:0] img [NF][NPIX];
  logic [FW-1:0] kk3 [NF][3][3];
  logic [FW-1:0] kk5 [NF][5][5];
  int checks = 0, failures = 0;
  int nout [5] = '{0, 0, 0, 0, 0};
  int n_top = 0, n_bottom = 0, n_left = 0, n_right = 0, n_gap = 0, n_vsync = 0;
  int n_beta_gt = 0, n_beta_le = 0, n_clamp = 0, n_kchange = 0;
  string names [5] = '{"conv3x3", "conv5x5", "median", "nl", "sobel"};

  function automatic real r(input logic [FW-1:0] f);
    return fp_to_real(64'(f), MW, EW, BI);
  endfunction
  function automatic real ab(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
  // Window element w[i][j] of the window centred on (x, y), size 2c+1.
  function automatic real wv(input int f, input int x, input int y, input int c, input int i,
                             input int j);
    int px, py;
    px = x + j - c; py = y + c - i;
    if (px < 0 || px >= IW || py < 0 || py >= IH) return 0.0;
    return r(img[f][py * IW + px]);
  endfunction
  function automatic real sat(input real v);
    return (v > FMAX) ? FMAX : v;
  endfunction
  function automatic real mx1(input real v);
    return (v > 1.0) ? v : 1.0;
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

  // Reference value and tolerance of filter fi for centre (x, y) of frame f.
  task automatic model(input int fi, input int f, input int x, input int y, output real e,
                       output real tol);
    real s, m, p, gx, gy, fa, fb, fd, m1, m2;
    case (fi)
      0, 1: begin
        int c;
        c = (fi == 0) ? 1 : 2;
        s = 0.0; m = 0.0;
        for (int i = 0; i <= 2 * c; i++)
          for (int j = 0; j <= 2 * c; j++) begin
            p = wv(f, x, y, c, i, j) * ((fi == 0) ? r(kk3[f][i][j]) : r(kk5[f][i][j]));
            s += p; m += ab(p);
          end
        e = s; tol = m * 2.0 ** (4 - MW) + 1e-6;
      end
      2: begin
        m1 = med5(wv(f,x,y,1,0,0), wv(f,x,y,1,0,2), wv(f,x,y,1,1,1), wv(f,x,y,1,2,0), wv(f,x,y,1,2,2));
        m2 = med5(wv(f,x,y,1,0,1), wv(f,x,y,1,1,0), wv(f,x,y,1,1,1), wv(f,x,y,1,1,2), wv(f,x,y,1,2,1));
        e = (m1 + m2) / 2.0; tol = (ab(m1) + ab(m2)) * 2.0 ** (1 - MW) + 1e-6;
      end
      3: begin
        fa = 0.5 * ($sqrt(mx1(wv(f,x,y,1,0,0)) * mx1(wv(f,x,y,1,0,2))) +
                    $sqrt(mx1(wv(f,x,y,1,2,0)) * mx1(wv(f,x,y,1,2,2))));
        fb = 8.0 * ($ln(mx1(wv(f,x,y,1,0,1)) * mx1(wv(f,x,y,1,2,1))) +
                    $ln(mx1(wv(f,x,y,1,1,0)) * mx1(wv(f,x,y,1,1,2)))) / $ln(2.0);
        fd = 2.0 ** (0.0313 * mx1(wv(f,x,y,1,1,1)));
        e = (fb > fd) ? fa * (fd / fb) : fa * (fb / fd);
        tol = e * 2.0 ** -5 + fa * 2.0 ** -8;
        if (fb > fd) n_beta_gt++; else n_beta_le++;
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) if (wv(f,x,y,1,i,j) < 1.0) n_clamp++;
      end
      default: begin
        gx = 0.0; gy = 0.0; s = 0.0;
        for (int i = 0; i < 3; i++) begin
          gx += wv(f,x,y,1,i,0) * ((i == 1) ? 2.0 : 1.0) - wv(f,x,y,1,i,2) * ((i == 1) ? 2.0 : 1.0);
          gy += wv(f,x,y,1,0,i) * ((i == 1) ? 2.0 : 1.0) - wv(f,x,y,1,2,i) * ((i == 1) ? 2.0 : 1.0);
          for (int j = 0; j < 3; j++) s += 4.0 * ab(wv(f,x,y,1,i,j));
        end
        // Squares and their sum saturate at the largest float.
        e = $sqrt(sat(sat(gx * gx) + sat(gy * gy)));
        tol = s * 2.0 ** (5 - MW) + e * 2.0 ** (3 - MW) + 1e-6;
      end
    endcase
  endtask

  always @(posedge clock) begin
    #1;
    if (!reset) begin
      if (!vld_pix) n_gap++;
      if (vsync) n_vsync++;
      for (int fi = 0; fi < 5; fi++) begin
        if (o_vld[fi] && nout[fi] < NF * NPIX) begin
          int n, f, ex, ey;
          real e, tol, g;
          n = nout[fi]; f = n / NPIX; ex = (n % NPIX) % IW; ey = (n % NPIX) / IW;
          model(fi, f, ex, ey, e, tol);
          g = r(o_pix[fi]);
          checks++;
          if (int'(o_x[fi]) != ex || int'(o_y[fi]) != ey || ab(g - e) > tol) begin
            failures++;
            if (failures < 20)
              $display("MISMATCH %s output %0d: (%0d,%0d) exp (%0d,%0d) got %f expected %f",
                       names[fi], n, o_x[fi], o_y[fi], ex, ey, g, e);
          end
          if (fi == 0) begin
            if (ey == 0) n_top++;
            if (ey == IH - 1) n_bottom++;
            if (ex == 0) n_left++;
            if (ex == IW - 1) n_right++;
          end
          nout[fi]++;
        end
      end
    end
  end

  function automatic logic [FW-1:0] rnd_pix();
    case ($urandom_range(0, 7))
      0:       return '0;
      1:       return {1'b1, EW'($urandom_range(BI - 2, BI + 2)), MW'($urandom)};
      2:       return {1'b0, EW'(BI + 6), MW'($urandom)};
      default: return {1'b0, EW'($urandom_range(BI - 2, BI + 4)), MW'($urandom)};
    endcase
  endfunction
  function automatic logic [FW-1:0] rnd_k();
    if ($urandom_range(0, 7) == 0) return '0;
    return {1'($urandom_range(0, 1)), EW'($urandom_range(BI - 3, BI + 1)), MW'($urandom)};
  endfunction

  initial begin
    repeat (2 * (NF + 1) * NPIX + 200 * NF + 10000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < NPIX; i++) img[f][i] = rnd_pix();
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) kk3[f][i][j] = rnd_k();
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) kk5[f][i][j] = rnd_k();
    end
    pixel_in = '0; vld_pix = 1'b0; vsync = 1'b0;
    k3 = kk3[0]; k5 = kk5[0];
    repeat (3) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    for (int f = 0; f < NF; f++) begin
      @(negedge clock) vsync = 1'b1;
      @(negedge clock) vsync = 1'b0;
      for (int i = 0; i < NPIX; i++) begin
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clock); vld_pix = 1'b0; pixel_in = 16'h7bff;
        end
        @(negedge clock); vld_pix = 1'b1; pixel_in = img[f][i];
        // A kernel may change once the last window of the previous frame
        // (emitted with pixel CH*IW+CW+1 of this frame) has entered the
        // multipliers, and before the first window of this frame does.
        if (f > 0 && i == IW + 3) begin k3 = kk3[f]; n_kchange++; end
        if (f > 0 && i == 2 * IW + 4) begin k5 = kk5[f]; n_kchange++; end
      end
      // Blanking after the frame: enough to let the last windows out.
      for (int i = 0; i < 3 * IW + 8; i++) begin
        @(negedge clock); vld_pix = 1'b0;
      end
    end
    // The windows of the last frame need pixels of a following frame.
    @(negedge clock) vsync = 1'b1;
    @(negedge clock) vsync = 1'b0;
    for (int i = 0; i < 2 * IW + 4; i++) begin
      @(negedge clock); vld_pix = 1'b1; pixel_in = '0;
    end
    @(negedge clock) vld_pix = 1'b0;
    repeat (60) @(negedge clock);
    $display("outputs: conv3x3 %0d conv5x5 %0d median %0d nl %0d sobel %0d",
             nout[0], nout[1], nout[2], nout[3], nout[4]);
    $display("border windows: top %0d bottom %0d left %0d right %0d", n_top, n_bottom, n_left, n_right);
    $display("blanking cycles %0d, vsync pulses %0d, kernel changes %0d", n_gap, n_vsync, n_kchange);
    $display("nl: f_beta > f_delta %0d, f_beta <= f_delta %0d, clamped pixels %0d",
             n_beta_gt, n_beta_le, n_clamp);
    for (int fi = 0; fi < 5; fi++) begin
      checks++;
      if (nout[fi] < NF * NPIX) begin failures++; $display("too few outputs from %s", names[fi]); end
    end
    checks++;
    if (n_top == 0 || n_bottom == 0 || n_left == 0 || n_right == 0 || n_gap == 0 ||
        n_vsync == 0 || n_beta_gt == 0 || n_beta_le == 0 || n_clamp == 0 ||
        (NF > 1 && n_kchange == 0)) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
