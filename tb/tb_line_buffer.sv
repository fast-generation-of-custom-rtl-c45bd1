// tb_line_buffer -- self-checking testbench of line_buffer.
//
// Two 7-word line buffers are chained as in the window generator (the second
// is written with the first one's registered output).  Random words are
// written at column counts 0..6 with random idle cycles.  After each valid
// clock the first buffer must output the word of the same column one line
// earlier and the second the word two lines earlier.
module tb_line_buffer;
  localparam int D = 7, WD = 16, LINES = 40;
  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;
  logic          en;
  logic [2:0]    col;
  logic [WD-1:0] din, pin, q0, q1;
  logic [WD-1:0] hist [LINES][D];
  int checks = 0, failures = 0;

  // Registered input pixel, as in the window generator.
  always_ff @(posedge clock) if (en) pin <= din;

  line_buffer #(.DEPTH(D), .WIDTH(WD)) lb0 (.clock(clock), .reset(reset), .valid_pixel(en),
    .col_count(col), .data_in(pin), .data_out(q0));
  line_buffer #(.DEPTH(D), .WIDTH(WD)) lb1 (.clock(clock), .reset(reset), .valid_pixel(en),
    .col_count(col), .data_in(q0), .data_out(q1));

  initial begin
    repeat (5000) @(posedge clock);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    en = 1'b0; col = '0; din = '0;
    repeat (2) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    for (int l = 0; l < LINES; l++)
      for (int c = 0; c < D; c++) begin
        while ($urandom_range(0, 2) == 0) begin @(negedge clock); en = 1'b0; end
        @(negedge clock);
        en = 1'b1; col = 3'(c); din = 16'($urandom); hist[l][c] = din;
        @(posedge clock); #1;
        if (l >= 1) begin
          checks++;
          if (q0 !== hist[l-1][c]) begin failures++; $display("lb0 line %0d col %0d: %h exp %h", l, c, q0, hist[l-1][c]); end
        end
        if (l >= 2) begin
          checks++;
          if (q1 !== hist[l-2][c]) begin failures++; $display("lb1 line %0d col %0d: %h exp %h", l, c, q1, hist[l-2][c]); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
