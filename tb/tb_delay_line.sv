// tb_delay_line -- self-checking testbench of delay_line.
//
// Three instances (depth 0, 1 and 6) receive the same random stream; each
// output must equal the input of exactly DEPTH clocks before.  Reset is
// asserted again in mid-stream: the registered instances must then output
// zero until new data has propagated through.
module tb_delay_line;
  localparam int W = 12;
  localparam int N = 1000;

  logic clock = 1'b0;
  logic reset = 1'b1;
  always #5 clock = ~clock;

  logic [W-1:0] din, q0, q1, q6;
  logic [W-1:0] hist [N];
  int rst_at [N];
  int checks = 0, failures = 0;

  delay_line #(.WIDTH(W), .DEPTH(0)) d0 (.clock(clock), .reset(reset), .din(din), .dout(q0));
  delay_line #(.WIDTH(W), .DEPTH(1)) d1 (.clock(clock), .reset(reset), .din(din), .dout(q1));
  delay_line #(.WIDTH(W), .DEPTH(6)) d6 (.clock(clock), .reset(reset), .din(din), .dout(q6));

  // Expected output of a DEPTH-d line at cycle i: the input of cycle i-d,
  // or 0 when a reset edge lies between.
  function automatic logic [W-1:0] expect_q(input int i, input int d);
    if (i - d < 0) return '0;
    for (int j = i - d; j < i; j++) if (rst_at[j] != 0) return '0;
    return hist[i - d];
  endfunction

  task automatic cmp(input int i, input int d, input logic [W-1:0] got);
    checks++;
    if (got !== expect_q(i, d)) begin
      failures++;
      if (failures < 10) $display("MISMATCH depth %0d cycle %0d: got %h expected %h", d, i, got, expect_q(i, d));
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
      hist[i] = W'($urandom);
      rst_at[i] = (i == 500) ? 1 : 0;
    end
    din = '0;
    repeat (3) @(posedge clock);
    @(negedge clock) reset = 1'b0;
    // Cycle i: din = hist[i] is applied, then the clock edge closing cycle i.
    for (int i = 0; i < N; i++) begin
      din = hist[i];
      reset = (rst_at[i] != 0);
      #1;
      cmp(i, 0, q0);
      @(posedge clock);
      #1;
      if (i + 1 < N) begin
        cmp(i + 1, 1, q1);
        cmp(i + 1, 6, q6);
      end
      @(negedge clock);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
