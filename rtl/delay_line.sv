// delay_line -- delays a WIDTH-bit word by DEPTH clock cycles.
//
// A plain chain of DEPTH registers, cleared by the synchronous reset, in the
// style of the latency-matching registers a schedule inserts wherever two
// operands of one operator arrive with different latencies (the delay of
// signal s_i is max(lambda(s_i), lambda(s_j)) - lambda(s_i)).  DEPTH = 0 is
// allowed and gives a plain wire.  Timing: dout(t) = din(t - DEPTH).
module delay_line #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 4
) (
  input  logic             clock,
  input  logic             reset,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  if (DEPTH == 0) begin : g_wire
    assign dout = din;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clock) begin
      if (reset) begin
        for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else begin
        stage[0] <= din;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign dout = stage[DEPTH-1];
  end
endmodule
